// neuromax_pkg: sizes, number formats and shared types of the NeuroMAX CONV core.
//
// Number formats (following the paper): activations are 6-bit log codes, weights
// are 7-bit log codes whose bit 6 is the sign of the weight. A thread turns a pair
// of codes into a 16-bit signed linear product. Log base is sqrt(2), so the code
// sum has one fractional bit (n = 1) and the thread keeps a two-entry table of
// 2^FRAC values (15'h7FFF and 15'h5A82, printed in the thread diagram).
//
// Array shape (paper): 6 PE matrices, each 6 rows x 3 columns of PEs, 3 threads
// per PE, 18 psums per matrix.
//
// Widths of the adder stages, the layer-parameter fields, the memory depths and
// the mode encoding are this design's own choices.
package neuromax_pkg;

  // ---- array shape (paper) ----
  localparam int unsigned PE_ROWS    = 6;
  localparam int unsigned PE_COLS    = 3;
  localparam int unsigned THREADS    = 3;
  localparam int unsigned N_MATRICES = 6;
  localparam int unsigned N_PSUMS    = PE_ROWS * THREADS;   // o1..o18
  localparam int unsigned N_LANES    = 6;                   // outputs of one adder net 1

  // ---- number formats ----
  localparam int unsigned A_BITS = 6;      // activation log code (paper)
  localparam int unsigned W_BITS = 7;      // weight log code, bit 6 = sign (paper)
  localparam int unsigned P_W    = 16;     // thread product (paper: p11[15:0])
  localparam int unsigned O_W    = 18;     // adder net 0 psum: sum of 3 products
  localparam int unsigned S_W    = 22;     // adder net 1 / channel accumulator first stage
  localparam int unsigned ACC_W  = 32;     // channel accumulator register

  // 2^FRAC table of a thread (values printed in the thread diagram)
  localparam logic [14:0] LUT_FRAC1 = 15'h7FFF;   // ~1.0   in Q0.15
  localparam logic [14:0] LUT_FRAC0 = 15'h5A82;   // ~2^-0.5 in Q0.15

  // Re-quantisation thresholds (rounded up): mantissa (Q1.15) at which round(2*log2(y))
  // steps up within one octave, 2^0.25 and 2^0.75 times 2^15.
  localparam logic [15:0] LOG_T1 = 16'd38968;
  localparam logic [15:0] LOG_T2 = 16'd55110;

  // ---- memory word widths (paper: 6x3x6 = 108 bits, 7x3x3 = 63 bits) ----
  localparam int unsigned IN_WORD_W  = PE_ROWS * PE_COLS * A_BITS;   // 108
  localparam int unsigned WT_WORD_W  = PE_COLS * THREADS * W_BITS;   // 63
  localparam int unsigned OUT_WORD_W = N_LANES * A_BITS;             // 36

  // ---- memory depths (own choice; 6 x (4096x108 + 1024x63 + 4096x36) bits
  //      = 3.93 Mbit, close to the 3.8 Mb the paper gives) ----
  localparam int unsigned IN_DEPTH  = 4096;
  localparam int unsigned WT_DEPTH  = 1024;
  localparam int unsigned OUT_DEPTH = 4096;
  localparam int unsigned IN_AW  = $clog2(IN_DEPTH);
  localparam int unsigned WT_AW  = $clog2(WT_DEPTH);
  localparam int unsigned OUT_AW = $clog2(OUT_DEPTH);

  // longest boundary shift register. Per-channel 3x3 needs the output width
  // (224 for VGG16 / ResNet-34); the channel-summed 3x3 mode needs output width
  // times ceil(channels/6), 224 x 11 = 2464 for VGG16's widest layers.
  localparam int unsigned SR_MAX_LEN = 2560;
  localparam int unsigned SR_LW      = $clog2(SR_MAX_LEN + 1);

  // ---- convolution type ----
  typedef enum logic [1:0] {
    MODE_3X3_S1 = 2'd0,
    MODE_3X3_S2 = 2'd1,
    MODE_1X1    = 2'd2
  } conv_mode_e;

  // Layer parameters sent by the host before a run. The paper lists filter size,
  // input width/height, output width/height and total channels; filters and
  // q_offset (re-quantisation offset) are this design's additions.
  typedef struct packed {
    conv_mode_e  mode;
    logic [8:0]  in_w;
    logic [8:0]  in_h;
    logic [8:0]  out_w;
    logic [8:0]  out_h;
    logic [9:0]  channels;
    logic [9:0]  filters;
    logic        ch_sum;     // 3x3: sum over channels (standard conv) instead of per channel
    logic signed [7:0] q_offset;
  } layer_params_t;

  // Control that travels down the pipeline with every tile step.
  typedef struct packed {
    logic              valid;        // a tile step
    conv_mode_e        mode;
    logic              last_sector;  // last 6-row sector (3x3 stride 2 tail row)
    logic              ca_clear;     // start a new channel accumulation
    logic              wr;           // results of this step are written
    logic [OUT_AW-1:0] addr_a;       // output word of the current sector / pixel group
    logic [N_LANES-1:0] mask_a;      // lanes written at addr_a
    logic [OUT_AW-1:0] addr_b;       // output word of the previous sector (boundary rows)
    logic [N_LANES-1:0] mask_b;
  } step_ctl_t;

endpackage
