// convcotm_pkg: sizes, types and helper functions shared by the ConvCoTM
// (convolutional coalesced Tsetlin machine) inference accelerator.
//
// The numbers are those of the configuration the design is built for:
// 28x28 booleanized single-channel images, a 10x10 convolution window with
// stride 1 (19x19 = 361 patches), 136 Boolean features per patch (100 window
// pixels + 18 + 18 thermometer-coded position bits), 272 literals, 128 clauses,
// 10 classes and 8-bit two's-complement clause weights. The class-sum width
// (15 bits) is the smallest that holds 128 sums of 8-bit weights; the byte
// layout of the model stream is this design's own choice (see model_registers).
package convcotm_pkg;

  localparam int IMG_DIM      = 28;                       // image is IMG_DIM x IMG_DIM pixels
  localparam int WIN          = 10;                       // convolution window WIN x WIN
  localparam int N_POS        = IMG_DIM - WIN + 1;        // 19 window positions per axis
  localparam int N_PATCHES    = N_POS * N_POS;            // 361
  localparam int THERM_BITS   = IMG_DIM - WIN;            // 18 thermometer bits per axis
  localparam int N_FEAT       = WIN * WIN + 2 * THERM_BITS; // 136 features per patch
  localparam int N_LIT        = 2 * N_FEAT;               // 272 literals per patch
  localparam int N_CLAUSES    = 128;
  localparam int N_CLASSES    = 10;
  localparam int W_BITS       = 8;                        // clause weight width
  localparam int SUM_BITS     = W_BITS + $clog2(N_CLAUSES); // 15-bit signed class sums
  localparam int LABEL_BITS   = 4;

  // Byte stream sizes seen by the data interface.
  localparam int IMG_BYTES        = IMG_DIM * IMG_DIM / 8;  // 98 image bytes
  localparam int IMG_XFER_BYTES   = IMG_BYTES + 1;          // + 1 label byte = 99
  localparam int TA_BYTES_PER_CL  = N_LIT / 8;              // 34 bytes of TA actions per clause
  localparam int TA_BYTES         = N_CLAUSES * TA_BYTES_PER_CL;   // 4352
  localparam int WEIGHT_BYTES     = N_CLASSES * N_CLAUSES;         // 1280
  localparam int MODEL_BYTES      = TA_BYTES + WEIGHT_BYTES;       // 5632

  // Class-sum pipeline: registers at three stages of the 7-level adder tree.
  localparam int SUM_PIPE_STAGES  = 3;

  // Main state machine states.
  typedef enum logic [2:0] {
    S_IDLE       = 3'd0,
    S_LOAD_MODEL = 3'd1,
    S_PATCH_GEN  = 3'd2,
    S_CLASS_SUM  = 3'd3,
    S_PREDICT    = 3'd4,
    S_FINISHED   = 3'd5
  } state_t;

  // Thermometer code of a window position: position p sets the p lowest bits
  // (0 -> all zeros, 18 -> all ones).
  function automatic logic [THERM_BITS-1:0] therm(input int unsigned p);
    logic [THERM_BITS-1:0] t;
    for (int b = 0; b < THERM_BITS; b++) t[b] = (b < p);
    return t;
  endfunction

endpackage
