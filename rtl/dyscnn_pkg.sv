// dyscnn_pkg: sizes and types shared by the DySCNN (dynamically sparsified CNN)
// accelerator blocks.
//
// The accelerator computes dot products of a dense input vector with filters whose
// weights have been randomly dropped ("noisy sparsification"). Only the surviving
// (active) weights are stored, together with a bit mask that says where they sit.
// The vector is processed in windows of WIN consecutive positions; the bit mask of
// one window is what the MUX signal generator works on.
//
// None of these sizes is printed in the source description; they are this design's
// choices: 8-bit signed inputs and weights (the word width of the FPGA accelerator
// family the design was prototyped on), a 32-bit accumulator, an 8-position
// look-ahead window, a 4 x 4 PE grid and a longest dot product of 576 windows
// (4608 = 3 x 3 x 512, the largest convolution kernel of VGG16 and ResNet50).
package dyscnn_pkg;

  localparam int unsigned DATA_W     = 8;    // input activation and weight width
  localparam int unsigned ACC_W      = 32;   // accumulator width
  localparam int unsigned WIN        = 8;    // look-ahead window, positions per step
  localparam int unsigned ROWS       = 4;    // PE rows: output pixels sharing the weights
  localparam int unsigned COLS       = 4;    // PE columns: filters of one schedule group
  localparam int unsigned MAX_BLOCKS = 576;  // windows per dot product (4608 positions)

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // Accelerator control states.
  typedef enum logic [1:0] {
    ST_IDLE,   // waiting for start
    ST_LOAD,   // fetch the bit masks of the first window
    ST_RUN     // one active weight per column per cycle
  } state_e;

endpackage
