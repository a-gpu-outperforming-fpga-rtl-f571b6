// bcnn_pkg: constants shared by the binary CNN accelerator.
//
// The accelerator runs the 9-layer CIFAR-10 binary CNN (six 3x3 convolution
// layers, three fully-connected layers).  Binary activations and weights are
// encoded +1 -> 1 and -1 -> 0, so a multiply becomes an XNOR and a sum becomes
// a bit count.  Every integer that leaves a bit count or a fixed-point dot
// product is carried as a signed YW-bit value; thresholds use the same width.
//
// The layer sizes below are those of the network the accelerator was built
// for; the per-layer unfolding factor UF and spatial parallelism P of the
// convolution layers follow the published per-layer optimisation (UF = FW*FD,
// P = output row width).  The fully-connected layer shapes (input row width
// and the number of input rows) are this design's own choice.
// AW, WW, IMG_C and NLAYER document the number formats and the layer count;
// the modules take these as parameters, so lint reports them as unused here.
package bcnn_pkg;
  // Width of every accumulated / compared integer.  The largest binary sum is
  // 9*512 = 4608, the largest first-layer sum 27*31*2 = 1674.
  localparam int YW = 16;
  // Width of a word on the weight / threshold load port (BRAM word length).
  localparam int LDW = 32;
  // Load port address fields.
  localparam int LD_BANK_W = 7;   // up to 128 banks of 32 bits = 4096-bit words
  localparam int LD_ADDR_W = 13;  // up to 8192 words per bank
  // First layer input format: 6-bit signed pixels, 2-bit signed weights.
  localparam int AW  = 6;
  localparam int WW  = 2;
  localparam int IMG_C = 3;
  // Number of layers and their numbering on the load port (0 = CONV-1).
  localparam int NLAYER = 9;

  typedef logic signed [YW-1:0] yval_t;

  // One write on the shared weight / threshold load port.
  typedef struct packed {
    logic                  en;
    logic [3:0]            layer;   // 0..8
    logic                  thr;     // 0: weight memory, 1: threshold memory
    logic [LD_BANK_W-1:0]  bank;    // 32-bit slice of the memory word
    logic [LD_ADDR_W-1:0]  addr;    // word address
    logic [LDW-1:0]        data;
  } ld_req_t;
endpackage
