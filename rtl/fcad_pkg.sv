// fcad_pkg: widths, the layer-configuration record and the default
// configuration of the three-branch codec-avatar decoder accelerator.
//
// Every pipeline stage (basic architecture unit) is described by one
// layer_cfg_t record: the layer shape (input channels, output channels,
// input height and width, kernel size), the three parallel factors of the
// unit (cpf, kpf and the H-partition hp), whether a 2x up-sampling and an
// activation are fused behind the convolution, and the requantisation shift.
//
// From the paper: 8-bit features and weights (the 8-bit accelerators), the
// branch structure ([CAU]x5+C for branch 1, a shared [CAU]x5 front end,
// [CAU]x2+C for branch 2 and C for branch 3), the input sizes [4,8,8] and
// [7,8,8], the output sizes [3,256,256], [3,1024,1024] and [2,256,256], and
// Conv7 of branch 2 with 16 input and 16 output channels. Our own choices:
// the remaining channel counts, the 3x3 kernels, the parallel factors, the
// 64-bit memory bus, the 16-bit untied bias and the 32-bit accumulator.
// Packed arrays are listed last stage first, so index 0 is the first stage.
package fcad_pkg;

  localparam int DW     = 8;    // feature width (DW, 8-bit design)
  localparam int WW     = 8;    // weight width (WW, 8-bit design)
  localparam int MW     = 64;   // external memory bus width (MW, value our own)
  localparam int BIAS_W = 16;   // untied bias width
  localparam int ACC_W  = 32;   // accumulator width
  localparam int ADDR_W = 32;   // external memory word address width
  localparam int MAX_CH = 256;  // widest pixel carried between stages
  localparam int PIX_W  = MAX_CH * DW;

  typedef struct packed {
    int in_ch;   // input channels
    int out_ch;  // output channels
    int h;       // input feature-map height
    int w;       // input feature-map width
    int k;       // kernel size (odd, stride 1, zero padding (k-1)/2)
    int cpf;     // channel parallel factor (input channels per PE per cycle)
    int kpf;     // kernel parallel factor (PEs per engine)
    int hp;      // H-partition (number of compute engines)
    int up;      // 1: fused 2x nearest-neighbour up-sampling
    int act;     // 1: fused leaky-ReLU activation
    int shift;   // requantisation right shift
  } layer_cfg_t;

  // Number of stages of each branch after layer reorganisation.
  localparam int BR1_N    = 6;
  localparam int BR2_N    = 8;  // stages 1..5 are the front end shared with branch 3
  localparam int BR3_N    = 1;
  localparam int SHARED_N = 5;

  //            in   out    h     w   k cpf kpf hp up act sh
  localparam layer_cfg_t [BR1_N-1:0] BR1_CFG = '{
    layer_cfg_t'{ 32,   3,  256,  256, 3, 16,  3, 1, 0, 0, 8},
    layer_cfg_t'{ 64,  32,  128,  128, 3, 16,  8, 2, 1, 1, 8},
    layer_cfg_t'{ 64,  64,   64,   64, 3, 16,  8, 1, 1, 1, 8},
    layer_cfg_t'{128,  64,   32,   32, 3, 16,  4, 1, 1, 1, 8},
    layer_cfg_t'{256, 128,   16,   16, 3, 16,  4, 1, 1, 1, 8},
    layer_cfg_t'{  4, 256,    8,    8, 3,  4,  1, 1, 1, 1, 8}
  };

  localparam layer_cfg_t [BR2_N-1:0] BR2_CFG = '{
    layer_cfg_t'{ 16,   3, 1024, 1024, 3, 16,  3,16, 0, 0, 8},
    layer_cfg_t'{ 16,  16,  512,  512, 3, 16, 16, 4, 1, 1, 8},
    layer_cfg_t'{ 64,  16,  256,  256, 3, 16, 16, 4, 1, 1, 8},
    layer_cfg_t'{ 64,  64,  128,  128, 3, 16, 16, 4, 1, 1, 8},
    layer_cfg_t'{128,  64,   64,   64, 3, 16, 16, 2, 1, 1, 8},
    layer_cfg_t'{128, 128,   32,   32, 3, 16, 16, 1, 1, 1, 8},
    layer_cfg_t'{256, 128,   16,   16, 3, 16,  8, 1, 1, 1, 8},
    layer_cfg_t'{  7, 256,    8,    8, 3,  7,  1, 1, 1, 1, 8}
  };

  localparam layer_cfg_t [BR3_N-1:0] BR3_CFG = '{
    layer_cfg_t'{ 64,   2,  256,  256, 3, 16,  2, 4, 0, 0, 8}
  };

  function automatic int cdiv(int a, int b);
    return (a + b - 1) / b;
  endfunction

endpackage
