// nb_pkg: constants and types shared by the NeuroBlend accelerator.
//
// Binary activations and weights are packed along the channel dimension into
// 48-bit words, the width of one DSP48E2 logic operation (one BMAC). Fixed-point
// activations, weights and batch-norm coefficients are 16-bit two's complement
// with 8 fraction bits (Q8.8); the 16-bit width follows the paper, the split
// into integer and fraction bits is this design's choice. The joint domain
// (thresholding, BN-PReLU, pooling, residual add) processes LANES = 16
// channels per cycle, the GCD of the 32-high FPMAC systolic array and the
// 48-bit BMAC width.
//
// All parameters are written through one configuration bus (cfg_wr_t): a
// block index, a target memory (cfg_sel_e), a word address and up to 48 data
// bits. Writes take effect on the clock edge where we is high.
package nb_pkg;

  localparam int BMAC_W = 48;  // bits per BMAC word
  localparam int LANES  = 16;  // joint-domain parallelism
  localparam int ACT_W  = 16;  // fixed-point word
  localparam int FRAC   = 8;   // fraction bits of activations and coefficients
  localparam int SA_DIM = 32;  // systolic array rows and columns
  localparam int ADDR_W = 16;  // feature-map and configuration address width

  typedef logic signed [ACT_W-1:0] act_t;
  typedef act_t lanes_t [LANES];
  typedef logic [LANES-1:0] bits_t;

  // Configuration targets.
  typedef enum logic [3:0] {
    CFG_TH    = 4'd0,   // threshold per input channel             (addr = channel)
    CFG_BW    = 4'd1,   // binary 3x3 weights, 48 bits per word     (addr = (cout*9+tap)*NW+word)
    CFG_BN1_A = 4'd2,   // main-path BN scale                       (addr = channel)
    CFG_BN1_B = 4'd3,   // main-path BN shift
    CFG_PRELU = 4'd4,   // PReLU negative slope
    CFG_OBN_A = 4'd5,   // block output BN scale
    CFG_OBN_B = 4'd6,   // block output BN shift
    CFG_FW    = 4'd7,   // skip 1x1 conv weights                    (addr = cout*CIN+cin)
    CFG_FB    = 4'd8,   // skip 1x1 conv bias                       (addr = cout)
    CFG_FCW   = 4'd9,   // linear layer weights                     (addr = out*NIN+in)
    CFG_FCB   = 4'd10   // linear layer bias                        (addr = out)
  } cfg_sel_e;

  typedef struct packed {
    logic              we;
    logic [3:0]        blk;   // blend block index; linear-layer writes ignore it
    cfg_sel_e          sel;
    logic [ADDR_W-1:0] addr;
    logic [47:0]       data;
  } cfg_wr_t;

  // Saturate a wide signed value to ACT_W bits.
  function automatic act_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return act_t'(16'sh7fff);
    else if (v < -48'sd32768) return act_t'(16'sh8000);
    else                      return act_t'(v[ACT_W-1:0]);
  endfunction

endpackage
