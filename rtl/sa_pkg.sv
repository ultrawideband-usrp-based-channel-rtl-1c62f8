// sa_pkg: types and constants shared by the select-and-average block.
//
// The radio delivers complex-short (sc16) samples, two per clock at
// clk_radio2x = 250 MHz, i.e. 500 Msps, packed into one 64-bit beat.  The
// packing follows the usual sc16 convention: within each 32-bit sample the
// in-phase part sits in the upper half and the quadrature part in the lower
// half, and the earlier sample of the pair sits in the lower 32 bits.  The
// 64-bit width and the two samples per clock are the paper's; the packing
// order is this design's choice.
//
// sa_mode_e tells the averager what to do with one beat.  IN, ADD_IN and
// ADD_OUT are the three states named in the paper.  IN_OUT is added here for
// M = 1 (no averaging), where the only captured signal goes straight out.
package sa_pkg;

  localparam int unsigned SAMPLE_W   = 16;                // width of I or Q
  localparam int unsigned SPC        = 2;                 // samples per clock
  localparam int unsigned LANES      = 2 * SPC;           // I/Q lanes per beat
  localparam int unsigned BEAT_W     = LANES * SAMPLE_W;  // 64-bit memory word
  localparam int unsigned REG_W      = 32;                // settings register width


  typedef logic [BEAT_W-1:0] beat_t;

  // One complex-short sample.
  typedef struct packed {
    logic signed [SAMPLE_W-1:0] i;
    logic signed [SAMPLE_W-1:0] q;
  } sc16_t;

  // One 64-bit beat viewed as two samples: s[1] upper 32 bits, s[0] lower.
  typedef sc16_t [SPC-1:0] sc16_pair_t;

  typedef enum logic [2:0] {
    MODE_SKIP    = 3'd0,  // sample discarded
    MODE_IN      = 3'd1,  // shifted sample written to BRAM
    MODE_ADD_IN  = 3'd2,  // shifted sample + BRAM word written back to BRAM
    MODE_ADD_OUT = 3'd3,  // shifted sample + BRAM word sent to the output
    MODE_IN_OUT  = 3'd4   // M = 1: shifted sample sent to the output
  } sa_mode_e;

  // Settings written by the host.  Lengths are in samples.
  typedef struct packed {
    logic             enable;
    logic [REG_W-1:0] l_len;
    logic [REG_W-1:0] p_len;
    logic [REG_W-1:0] m_num;
    logic [4:0]       k_shift;
    logic [REG_W-1:0] r_len;
  } sa_cfg_t;

endpackage
