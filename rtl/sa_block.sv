// sa_block: the select-and-average RFNoC block of the channel-sounder
// receiver, top of this design.
//
// In the receiver FPGA the radio block streams the received samples through
// the RFNoC crossbar into this block, and the block's output goes through the
// crossbar and Ethernet to the host.  Instead of forwarding all 500 Msps, the
// block picks out of each channel snapshot the M received repetitions of the
// sounding signal (skipping P samples before them and R after them) and
// averages them sample by sample, so the host receives one signal of L
// samples per snapshot.  It is built from:
//   sa_regs        settings written by the host (L, P, M, K, R, enable),
//   sa_controller  sample counter and state machine (which beats to keep and
//                  whether they are IN, ADD_IN or ADD_OUT),
//   sa_averager    shifter, BRAM and adder that form the running sum.
// The radio, crossbar, Ethernet transport and host lie outside; their
// streams are the ports of this module.
//
// Interface: one clock (clk_radio2x, 250 MHz in the paper), synchronous
// active-high reset.  Input stream s_axis_*: 64-bit beats of two sc16
// samples, valid/ready.  Output stream m_axis_*: the averaged signal, L/2
// beats with tlast on the last one, i.e. one packet per snapshot.  Control
// port ctrlport_*: see sa_regs.  The RFNoC packet framing (CHDR headers,
// timestamps) and the clock crossing of the control port belong to the
// RFNoC shell and are not modelled; the control port is assumed to be on
// the same clock here.
//
// Timing: the input is taken at one beat per clock whenever the output is
// not stalled, and always during skip phases.  An averaged beat appears on
// m_axis two clocks after the matching beat of the M-th signal is accepted.
module sa_block
  import sa_pkg::*;
#(
  parameter int unsigned MAX_L = 1024,   // largest L (samples); BRAM holds MAX_L/2 words
  // Reset values of the settings: the paper's measurement configuration.
  parameter int unsigned RST_L = 1024,
  parameter int unsigned RST_P = 2048,
  parameter int unsigned RST_M = 64,
  parameter int unsigned RST_K = 6,
  parameter int unsigned RST_R = 2432416,
  localparam int unsigned DEPTH = MAX_L / SPC,
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst,

  // Control port from the RFNoC shell (host register access).
  input  logic         ctrlport_req_wr,
  input  logic         ctrlport_req_rd,
  input  logic [19:0]  ctrlport_req_addr,
  input  logic [31:0]  ctrlport_req_data,
  output logic         ctrlport_resp_ack,
  output logic [31:0]  ctrlport_resp_data,

  // Sample stream from the radio block, via the crossbar.
  input  logic [63:0]  s_axis_tdata,
  input  logic         s_axis_tvalid,
  output logic         s_axis_tready,

  // Averaged signal towards the host, via the crossbar.
  output logic [63:0]  m_axis_tdata,
  output logic         m_axis_tlast,
  output logic         m_axis_tvalid,
  input  logic         m_axis_tready
);

  sa_cfg_t          cfg;
  logic [1:0]       phase;
  logic [REG_W-1:0] snapshots;

  logic             cap_valid, cap_ready, cap_last;
  beat_t            cap_data;
  sa_mode_e         cap_mode;
  logic [AW-1:0]    cap_addr;
  logic [4:0]       k;

  sa_regs #(
    .MAX_L(MAX_L), .RST_L(RST_L), .RST_P(RST_P),
    .RST_M(RST_M), .RST_K(RST_K), .RST_R(RST_R)
  ) u_regs (
    .clk                (clk),
    .rst                (rst),
    .ctrlport_req_wr    (ctrlport_req_wr),
    .ctrlport_req_rd    (ctrlport_req_rd),
    .ctrlport_req_addr  (ctrlport_req_addr),
    .ctrlport_req_data  (ctrlport_req_data),
    .ctrlport_resp_ack  (ctrlport_resp_ack),
    .ctrlport_resp_data (ctrlport_resp_data),
    .phase_i            (phase),
    .snapshots_i        (snapshots),
    .cfg_o              (cfg)
  );

  sa_controller #(.DEPTH(DEPTH)) u_ctrl (
    .clk         (clk),
    .rst         (rst),
    .cfg_i       (cfg),
    .in_valid_i  (s_axis_tvalid),
    .in_ready_o  (s_axis_tready),
    .in_data_i   (s_axis_tdata),
    .cap_valid_o (cap_valid),
    .cap_ready_i (cap_ready),
    .cap_data_o  (cap_data),
    .cap_mode_o  (cap_mode),
    .cap_addr_o  (cap_addr),
    .cap_last_o  (cap_last),
    .k_o         (k),
    .phase_o     (phase),
    .snapshots_o (snapshots)
  );

  sa_averager #(.DEPTH(DEPTH)) u_avg (
    .clk         (clk),
    .rst         (rst),
    .k_i         (k),
    .in_valid_i  (cap_valid),
    .in_ready_o  (cap_ready),
    .in_data_i   (cap_data),
    .in_mode_i   (cap_mode),
    .in_addr_i   (cap_addr),
    .in_last_i   (cap_last),
    .out_valid_o (m_axis_tvalid),
    .out_ready_i (m_axis_tready),
    .out_data_o  (m_axis_tdata),
    .out_last_o  (m_axis_tlast)
  );

endmodule
