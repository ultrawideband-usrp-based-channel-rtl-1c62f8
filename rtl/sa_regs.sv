// sa_regs: host-visible settings registers of the select-and-average block.
//
// The host software sets the block's parameters L, P, K and M (and here also
// R and an enable bit) through register writes.  The bus follows the RFNoC
// control-port convention in simplified form: a one-cycle req_wr or req_rd
// pulse with a byte address and 32-bit data, answered by a one-cycle
// resp_ack pulse on the next clock, with resp_data for reads.  Reset values
// are the settings of the paper's measurement (L = 1024, P = 2048, M = 64,
// K = 6, R = 2432416); the block starts disabled.  Register map (byte offsets,
// this design's choice):
//   0x00 CTRL      bit 0 enable (rw)
//   0x04 L         sounding signal length in samples (rw)
//   0x08 P         samples skipped before capture (rw)
//   0x0C M         number of averaged signals (rw)
//   0x10 K         right shift, bits [4:0] (rw)
//   0x14 R         samples skipped until the next snapshot (rw)
//   0x18 STATUS    bits [1:0] phase: 0 idle, 1 skip P, 2 capture, 3 skip R (ro)
//   0x1C SNAPSHOTS completed snapshots since enable (ro)
//   0x20 MAX_L     largest L the memory holds (ro)
// Unmapped addresses read 0 and ignore writes; every request is acknowledged.
module sa_regs
  import sa_pkg::*;
#(
  parameter int unsigned MAX_L = 1024,
  // Reset values of the settings: the paper's measurement configuration.
  parameter int unsigned RST_L = 1024,
  parameter int unsigned RST_P = 2048,
  parameter int unsigned RST_M = 64,
  parameter int unsigned RST_K = 6,
  parameter int unsigned RST_R = 2432416
) (
  input  logic             clk,
  input  logic             rst,

  input  logic             ctrlport_req_wr,
  input  logic             ctrlport_req_rd,
  input  logic [19:0]      ctrlport_req_addr,
  input  logic [31:0]      ctrlport_req_data,
  output logic             ctrlport_resp_ack,
  output logic [31:0]      ctrlport_resp_data,

  input  logic [1:0]       phase_i,
  input  logic [REG_W-1:0] snapshots_i,
  output sa_cfg_t          cfg_o
);

  localparam logic [19:0] A_CTRL      = 20'h00;
  localparam logic [19:0] A_L         = 20'h04;
  localparam logic [19:0] A_P         = 20'h08;
  localparam logic [19:0] A_M         = 20'h0C;
  localparam logic [19:0] A_K         = 20'h10;
  localparam logic [19:0] A_R         = 20'h14;
  localparam logic [19:0] A_STATUS    = 20'h18;
  localparam logic [19:0] A_SNAPSHOTS = 20'h1C;
  localparam logic [19:0] A_MAX_L     = 20'h20;

  logic [31:0] rd_mux;

  always_ff @(posedge clk) begin
    if (rst) begin
      cfg_o.enable  <= 1'b0;
      cfg_o.l_len   <= REG_W'(RST_L);
      cfg_o.p_len   <= REG_W'(RST_P);
      cfg_o.m_num   <= REG_W'(RST_M);
      cfg_o.k_shift <= 5'(RST_K);
      cfg_o.r_len   <= REG_W'(RST_R);
    end else if (ctrlport_req_wr) begin
      unique case (ctrlport_req_addr)
        A_CTRL: cfg_o.enable  <= ctrlport_req_data[0];
        A_L:    cfg_o.l_len   <= ctrlport_req_data;
        A_P:    cfg_o.p_len   <= ctrlport_req_data;
        A_M:    cfg_o.m_num   <= ctrlport_req_data;
        A_K:    cfg_o.k_shift <= ctrlport_req_data[4:0];
        A_R:    cfg_o.r_len   <= ctrlport_req_data;
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (ctrlport_req_addr)
      A_CTRL:      rd_mux = {31'd0, cfg_o.enable};
      A_L:         rd_mux = cfg_o.l_len;
      A_P:         rd_mux = cfg_o.p_len;
      A_M:         rd_mux = cfg_o.m_num;
      A_K:         rd_mux = {27'd0, cfg_o.k_shift};
      A_R:         rd_mux = cfg_o.r_len;
      A_STATUS:    rd_mux = {30'd0, phase_i};
      A_SNAPSHOTS: rd_mux = snapshots_i;
      A_MAX_L:     rd_mux = 32'(MAX_L);
      default:     rd_mux = '0;
    endcase
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      ctrlport_resp_ack  <= 1'b0;
      ctrlport_resp_data <= '0;
    end else begin
      ctrlport_resp_ack  <= ctrlport_req_wr || ctrlport_req_rd;
      ctrlport_resp_data <= ctrlport_req_rd ? rd_mux : '0;
    end
  end

  a_no_rd_wr: assert property (@(posedge clk) disable iff (rst)
    !(ctrlport_req_wr && ctrlport_req_rd))
    else $error("sa_regs: read and write requested in the same cycle");

endmodule
