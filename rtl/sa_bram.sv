// sa_bram: the accumulation memory of the averager.
//
// A simple dual-port RAM of DEPTH words of WIDTH bits: one write port and one
// read port on the same clock, written so that FPGA tools map it to block RAM.
// The read is synchronous: rd_data_o shows mem[rd_addr_i] one clock after a
// cycle with rd_en_i high and holds its value while rd_en_i is low.  A read
// and a write of the same address in the same cycle return the old word.
//
// The paper gives the 64-bit width (two samples per clock); the depth is not
// stated and is set here to MAX_L/2 = 512 words, enough for the paper's
// sounding signal length L = 1024 samples.  The contents are not reset.
module sa_bram #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en_i,
  input  logic [AW-1:0]    wr_addr_i,
  input  logic [WIDTH-1:0] wr_data_i,
  input  logic             rd_en_i,
  input  logic [AW-1:0]    rd_addr_i,
  output logic [WIDTH-1:0] rd_data_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_addr_i] <= wr_data_i;
  end

  always_ff @(posedge clk) begin
    if (rd_en_i) rd_data_o <= mem[rd_addr_i];
  end

endmodule
