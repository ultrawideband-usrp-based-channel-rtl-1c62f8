// sa_averager: the averaging datapath of the select-and-average block.
//
// This is the circuit of the paper's averager figure: each incoming beat is
// shifted right by K (sa_shifter), an upper multiplexer picks either 0 or the
// word read from the BRAM as the second operand, the two are added
// (sa_adder), and a lower demultiplexer sends the sum either back into the
// BRAM or to the output.  The multiplexers follow the per-beat mode supplied
// by the controller together with the BRAM address of the beat:
//   IN      operand 0,    sum -> BRAM   (first signal of a snapshot)
//   ADD_IN  operand BRAM, sum -> BRAM   (signals 2 .. M-1)
//   ADD_OUT operand BRAM, sum -> output (last signal, M-th)
//   IN_OUT  operand 0,    sum -> output (M = 1 only; added in this design)
//   SKIP    nothing happens (normally filtered out before this block)
// Each 64-bit beat carries two samples, so one BRAM word holds samples 2a and
// 2a+1 of the signal and L samples use L/2 words.
//
// Timing (this design's choice, the paper gives none): a beat accepted at
// clock edge t issues the BRAM read at t; at t+1 the adder sees the read
// word and the sum is written back or loaded into the output register, which
// is valid after edge t+1, two edges after acceptance.  Throughput is one
// beat (two samples) per clock.  The write of a word happens no later than
// the acceptance of the following beat, so the next read of the same word,
// L/2 >= 2 beats later, always sees it; the controller keeps L/2 >= 2.
//
// Handshake: AXI-Stream style valid/ready on both sides.  The output is a
// register; while it holds an unaccepted beat the whole pipeline stalls and
// in_ready_o is low.
module sa_averager
  import sa_pkg::*;
#(
  parameter int unsigned DEPTH = 512,          // BRAM words (MAX_L / 2)
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           rst,
  input  logic [4:0]     k_i,          // shift K

  input  logic           in_valid_i,
  output logic           in_ready_o,
  input  beat_t          in_data_i,
  input  sa_mode_e       in_mode_i,
  input  logic [AW-1:0]  in_addr_i,    // word index within the signal
  input  logic           in_last_i,    // last word of the signal

  output logic           out_valid_o,
  input  logic           out_ready_i,
  output beat_t          out_data_o,
  output logic           out_last_o
);

  logic     stall;
  logic     in_fire;
  beat_t    shifted;

  // Stage A: accepted beat, already shifted, waiting for its BRAM word.
  logic          a_valid;
  beat_t         a_data;
  sa_mode_e      a_mode;
  logic [AW-1:0] a_addr;
  logic          a_last;

  // Stage B: combinational add.
  logic  a_adv;
  beat_t bram_q;
  beat_t operand;
  beat_t sum;
  logic  wr_en;

  assign stall      = out_valid_o && !out_ready_i;
  assign in_ready_o = !stall;
  assign in_fire    = in_valid_i && in_ready_o;
  assign a_adv      = a_valid && !stall;

  sa_shifter u_shift (
    .data_i (in_data_i),
    .k_i    (k_i),
    .data_o (shifted)
  );

  always_ff @(posedge clk) begin
    if (rst) begin
      a_valid <= 1'b0;
      a_data  <= '0;
      a_mode  <= MODE_SKIP;
      a_addr  <= '0;
      a_last  <= 1'b0;
    end else if (!stall) begin
      a_valid <= in_valid_i;
      a_data  <= shifted;
      a_mode  <= in_mode_i;
      a_addr  <= in_addr_i;
      a_last  <= in_last_i;
    end
  end

  sa_bram #(.WIDTH(BEAT_W), .DEPTH(DEPTH)) u_bram (
    .clk       (clk),
    .wr_en_i   (wr_en),
    .wr_addr_i (a_addr),
    .wr_data_i (sum),
    .rd_en_i   (in_fire),
    .rd_addr_i (in_addr_i),
    .rd_data_o (bram_q)
  );

  // Upper multiplexer: 0 or the stored partial sum.
  assign operand = (a_mode == MODE_ADD_IN || a_mode == MODE_ADD_OUT) ? bram_q : '0;

  sa_adder u_add (
    .a_i   (a_data),
    .b_i   (operand),
    .sum_o (sum)
  );

  // Lower demultiplexer: back into the BRAM or to the output.
  assign wr_en = a_adv && (a_mode == MODE_IN || a_mode == MODE_ADD_IN);

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid_o <= 1'b0;
      out_data_o  <= '0;
      out_last_o  <= 1'b0;
    end else if (!stall) begin
      out_valid_o <= a_adv && (a_mode == MODE_ADD_OUT || a_mode == MODE_IN_OUT);
      out_data_o  <= sum;
      out_last_o  <= a_last;
    end
  end

  // AXI-Stream rule: an offered beat stays unchanged until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (rst)
    (out_valid_o && !out_ready_i) |=> (out_valid_o && $stable(out_data_o) && $stable(out_last_o)))
    else $error("sa_averager: output beat changed while stalled");

endmodule
