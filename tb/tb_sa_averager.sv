// tb_sa_averager: self-checking test of sa_averager (shifter, BRAM, adder).
// Feeds the beats of M sounding signals of L/2 words each, tagged IN,
// ADD_IN ... ADD_OUT (or IN_OUT for M = 1), with random input gaps and random
// output backpressure.  A testbench model accumulates sample >>> K per lane
// with 16-bit wrap; every output beat and its last flag are compared.  A
// burst without gaps or backpressure checks one beat per clock and the
// two-clock latency from acceptance to output.
module tb_sa_averager;
  import sa_pkg::*;

  localparam int DEPTH = 16, AW = 4;

  logic          clk = 0, rst;
  logic [4:0]    k;
  logic          in_valid, in_ready, in_last;
  beat_t         in_data;
  sa_mode_e      in_mode;
  logic [AW-1:0] in_addr;
  logic          out_valid, out_ready, out_last;
  beat_t         out_data;

  int checks = 0, failures = 0;
  int cycle = 0;
  bit random_gaps;

  // expected outputs
  beat_t exp_q[$];
  bit    exp_last_q[$];
  int    acc_time_q[$];   // acceptance cycle of the beat that produces it

  sa_averager #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst(rst), .k_i(k),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .in_mode_i(in_mode), .in_addr_i(in_addr), .in_last_i(in_last),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .out_last_o(out_last));

  always #2 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  // output checker
  always @(posedge clk) begin
    if (!rst && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output %h", out_data);
      end else begin
        beat_t e; bit el; int t;
        e = exp_q.pop_front(); el = exp_last_q.pop_front(); t = acc_time_q.pop_front();
        if (out_data !== e || out_last !== el) begin
          failures++;
          if (failures < 10) $display("out %h last %0d exp %h last %0d", out_data, out_last, e, el);
        end
        if (!random_gaps) begin
          checks++;
          if (cycle - t != 2) begin
            failures++; $display("latency %0d, expected 2", cycle - t);
          end
        end
      end
    end
  end

  always @(negedge clk) out_ready <= random_gaps ? ($urandom_range(0, 3) != 0) : 1'b1;

  function automatic logic [15:0] lane(beat_t b, int ln);
    return b[ln*16 +: 16];
  endfunction

  task automatic snapshot(int lw, int m, int kk);
    logic [15:0] acc [DEPTH][LANES];
    k = 5'(kk);
    for (int s = 0; s < m; s++) begin
      for (int a = 0; a < lw; a++) begin
        beat_t d; sa_mode_e md;
        d = {$urandom, $urandom};
        md = (m == 1) ? MODE_IN_OUT : (s == 0) ? MODE_IN : (s == m - 1) ? MODE_ADD_OUT : MODE_ADD_IN;
        for (int ln = 0; ln < LANES; ln++) begin
          logic [15:0] sh;
          sh = 16'($signed(lane(d, ln)) >>> kk);
          acc[a][ln] = (s == 0) ? sh : acc[a][ln] + sh;
        end
        // optional gap, with a SKIP beat sometimes
        while (random_gaps && $urandom_range(0, 2) == 0) begin
          in_valid = $urandom_range(0, 1) == 1; in_mode = MODE_SKIP; in_data = {$urandom, $urandom};
          in_addr = AW'($urandom);
          @(posedge clk); #0;
          while (in_valid && !in_ready) begin @(posedge clk); #0; end
          @(negedge clk);
        end
        in_valid = 1; in_data = d; in_mode = md; in_addr = AW'(a); in_last = (a == lw - 1);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (s == m - 1) begin
          beat_t e;
          for (int ln = 0; ln < LANES; ln++) e[ln*16 +: 16] = acc[a][ln];
          exp_q.push_back(e); exp_last_q.push_back(a == lw - 1); acc_time_q.push_back(cycle);
        end
        @(negedge clk);
        in_valid = 0;
      end
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; in_valid = 0; in_data = 0; in_mode = MODE_SKIP; in_addr = 0; in_last = 0; k = 0;
    random_gaps = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    @(negedge clk);
    // back-to-back: full rate, latency check
    snapshot(8, 4, 2);
    snapshot(16, 64, 6);
    snapshot(2, 3, 1);
    random_gaps = 1;
    snapshot(16, 8, 3);
    snapshot(5, 1, 0);
    snapshot(16, 2, 1);
    random_gaps = 0;
    // full rate must not stall: count cycles for L/2 = 16, M = 2
    begin
      int t0;
      t0 = cycle;
      snapshot(16, 2, 1);
      checks++;
      if (cycle - t0 != 32) begin failures++; $display("32 beats took %0d cycles", cycle - t0); end
    end
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d outputs missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
