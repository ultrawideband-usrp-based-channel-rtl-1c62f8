// tb_sa_block_m1: the paper's comparison measurement without averaging
// (M = 1), run through sa_block at its default size.  The host writes
// M = 1 and K = 0 and lengthens R to 2496928 samples so that the snapshot
// still repeats every 5 ms (2 500 000 samples at 2 ns); L = 1024 and
// P = 2048 stay at their reset values.  With M = 1 the block must return
// the captured sounding signal unchanged, noise included, so the output is
// compared bit-exactly with a model and its deviation from the clean signal
// is expected to reach the full noise amplitude.  Also checked: one packet
// of L samples, no input stall, snapshot length.
module tb_sa_block_m1;
  import sa_pkg::*;

  localparam longint L = 1024, P = 2048, M = 1, K = 0, R = 2496928;
  localparam longint LW = L / 2, PW = P / 2, RW = R / 2;
  localparam longint PER = PW + M * LW + RW;

  logic        clk = 0, rst;
  logic        req_wr, req_rd, resp_ack;
  logic [19:0] req_addr;
  logic [31:0] req_data, resp_data;
  logic [63:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;

  int checks = 0, failures = 0;
  longint n, limit;
  longint cyc, t_first, t_last;
  logic [15:0] acc [LW][LANES];
  beat_t exp_q[$];
  bit    exp_last_q[$];
  int    outs = 0, pkts = 0, in_stalls = 0, max_err = 0;

  sa_block dut (
    .clk(clk), .rst(rst),
    .ctrlport_req_wr(req_wr), .ctrlport_req_rd(req_rd), .ctrlport_req_addr(req_addr),
    .ctrlport_req_data(req_data), .ctrlport_resp_ack(resp_ack), .ctrlport_resp_data(resp_data),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast), .m_axis_tvalid(m_tvalid),
    .m_axis_tready(m_tready));

  always #2 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL: %s", s);
  endtask

  // clean sounding signal: lane ln of word a, in [-8192, 8191]
  function automatic int ss(longint a, int ln);
    int unsigned h;
    h = 32'(a * 2654435761 + ln * 40503);
    h = h ^ (h >> 13);
    h = h * 32'h5bd1e995;
    return int'(h % 16384) - 8192;
  endfunction

  function automatic beat_t gen(longint idx);
    longint pos, c;
    beat_t b;
    pos = idx % PER;
    for (int ln = 0; ln < LANES; ln++) begin
      int noise, v;
      noise = int'($urandom_range(0, 4000)) - 2000;
      v = noise;
      if (pos >= PW && pos < PW + M * LW) begin
        c = pos - PW;
        v = ss(c % LW, ln) + noise;
      end
      b[ln*16 +: 16] = 16'(v);
    end
    return b;
  endfunction

  // model
  always @(posedge clk) begin
    if (!rst && s_tvalid && s_tready && n < limit) begin
      longint pos, c, s;
      int a;
      pos = n % PER;
      if (n == 0) t_first = cyc;
      if (pos >= PW && pos < PW + M * LW) begin
        c = pos - PW; s = c / LW; a = int'(c % LW);
        for (int ln = 0; ln < LANES; ln++) begin
          logic [15:0] sh;
          sh = 16'($signed(s_tdata[ln*16 +: 16]) >>> K);
          acc[a][ln] = (s == 0) ? sh : acc[a][ln] + sh;
        end
        if (s == M - 1) begin
          beat_t e;
          for (int ln = 0; ln < LANES; ln++) e[ln*16 +: 16] = acc[a][ln];
          exp_q.push_back(e);
          exp_last_q.push_back(longint'(a) == LW - 1);
        end
      end
      if (n == limit - 1) t_last = cyc;
      n <= n + 1;
    end
    if (!rst && s_tvalid && !s_tready) in_stalls++;
  end

  // checker
  always @(posedge clk) begin
    if (!rst && m_tvalid && m_tready) begin
      checks++;
      if (exp_q.size() == 0) fail("unexpected output");
      else begin
        beat_t e; bit el;
        e = exp_q.pop_front(); el = exp_last_q.pop_front();
        if (m_tdata != e || m_tlast != el) fail($sformatf("out %h/%0d exp %h/%0d", m_tdata, m_tlast, e, el));
        for (int ln = 0; ln < LANES; ln++) begin
          int err;
          err = int'($signed(m_tdata[ln*16 +: 16])) - ss(longint'(outs), ln);
          if (err < 0) err = -err;
          if (err > max_err) max_err = err;
        end
        outs++;
        if (m_tlast) pkts++;
      end
    end
  end

  always @(negedge clk) begin
    s_tvalid <= n < limit;
    s_tdata  <= gen(n);
  end

  initial begin
    repeat (1400000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    rst = 1; req_wr = 0; req_rd = 0; req_addr = 0; req_data = 0; m_tready = 1;
    n = 0; limit = 0; cyc = 0; s_tvalid = 0; s_tdata = 0;
    repeat (5) @(negedge clk);
    rst = 0;
    @(negedge clk); req_wr = 1; req_addr = 20'h0C; req_data = 32'(M);
    @(negedge clk); req_addr = 20'h10; req_data = 32'(K);
    @(negedge clk); req_addr = 20'h14; req_data = 32'(R);
    @(negedge clk); req_addr = 20'h00; req_data = 1;
    @(negedge clk); req_wr = 0;
    @(negedge clk);
    limit = PER;
    while (n < limit) @(negedge clk);
    repeat (10) @(negedge clk);
    @(negedge clk); req_rd = 1; req_addr = 20'h1C;
    @(negedge clk); req_rd = 0; d = resp_data;
    checks++; if (d != 1) fail($sformatf("SNAPSHOTS %0d exp 1", d));
    checks++; if (longint'(outs) != LW) fail($sformatf("%0d output beats, expected %0d", outs, LW));
    checks++; if (pkts != 1) fail($sformatf("%0d packets, expected 1", pkts));
    checks++; if (exp_q.size() != 0) fail("averaged beats missing");
    checks++; if (in_stalls != 0) fail($sformatf("input stalled %0d times", in_stalls));
    checks++; if (t_last - t_first + 1 != PER) fail($sformatf("snapshot took %0d clocks", t_last - t_first + 1));
    // no averaging: the deviation is the raw noise, up to 2000
    checks++; if (max_err > 2000 || max_err < 1500) fail($sformatf("deviation %0d, expected raw noise", max_err));
    $display("snapshot: %0d clocks, %0d output samples, max deviation from clean signal %0d",
             t_last - t_first + 1, outs * 2, max_err);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
