// tb_sa_block: end-to-end test of the select-and-average block (sa_block).
//
// The block is built with MAX_L = 64 to keep runs short and is configured
// through the control port, as the host would.  A stream of random radio
// samples is fed in; a testbench model that knows only the settings and the
// index of each accepted beat decides which beats belong to which sounding
// signal, accumulates sample >>> K per I/Q lane with 16-bit wrap, and
// predicts every beat of the averaged output and its tlast.  Runs cover
// P > 0 and P = 0, R > 0 and R = 0, M = 1 (no averaging), M = 64 with K = 6
// as in the paper, output backpressure (which stalls the input), input gaps
// and disable/enable with new settings.  Each mechanism is counted and a
// failure is counted for one that never happened.  Without backpressure the
// input must never be stalled (two samples per clock sustained).
module tb_sa_block;
  import sa_pkg::*;

  localparam int MAX_L = 64;

  logic        clk = 0, rst;
  logic        req_wr, req_rd, resp_ack;
  logic [19:0] req_addr;
  logic [31:0] req_data, resp_data;
  logic [63:0] s_tdata, m_tdata;
  logic        s_tvalid, s_tready, m_tvalid, m_tready, m_tlast;

  int checks = 0, failures = 0;

  // current settings (mirrored by the testbench)
  int L, P, M, K, R;
  bit gaps, bp;
  longint n;                 // beats accepted while active
  longint limit;             // beats to send in the current run
  logic [15:0] acc [MAX_L/2][LANES];
  beat_t exp_q[$];
  bit    exp_last_q[$];

  // mechanism counters
  int c_skip_p, c_in, c_add_in, c_add_out, c_in_out, c_skip_r, c_out_stall, c_in_stall,
      c_reconfig, c_pkt;
  int stall_no_bp;

  sa_block #(.MAX_L(MAX_L)) dut (
    .clk(clk), .rst(rst),
    .ctrlport_req_wr(req_wr), .ctrlport_req_rd(req_rd), .ctrlport_req_addr(req_addr),
    .ctrlport_req_data(req_data), .ctrlport_resp_ack(resp_ack), .ctrlport_resp_data(resp_data),
    .s_axis_tdata(s_tdata), .s_axis_tvalid(s_tvalid), .s_axis_tready(s_tready),
    .m_axis_tdata(m_tdata), .m_axis_tlast(m_tlast), .m_axis_tvalid(m_tvalid),
    .m_axis_tready(m_tready));

  always #2 clk = ~clk;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL: %s", s);
  endtask

  // ---------------- reference model on the input side ----------------
  always @(posedge clk) begin
    if (!rst && s_tvalid && s_tready && n < limit) begin
      longint lw, pw, rw, per, pos, c, s;
      int a;
      lw = L / 2; pw = P / 2; rw = R / 2;
      per = pw + M * lw + rw;
      pos = n % per;
      if (pos < pw) begin
        c_skip_p++;
      end else if (pos < pw + M * lw) begin
        c = pos - pw; s = c / lw; a = int'(c % lw);
        for (int ln = 0; ln < LANES; ln++) begin
          logic [15:0] sh;
          sh = 16'($signed(s_tdata[ln*16 +: 16]) >>> K);
          acc[a][ln] = (s == 0) ? sh : acc[a][ln] + sh;
        end
        if (M == 1) c_in_out++;
        else if (s == 0) c_in++;
        else if (s == M - 1) c_add_out++;
        else c_add_in++;
        if (s == M - 1) begin
          beat_t e;
          for (int ln = 0; ln < LANES; ln++) e[ln*16 +: 16] = acc[a][ln];
          exp_q.push_back(e);
          exp_last_q.push_back(a == lw - 1);
        end
      end else begin
        c_skip_r++;
      end
      n <= n + 1;
    end
  end

  // ---------------- output checker ----------------
  always @(posedge clk) begin
    if (!rst) begin
      if (m_tvalid && !m_tready) c_out_stall++;
      if (s_tvalid && !s_tready) begin
        c_in_stall++;
        if (!bp) stall_no_bp++;
      end
      if (m_tvalid && m_tready) begin
        checks++;
        if (exp_q.size() == 0) fail("unexpected output beat");
        else begin
          beat_t e; bit el;
          e = exp_q.pop_front(); el = exp_last_q.pop_front();
          if (m_tdata != e) fail($sformatf("data %h exp %h", m_tdata, e));
          if (m_tlast != el) fail($sformatf("tlast %0d exp %0d", m_tlast, el));
          if (m_tlast) c_pkt++;
        end
      end
    end
  end

  // ---------------- stimulus ----------------
  logic held;
  always @(posedge clk) held <= s_tvalid && !s_tready;
  always @(negedge clk) begin
    if (!held) begin
      s_tvalid <= (n < limit) && (gaps ? ($urandom_range(0, 4) != 0) : 1'b1);
      s_tdata  <= {$urandom, $urandom};
    end
    m_tready <= bp ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic reg_write(logic [19:0] a, logic [31:0] d);
    @(negedge clk); req_wr = 1; req_addr = a; req_data = d;
    @(negedge clk); req_wr = 0;
    checks++;
    if (!resp_ack) fail("no write ack");
  endtask

  task automatic reg_read(logic [19:0] a, output logic [31:0] d);
    @(negedge clk); req_rd = 1; req_addr = a;
    @(negedge clk); req_rd = 0;
    checks++;
    if (!resp_ack) fail("no read ack");
    d = resp_data;
  endtask

  task automatic run(int l, int p, int m, int k, int r, int snaps, bit g, bit b);
    longint per;
    logic [31:0] d;
    reg_write(20'h00, 0);
    reg_write(20'h04, l);
    reg_write(20'h08, p);
    reg_write(20'h0C, m);
    reg_write(20'h10, k);
    reg_write(20'h14, r);
    L = l; P = p; M = m; K = k; R = r; gaps = g; bp = b;
    repeat (3) @(negedge clk);
    per = (p + m * l + r) / 2;
    n = 0;
    limit = 0;
    c_reconfig++;
    reg_write(20'h00, 1);
    @(negedge clk);
    limit = per * snaps;
    while (n < per * snaps) @(negedge clk);
    bp = 0;
    repeat (8) @(negedge clk);
    reg_read(20'h1C, d);
    checks++;
    if (d != 32'(snaps)) fail($sformatf("SNAPSHOTS %0d exp %0d", d, snaps));
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d averaged beats missing", exp_q.size()));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; req_wr = 0; req_rd = 0; req_addr = 0; req_data = 0;
    s_tvalid = 0; s_tdata = 0; m_tready = 1; gaps = 0; bp = 0; n = 0; limit = 0; held = 0;
    L = 2; P = 0; M = 1; K = 0; R = 0;
    repeat (5) @(negedge clk);
    rst = 0;
    //   L    P    M   K  R    snaps gaps bp
    run(64, 128, 64, 6, 200,  2,    0,   0);   // paper-like ratios, full rate
    run(32, 20,  8,  3, 30,   3,    1,   1);   // gaps and backpressure
    run(16, 0,   1,  0, 0,    5,    0,   1);   // M = 1, no skipping at all
    run(64, 10,  4,  2, 0,    2,    1,   0);   // R = 0: snapshots back to back
    run(4,  6,   3,  2, 2,    4,    0,   1);   // shortest signal
    checks++;
    if (stall_no_bp != 0) fail($sformatf("input stalled %0d times without backpressure", stall_no_bp));
    $display("skipP=%0d IN=%0d ADD_IN=%0d ADD_OUT=%0d IN_OUT=%0d skipR=%0d out_stall=%0d in_stall=%0d reconfig=%0d packets=%0d",
             c_skip_p, c_in, c_add_in, c_add_out, c_in_out, c_skip_r, c_out_stall, c_in_stall,
             c_reconfig, c_pkt);
    checks++; if (c_skip_p == 0)    fail("skip P never happened");
    checks++; if (c_in == 0)        fail("IN never happened");
    checks++; if (c_add_in == 0)    fail("ADD_IN never happened");
    checks++; if (c_add_out == 0)   fail("ADD_OUT never happened");
    checks++; if (c_in_out == 0)    fail("M = 1 pass never happened");
    checks++; if (c_skip_r == 0)    fail("skip R never happened");
    checks++; if (c_out_stall == 0) fail("output stall never happened");
    checks++; if (c_in_stall == 0)  fail("input stall never happened");
    checks++; if (c_pkt != 2 + 3 + 5 + 2 + 4) fail($sformatf("%0d packets, expected 16", c_pkt));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
