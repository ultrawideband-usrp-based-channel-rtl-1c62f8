// tb_sa_controller: self-checking test of sa_controller.
// The radio stream carries the beat index as data.  For several settings
// (including P = 0, R = 0 and M = 1) and random input gaps and averager
// backpressure, every accepted beat is classified by the testbench from its
// index alone: position in the snapshot period P/2 + M*L/2 + R/2 words,
// signal number and word address.  Forwarded beats must carry the right
// data, mode, address and last flag; skipped beats must not be forwarded;
// the snapshot counter must match.
module tb_sa_controller;
  import sa_pkg::*;

  localparam int DEPTH = 16, AW = 4;

  logic          clk = 0, rst;
  sa_cfg_t       cfg;
  logic          in_valid, in_ready;
  beat_t         in_data;
  logic          cap_valid, cap_ready, cap_last;
  beat_t         cap_data;
  sa_mode_e      cap_mode;
  logic [AW-1:0] cap_addr;
  logic [4:0]    k;
  logic [1:0]    phase;
  logic [31:0]   snapshots;

  int checks = 0, failures = 0;
  longint n;            // beats accepted since enable
  bit gaps;
  int mode_seen [5];

  sa_controller #(.DEPTH(DEPTH)) dut (
    .clk(clk), .rst(rst), .cfg_i(cfg),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .cap_valid_o(cap_valid), .cap_ready_i(cap_ready), .cap_data_o(cap_data),
    .cap_mode_o(cap_mode), .cap_addr_o(cap_addr), .cap_last_o(cap_last),
    .k_o(k), .phase_o(phase), .snapshots_o(snapshots));

  always #2 clk = ~clk;

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("FAIL: %s", s);
  endtask

  // classify beat number idx under the current settings
  function automatic void classify(longint idx, output sa_mode_e md, output int a, output bit last);
    longint lw, pw, rw, m, per, pos, c, s;
    lw = cfg.l_len / 2; pw = cfg.p_len / 2; rw = cfg.r_len / 2; m = cfg.m_num;
    per = pw + m * lw + rw;
    pos = idx % per;
    md = MODE_SKIP; a = 0; last = 0;
    if (pos >= pw && pos < pw + m * lw) begin
      c = pos - pw; s = c / lw; a = int'(c % lw); last = (a == lw - 1);
      md = (m == 1) ? MODE_IN_OUT : (s == 0) ? MODE_IN : (s == m - 1) ? MODE_ADD_OUT : MODE_ADD_IN;
    end
  endfunction

  always @(posedge clk) begin
    if (!rst && cfg.enable && phase != 0 && in_valid && in_ready) begin
      sa_mode_e md; int a; bit last;
      classify(n, md, a, last);
      checks++;
      if (md == MODE_SKIP) begin
        if (cap_valid) fail($sformatf("beat %0d forwarded, should be skipped", n));
      end else begin
        if (!(cap_valid && cap_ready)) fail($sformatf("beat %0d not forwarded", n));
        if (cap_data != beat_t'(n)) fail($sformatf("data %0d exp %0d", cap_data, n));
        if (cap_mode != md) fail($sformatf("beat %0d mode %s exp %s", n, cap_mode.name(), md.name()));
        if (int'(cap_addr) != a) fail($sformatf("beat %0d addr %0d exp %0d", n, cap_addr, a));
        if (cap_last != last) fail($sformatf("beat %0d last %0d", n, cap_last));
        if (k != cfg.k_shift) fail("k not latched");
        mode_seen[md]++;
      end
      n <= n + 1;
    end
  end

  // A stream source may only drop valid after the beat was taken.
  logic held;
  always @(posedge clk) held <= in_valid && !in_ready;
  always @(negedge clk) begin
    if (!held) in_valid <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
    cap_ready <= gaps ? ($urandom_range(0, 2) != 0) : 1'b1;
  end
  assign in_data = beat_t'(n);

  task automatic run(int l, int p, int m, int r, int kk, int snaps, bit g);
    longint per;
    @(negedge clk);
    cfg.enable = 0;
    @(negedge clk);
    cfg.l_len = l; cfg.p_len = p; cfg.m_num = m; cfg.r_len = r; cfg.k_shift = 5'(kk);
    gaps = g;
    n = 0;
    cfg.enable = 1;
    per = (p + m * l + r) / 2;
    // one clock to leave IDLE; inputs presented meanwhile are dropped
    while (n < per * snaps) @(negedge clk);
    checks++;
    if (snapshots != 32'(snaps)) fail($sformatf("snapshots %0d exp %0d", snapshots, snaps));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; cfg = '0; gaps = 0; n = 0; in_valid = 0; held = 0;
    repeat (4) @(negedge clk);
    rst = 0;
    run(16, 12, 3, 20, 2, 3, 0);
    run(16, 12, 3, 20, 2, 3, 1);
    run(8, 0, 1, 0, 0, 4, 1);
    run(32, 4, 4, 0, 2, 2, 1);
    run(4, 6, 2, 2, 1, 3, 0);
    run(8, 2, 64, 6, 6, 1, 1);
    for (int i = 1; i < 5; i++) begin
      checks++;
      if (mode_seen[i] == 0) fail($sformatf("mode %0d never seen", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
