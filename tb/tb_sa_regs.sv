// tb_sa_regs: self-checking test of sa_regs.
// Checks the reset values (the paper's settings), write/read-back of every
// settings register, the read-only status registers, that unmapped
// addresses read 0, and that each request is acknowledged exactly one clock
// later.
module tb_sa_regs;
  import sa_pkg::*;

  logic        clk = 0, rst;
  logic        wr, rd, ack;
  logic [19:0] addr;
  logic [31:0] wdata, rdata;
  logic [1:0]  phase;
  logic [31:0] snaps;
  sa_cfg_t     cfg;
  int checks = 0, failures = 0;

  sa_regs #(.MAX_L(1024)) dut (
    .clk(clk), .rst(rst),
    .ctrlport_req_wr(wr), .ctrlport_req_rd(rd), .ctrlport_req_addr(addr),
    .ctrlport_req_data(wdata), .ctrlport_resp_ack(ack), .ctrlport_resp_data(rdata),
    .phase_i(phase), .snapshots_i(snaps), .cfg_o(cfg));

  always #2 clk = ~clk;

  task automatic expect_eq(longint got, longint exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d exp %0d", what, got, exp);
    end
  endtask

  task automatic write(logic [19:0] a, logic [31:0] d);
    @(negedge clk); wr = 1; addr = a; wdata = d;
    @(negedge clk); wr = 0;
    expect_eq(ack, 1, "write ack");
    @(negedge clk);
    expect_eq(ack, 0, "ack is one pulse");
  endtask

  task automatic read(logic [19:0] a, output logic [31:0] d);
    @(negedge clk); rd = 1; addr = a;
    @(negedge clk); rd = 0;
    expect_eq(ack, 1, "read ack");
    d = rdata;
  endtask

  task automatic read_check(logic [19:0] a, logic [31:0] e, string what);
    logic [31:0] d;
    read(a, d);
    expect_eq(d, e, what);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst = 1; wr = 0; rd = 0; addr = 0; wdata = 0; phase = 2; snaps = 77;
    repeat (3) @(negedge clk);
    rst = 0;
    expect_eq(cfg.enable, 0, "reset enable");
    expect_eq(cfg.l_len, 1024, "reset L");
    expect_eq(cfg.p_len, 2048, "reset P");
    expect_eq(cfg.m_num, 64, "reset M");
    expect_eq(cfg.k_shift, 6, "reset K");
    expect_eq(cfg.r_len, 2432416, "reset R");
    read_check(20'h04, 1024, "read L");
    read_check(20'h14, 2432416, "read R");
    write(20'h00, 1);     expect_eq(cfg.enable, 1, "enable");
    write(20'h04, 256);   expect_eq(cfg.l_len, 256, "L");
    write(20'h08, 100);   expect_eq(cfg.p_len, 100, "P");
    write(20'h0C, 16);    expect_eq(cfg.m_num, 16, "M");
    write(20'h10, 4);     expect_eq(cfg.k_shift, 4, "K");
    write(20'h14, 5000);  expect_eq(cfg.r_len, 5000, "R");
    write(20'h40, 123);   // unmapped: no effect
    read_check(20'h00, 1, "read CTRL");
    read_check(20'h04, 256, "read L");
    read_check(20'h08, 100, "read P");
    read_check(20'h0C, 16, "read M");
    read_check(20'h10, 4, "read K");
    read_check(20'h14, 5000, "read R");
    read_check(20'h18, 2, "read STATUS");
    read_check(20'h1C, 77, "read SNAPSHOTS");
    read_check(20'h20, 1024, "read MAX_L");
    read_check(20'h40, 0, "read unmapped");
    write(20'h18, 3);     // read-only
    phase = 1;
    read_check(20'h18, 1, "STATUS follows phase");
    write(20'h00, 0);     expect_eq(cfg.enable, 0, "disable");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
