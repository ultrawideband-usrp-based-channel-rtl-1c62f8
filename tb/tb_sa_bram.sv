// tb_sa_bram: self-checking test of sa_bram at its default size.
// Fills every word, reads all back (one-cycle latency), checks that the read
// data holds while rd_en is low and that a read colliding with a write of
// the same address returns the old word.  Then random traffic against a
// model array.
module tb_sa_bram;
  localparam int W = 64, D = 512, AW = 9;

  logic          clk = 0;
  logic          wr_en, rd_en;
  logic [AW-1:0] wa, ra;
  logic [W-1:0]  wd, rd;
  logic [W-1:0]  model [D];
  int checks = 0, failures = 0;

  sa_bram #(.WIDTH(W), .DEPTH(D)) dut (
    .clk(clk), .wr_en_i(wr_en), .wr_addr_i(wa), .wr_data_i(wd),
    .rd_en_i(rd_en), .rd_addr_i(ra), .rd_data_o(rd));

  always #2 clk = ~clk;

  task automatic check(logic [W-1:0] exp, string what);
    checks++;
    if (rd !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h exp %h", what, rd, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_en = 0; wa = 0; ra = 0; wd = 0;
    // fill
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      wr_en = 1; wa = AW'(a); wd = {$urandom, $urandom}; model[a] = wd;
    end
    @(negedge clk); wr_en = 0;
    // read back
    for (int a = 0; a < D; a++) begin
      rd_en = 1; ra = AW'(a);
      @(negedge clk);
      check(model[a], "readback");
    end
    // hold while rd_en low
    rd_en = 0; ra = 0;
    repeat (3) begin @(negedge clk); check(model[D-1], "hold"); end
    // read during write of the same address returns old data
    rd_en = 1; ra = 5; wr_en = 1; wa = 5; wd = ~model[5];
    @(negedge clk);
    check(model[5], "read-during-write");
    model[5] = wd; wr_en = 0;
    @(negedge clk);
    check(model[5], "after write");
    // random traffic
    for (int n = 0; n < 4000; n++) begin
      logic [AW-1:0] r;
      r = AW'($urandom);
      wr_en = $urandom_range(0, 1) == 1; wa = AW'($urandom); wd = {$urandom, $urandom};
      rd_en = 1; ra = r;
      @(negedge clk);
      check(model[r], "random");
      if (wr_en) model[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
