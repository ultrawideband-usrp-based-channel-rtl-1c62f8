// tb_sa_adder: self-checking test of sa_adder.
// Random beats plus carry-crossing corner cases; every 16-bit lane must be
// the wrap-around sum of its two inputs with no carry into the next lane.
module tb_sa_adder;
  import sa_pkg::*;

  beat_t a, b, s;
  int checks = 0, failures = 0;

  sa_adder dut (.a_i(a), .b_i(b), .sum_o(s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      a = {$urandom, $urandom};
      b = {$urandom, $urandom};
      if (n == 0) begin a = '1; b = 64'h0001_0001_0001_0001; end
      if (n == 1) begin a = {4{16'h7fff}}; b = {4{16'h0001}}; end
      #1;
      for (int ln = 0; ln < LANES; ln++) begin
        int unsigned e;
        e = (int'(a[ln*16 +: 16]) + int'(b[ln*16 +: 16])) % 65536;
        checks++;
        if (s[ln*16 +: 16] != 16'(e)) begin
          failures++;
          if (failures < 10) $display("lane %0d got %h exp %h", ln, s[ln*16 +: 16], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
