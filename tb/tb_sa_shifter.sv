// tb_sa_shifter: self-checking test of sa_shifter.
// Random beats and shift amounts 0..20; each lane is compared with
// floor(value / 2^K) computed with integer division in the testbench.
module tb_sa_shifter;
  import sa_pkg::*;

  beat_t      d, q;
  logic [4:0] k;
  int checks = 0, failures = 0;

  sa_shifter dut (.data_i(d), .k_i(k), .data_o(q));

  function automatic int floor_shift(int v, int sh);
    longint p = longint'(1) << sh;
    if (v >= 0) return int'(longint'(v) / p);
    return int'(-((longint'(-v) + p - 1) / p));
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      d = {$urandom, $urandom};
      if (n < 4) d = {4{16'h8000 >> n}};
      k = 5'($urandom_range(0, 20));
      #1;
      for (int ln = 0; ln < LANES; ln++) begin
        int v, e;
        v = int'($signed(d[ln*16 +: 16]));
        e = floor_shift(v, int'(k));
        checks++;
        if ($signed(q[ln*16 +: 16]) != 16'(e)) begin
          failures++;
          if (failures < 10) $display("lane %0d v=%0d k=%0d got %0d exp %0d", ln, v, k,
                                      $signed(q[ln*16 +: 16]), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
