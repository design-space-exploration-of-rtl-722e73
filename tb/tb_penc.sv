// tb_penc: checks the priority encoder against a bit-by-bit search, for a
// 64-bit encoder (the width drawn in the paper) and a 13-bit one, on random
// vectors of varying density, on single-bit vectors and on zero.
module tb_penc;
  logic [63:0] a;
  logic [5:0]  ia;
  logic        va;
  logic [12:0] b;
  logic [3:0]  ib;
  logic        vb;
  int checks = 0, failures = 0;

  penc #(.W(64)) dut_a (.in(a), .idx(ia), .valid(va));
  penc #(.W(13)) dut_b (.in(b), .idx(ib), .valid(vb));

  function automatic int first_set(logic [63:0] x, int w);
    for (int i = 0; i < w; i++) if (x[i]) return i;
    return -1;
  endfunction

  task automatic check(int w);
    int e;
    #1;
    if (w == 64) begin
      e = first_set(a, 64);
      checks++;
      if ((e < 0) ? va : (!va || int'(ia) != e)) begin
        failures++; $display("FAIL W=64 in=%h idx=%0d valid=%0b exp=%0d", a, ia, va, e);
      end
    end else begin
      e = first_set(64'(b), 13);
      checks++;
      if ((e < 0) ? vb : (!vb || int'(ib) != e)) begin
        failures++; $display("FAIL W=13 in=%h idx=%0d valid=%0b exp=%0d", b, ib, vb, e);
      end
    end
  endtask

  initial begin
    a = '0; b = '0;
    check(64); check(13);
    for (int i = 0; i < 64; i++) begin a = 64'd1 << i; check(64); end
    for (int i = 0; i < 13; i++) begin b = 13'd1 << i; check(13); end
    for (int t = 0; t < 2000; t++) begin
      a = {$urandom, $urandom};
      for (int k = 0; k < t % 5; k++) a &= {$urandom, $urandom};   // sparser vectors
      b = 13'($urandom) & 13'($urandom);
      check(64); check(13);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
