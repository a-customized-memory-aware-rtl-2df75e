// tb_functional_unit: random operands, including ties and the worked example
// of the SEND/AND matrix (match +1, mismatch -1, gap -2), against
// max(NW + T, N + gap, W + gap) computed here.
module tb_functional_unit;
  import nw_pkg::*;
  char_t a, b;
  score_t n, nw, w, gap, res;
  int checks = 0, failures = 0;

  functional_unit dut (.a(a), .b(b), .north(n), .north_west(nw), .west(w), .gap(gap), .result(res));

  task automatic check(input int ai, bi, ni, nwi, wi, gi);
    int t, e;
    a = char_t'(ai); b = char_t'(bi); n = ni; nw = nwi; w = wi; gap = gi;
    #1;
    t = (ai == bi) ? 1 : -1;
    e = nwi + t;
    if (ni + gi > e) e = ni + gi;
    if (wi + gi > e) e = wi + gi;
    checks++;
    if (res != e) begin
      failures++;
      $display("FAIL a=%0d b=%0d n=%0d nw=%0d w=%0d gap=%0d -> %0d exp %0d", ai, bi, ni, nwi, wi, gi, res, e);
    end
  endtask

  initial begin
    // cell (A,E) of the example: NW=-2 (S column), N=-4, W=-1 -> -3
    check(0, 1, -4, -2, -1, -2);
    // diagonal wins
    check(2, 2, -10, 5, -10, -2);
    // north wins
    check(0, 1, 20, 0, 0, -2);
    // west wins
    check(0, 1, 0, 0, 20, -2);
    for (int i = 0; i < 2000; i++)
      check($urandom_range(0, 3), $urandom_range(0, 3),
            int'($urandom_range(0, 200000)) - 100000, int'($urandom_range(0, 200000)) - 100000,
            int'($urandom_range(0, 200000)) - 100000, -int'($urandom_range(1, 3)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
