// tb_align_score: checks the substitution score for all 16 character pairs
// against match = +1 / mismatch = -1.
module tb_align_score;
  import nw_pkg::*;
  char_t a, b;
  score_t s;
  int checks = 0, failures = 0;

  align_score dut (.a(a), .b(b), .score(s));

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        a = char_t'(i);
        b = char_t'(j);
        #1;
        checks++;
        if (s != ((i == j) ? 1 : -1)) begin
          failures++;
          $display("FAIL a=%0d b=%0d score=%0d", i, j, s);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
