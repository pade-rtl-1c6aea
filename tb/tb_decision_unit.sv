// tb_decision_unit: keep = (score + imax > thr), checked on random values and
// on the equality boundary (equal must prune).
module tb_decision_unit;
  import pade_pkg::*;
  int checks = 0, failures = 0;
  score_t score, imax, thr, ub;
  logic keep;

  decision_unit dut (.*);

  initial begin
    for (int n = 0; n < 2000; n++) begin
      score = score_t'($signed($urandom) >>> 8);
      imax  = score_t'($urandom % 100000);
      case (n % 4)
        0: thr = score + imax;          // boundary: prune
        1: thr = score + imax - 1;      // keep
        default: thr = score_t'($signed($urandom) >>> 8);
      endcase
      #1;
      checks += 2;
      if (ub != score + imax) begin failures++; $display("FAIL ub"); end
      if (keep != ((longint'(score) + longint'(imax)) > longint'(thr))) begin
        failures++; $display("FAIL keep s=%0d i=%0d t=%0d", score, imax, thr);
      end
    end
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
