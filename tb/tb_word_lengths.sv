// tb_word_lengths -- checks the controller at the other two word lengths of
// the reference hardware evaluation, L = 12 and L = 16 (13 and 17 selection
// registers), and an 8-bit build with two sensor tables (S = 2), all with an
// 8-bit selection. The configurations run side by side through
// word_length_check; the run fails unless all finish with every per-bit
// selection correct.
module tb_word_lengths;

  logic done12, done16, done8s2;
  int   checks12, checks16, checks8s2, failures12, failures16, failures8s2;

  word_length_check #(.L(12)) u_l12 (.done(done12), .checks(checks12), .failures(failures12));
  word_length_check #(.L(16)) u_l16 (.done(done16), .checks(checks16), .failures(failures16));
  word_length_check #(.L(8), .S(2)) u_l8s2 (.done(done8s2), .checks(checks8s2),
                                            .failures(failures8s2));

  int failures;

  initial begin
    #1;
    fork
      wait (done12 && done16 && done8s2);
      #100000;
    join_any
    disable fork;
    failures = failures12 + failures16 + failures8s2
             + ((done12 && done16 && done8s2) ? 0 : 1);
    if (!(done12 && done16 && done8s2)) $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks12 + checks16 + checks8s2, failures);
    $finish;
  end

endmodule : tb_word_lengths
