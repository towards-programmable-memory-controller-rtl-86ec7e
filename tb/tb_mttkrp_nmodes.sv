// tb_mttkrp_nmodes: the 4- and 5-mode configurations of the accelerator
// (NMODES = 4 and 5, 256-bit element slots, two elements per word), each
// taken through a full CP-ALS sweep by nmode_sweep: every mode is remapped
// and computed, and every remapped slot and output value is checked.
module tb_mttkrp_nmodes;
  logic done4, done5;
  int checks4, failures4, modes4, checks5, failures5, modes5;
  int checks, failures;

  nmode_sweep #(.NM(4)) u_four (.done(done4), .checks(checks4), .failures(failures4), .modes_done(modes4));
  nmode_sweep #(.NM(5)) u_five (.done(done5), .checks(checks5), .failures(failures5), .modes_done(modes5));

  initial begin
    wait (done4 && done5);
    checks   = checks4 + checks5 + 2;
    failures = failures4 + failures5 + (modes4 != 4 ? 1 : 0) + (modes5 != 5 ? 1 : 0);
    $display("4 modes: %0d checks, %0d failures; 5 modes: %0d checks, %0d failures",
             checks4, failures4, checks5, failures5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #20ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks4 + checks5, failures4 + failures5 + 1);
    $finish;
  end
endmodule
