// tb_wl_higgs -- the accelerator on the layer sizes of the HIGGS networks.
//
// One step of the first hidden layer of the hidden-size-28 network on HIGGS
// (28 input features): a weight_update call with A = x^T of N samples x 28
// features and 28 right-hand sides, run at the same time as an
// activation_update call with a 28 x 28 system and N right-hand sides.  The
// HIGGS subset size is not known, so N = 101 samples is used here to keep
// the simulation short; it also gives an odd column count, so the uneven
// split is exercised.  The smaller hidden sizes 8 and 14 are the same
// computation on smaller matrices.  Checks, memory model and stall
// injection are those of tb_lsmr_accel; the accelerator runs at its default
// parameters.  This module only adds an outer watchdog.
module tb_wl_higgs;
  tb_lsmr_accel #(.N(101), .D(28), .HS(28), .TOL(0.05), .NEED_ODD(1'b1)) run ();

  initial begin
    #2s;
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
