// tb_wl_iris -- the accelerator on the layer sizes of the IRIS network.
//
// One hidden layer step of the 3-layer, hidden-size-8 network trained on
// IRIS: a weight_update call with A = x^T of 150 samples x 4 features and 8
// right-hand sides, run at the same time as an activation_update call with
// an 8 x 8 system and 150 right-hand sides.  The sizes come from the data
// set (150 samples of 4 features) and the network (hidden size 8); the
// checks, the memory model and the stall injection are those of
// tb_lsmr_accel, which this module instantiates with these sizes.  150 and
// 8 are both even, so the uneven column split is not required here.  The
// accelerator itself runs at its default parameters.  This module only adds
// an outer watchdog.
module tb_wl_iris;
  tb_lsmr_accel #(.N(150), .D(4), .HS(8), .TOL(0.05), .NEED_ODD(1'b0)) run ();

  initial begin
    #200ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end
endmodule
