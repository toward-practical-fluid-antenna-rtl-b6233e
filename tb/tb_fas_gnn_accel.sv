// End-to-end test of the accelerator at its default parameters with a
// reduced network (hidden widths 64 and 32) and a memory with random stalls.
// First two port selections are inferred concurrently (8 stacked rows), then
// one; both outputs are checked against the reference model in gnn_run.
// The network shape follows the published GNN; the reduced widths, stall
// pattern and data are choices of this test.
module tb_fas_gnn_accel;
  gnn_run #(.K(4), .NFA(4), .H0(64), .H(32), .T_A(2), .T_B(1), .GAPS(1'b1),
            .MAX_RATIO(1.0), .WATCHDOG(400000)) u_run ();
endmodule
