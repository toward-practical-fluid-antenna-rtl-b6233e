// Full-size end-to-end test: the accelerator at its default parameters runs
// the published network (2N = 8 inputs, hidden widths 1024 and 512, two GNN
// layers, K = 4 UEs) once for one port selection and once for four port
// selections stacked on chip. The outputs of both runs are checked against
// the reference model in gnn_run; the one-selection latency must lie in the
// published range of 392,636 to 610,442 cycles and four selections may take
// at most 25% longer than one, since the weight stream is shared.
module tb_fas_gnn_full;
  gnn_run #(.K(4), .NFA(4), .H0(1024), .H(512), .T_A(1), .T_B(4), .GAPS(1'b0),
            .MAX_RATIO(1.25), .LAT_MIN(392636), .LAT_MAX(610442),
            .WATCHDOG(3000000)) u_run ();
endmodule
