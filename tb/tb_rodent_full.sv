// tb_rodent_full: end-to-end test of the accelerator at its default size
// (16 x 3 arrays of 512 x 512 cells, 784 input elements as for MNIST, 4096
// result packets of one array row each). See rodent_e2e for what is
// exercised and checked. The top is instantiated without parameter overrides.
module tb_rodent_full;
  rodent_e2e #(.FULL(1'b1), .M(512), .N(512), .AR(16), .AC(3), .IMD(4096), .NP(784), .W(3),
    .TXR(256), .BODY(300), .CUTS(4), .WATCHDOG(400000)) u_test ();
endmodule
