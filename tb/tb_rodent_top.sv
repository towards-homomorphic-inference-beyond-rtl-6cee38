// tb_rodent_top: end-to-end test of the accelerator at reduced size
// (2 x 2 arrays of 16 x 16 cells, 8 input elements, 8 result packets).
// See rodent_e2e for what is exercised and checked.
module tb_rodent_top;
  rodent_e2e #(.FULL(1'b0), .M(16), .N(16), .AR(2), .AC(2), .IMD(128), .NP(8), .W(3),
    .TXR(4), .BODY(90), .CUTS(4)) u_test ();
endmodule
