// tb_gdn_pe: runs the compute-stage harness (tb_compute_harness) in a second
// configuration (D=16, PK=4, one GVA pair) so the PE datapath is exercised with
// two tiles per row and checked against a double-precision GDN model.
module tb_gdn_pe;
  tb_compute_harness #(.D(16), .PK(4), .H_ITER(2), .N_ITER(2), .NTOK(3)) u_h ();
endmodule
