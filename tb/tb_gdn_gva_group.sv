// tb_gdn_gva_group: runs the compute-stage harness (tb_compute_harness), which drives the
// compute stage, its GVA pairs and PEs and the persistent state memory over
// several tokens and checks outputs, persistence and cycle counts against a
// double-precision model of the GDN recurrence.
module tb_gdn_gva_group;
  tb_compute_harness #(.D(32), .PK(8), .H_ITER(4), .N_ITER(2), .NTOK(3)) u_h ();
endmodule
