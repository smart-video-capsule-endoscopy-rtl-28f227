// tb_vce_soc_top -- end-to-end test of the SoC with 16x16 frames (all other
// parameters at their defaults). See vce_soc_bench for what is checked.
module tb_vce_soc_top;
  vce_soc_bench #(.FULL(1'b0)) u_bench ();
endmodule
