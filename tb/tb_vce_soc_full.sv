// tb_vce_soc_full -- end-to-end test of the SoC at its default parameters
// (320x320 frames, 384 KiB L2, 136 KiB accelerator SRAM, 50-label window
// limit). See vce_soc_bench for what is checked.
module tb_vce_soc_full;
  vce_soc_bench #(.FULL(1'b1)) u_bench ();
endmodule
