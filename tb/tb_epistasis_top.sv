// End-to-end testbench of epistasis_top at a reduced size: 6 SNPs, 16 samples,
// population count in parts of 4 with two levels of 2-input sums. See
// epistasis_e2e for what is checked.
module tb_epistasis_top;
  epistasis_e2e #(.FULL(1'b0), .N_SNP(6), .M(16), .L(4)) u_test ();
endmodule
