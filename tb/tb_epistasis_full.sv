// End-to-end testbench of epistasis_top with every parameter at its default
// (16 SNPs, 64 samples, parts of 8, 2-input sums): two complete runs of all
// 120 SNP pairs. See epistasis_e2e for what is checked.
module tb_epistasis_full;
  epistasis_e2e #(.FULL(1'b1), .N_SNP(16), .M(64), .L(8)) u_test ();
endmodule
