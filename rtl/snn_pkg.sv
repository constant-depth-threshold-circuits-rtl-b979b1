// Shared types and constants of the epistasis contingency-table engine.
//
// The engine is a network of discrete-time spiking neurons. One clock cycle of
// the RTL is one timestep of the network, and a one-bit signal that is high
// during a cycle is a spike emitted in that timestep.
//
// Genotypes are stored in the network as a 3-bit one-hot string
// (0 -> 100, 1 -> 010, 2 -> 001), replayed most significant bit first. The
// helper genotype_weight() builds the synaptic weight that holds that string
// in a pattern-memory neuron: sign bit and next bit zero, the string starting
// one bit below them.
package snn_pkg;

  // Number of genotype values of a SNP (and so the length of its one-hot string).
  localparam int unsigned GENOTYPES = 3;

  typedef enum logic [1:0] {
    GT_HOM_MAJOR = 2'd0,  // homozygous major allele
    GT_HET       = 2'd1,  // heterozygous
    GT_HOM_MINOR = 2'd2   // homozygous minor allele
  } genotype_e;

  // Synaptic weight (S_PR bits, returned in the low bits of a 32-bit word)
  // that makes a pattern-memory neuron replay the one-hot string of g.
  // Bit S_PR-1 is the sign, bit S_PR-2 is kept 0, the string starts at S_PR-3.
  function automatic logic [31:0] genotype_weight(input genotype_e g, input int unsigned s_pr);
    return 32'd1 << (s_pr - 3 - int'(g));
  endfunction

  // Number of ones in a vector of up to 256 bits.
  function automatic int unsigned popcount256(input logic [255:0] v);
    int unsigned c;
    c = 0;
    for (int i = 0; i < 256; i++) c += int'(v[i]);
    return c;
  endfunction

  // Number of binary-sum levels of the population-count tree that counts m
  // bits in parts of l with n-input sums (m = l * n^levels).
  function automatic int unsigned tree_levels(input int unsigned m, input int unsigned l,
                                              input int unsigned n);
    int unsigned g, d;
    g = m / l;
    d = 0;
    while (g > 1) begin
      g = g / n;
      d++;
    end
    return d;
  endfunction

  // Output width of that tree: clog2(l+1) bits out of each part's count,
  // plus clog2(n) bits per sum level.
  function automatic int unsigned tree_width(input int unsigned m, input int unsigned l,
                                             input int unsigned n);
    return $clog2(l + 1) + tree_levels(m, l, n) * $clog2(n);
  endfunction

  // Latency of that tree in timesteps: 3 for the part counts, 2 per sum level.
  function automatic int unsigned tree_latency(input int unsigned m, input int unsigned l,
                                               input int unsigned n);
    return 3 + 2 * tree_levels(m, l, n);
  endfunction

endpackage
