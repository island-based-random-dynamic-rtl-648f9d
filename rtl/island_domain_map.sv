// island_domain_map: selects the power domain (0..3) that feeds each of the
// 14 AES round islands, for the configuration cfg_i.
//
//   CFG_CONSTANT, CFG_DVS  every island on domain 0, so the whole core runs
//                          from one supply (fixed 0.8 V, or one random
//                          voltage per batch)
//   CFG_ADJACENT           neighbouring rounds share a domain: island i is on
//                          domain floor(4*i/14), giving groups of 4, 3, 4, 3
//   CFG_ALTERNATING        island i is on domain i mod 4, so consecutive
//                          rounds are always on different supplies
//
// Island i is AES round i+1; islands 2s and 2s+1 form pipeline stage s. The
// four configurations and the four domains are those measured on the core;
// the exact grouping used for "adjacent" and "alternating" is not spelled out
// and is this implementation's reading. On silicon the outputs would drive
// the power switches of each island; the mapping is combinational.
module island_domain_map
  import irdvs_pkg::*;
(
  input  island_cfg_e cfg_i,
  output dom_sel_t    island_dom_o [NUM_ISLANDS]
);
  always_comb begin
    for (int i = 0; i < NUM_ISLANDS; i++) begin
      unique case (cfg_i)
        CFG_ADJACENT:    island_dom_o[i] = dom_sel_t'((i * NUM_DOMAINS) / NUM_ISLANDS);
        CFG_ALTERNATING: island_dom_o[i] = dom_sel_t'(i % NUM_DOMAINS);
        default:         island_dom_o[i] = '0;
      endcase
    end
  end
endmodule
