// aes_round: one AES encryption round, the logic of one voltage island.
//
// state_o = AddRoundKey(MixColumns(ShiftRows(SubBytes(state_i)))), with
// MixColumns left out when final_i is set (round 14 of AES-256). The round is
// purely combinational; in the iRDVS core two of them are chained inside a
// pipeline stage because the register between them is transparent. That each
// round forms its own island follows the design description (seven stages,
// two rounds and two islands each); the S-box is computed from GF(2^8)
// inversion rather than a table, which is a choice of this implementation.
module aes_round
  import irdvs_pkg::*;
(
  input  block_t state_i,
  input  block_t round_key_i,
  input  logic   final_i,
  output block_t state_o
);
  block_t shifted;

  always_comb begin
    shifted = shift_rows(sub_bytes(state_i));
    state_o = (final_i ? shifted : mix_columns(shifted)) ^ round_key_i;
  end
endmodule
