// irdvs_aes256_core: AES-256 encryption core protected by island-based random
// dynamic voltage scaling (iRDVS).
//
// The 14 AES-256 rounds are split into seven pipeline stages of two rounds
// each (every other pipeline register is transparent). Each round is a
// voltage island; the 14 islands are fed from four independent power domains
// whose voltages are changed at random, so that several encryptions in
// different stages are computed at once under voltages an attacker cannot
// separate. Because each stage's delay then varies, the stages are linked by
// flow-controlled channels: a stage holds its result until the next stage
// can take it.
//
// Structure: aes256_key_expand computes and holds the 15 round keys;
// the plaintext is XORed with round key 0 on entry; stage s (irdvs_stage)
// computes rounds 2s+1 and 2s+2; island_domain_map assigns islands to
// domains for the configuration cfg_i; island_delay_model turns the four
// domain voltage codes into each stage's completion delay (a behavioural
// model of the analog supply effect; on silicon the voltages come from
// outside the core).
//
// Interface. A key is taken when key_valid_i && key_ready_o (only when the
// pipeline is empty and no expansion is running); keys_valid_o rises 13
// cycles later. Plaintexts enter on pt_valid_i/pt_ready_o and ciphertexts
// leave, in order, on ct_valid_o/ct_ready_i, both valid/ready channels.
// Up to seven encryptions are in flight. With no stall, ct_valid_o rises
// sum over stages of max(delay,1), plus 6 hand-off cycles, clock edges
// after the edge that took the plaintext.
// stage_busy_o and stage_stall_o show, per stage, a word being computed and a
// finished word waiting for the next stage; island_delay_o gives the modelled
// time of each round island.
//
// The stage and island counts, the four domains and the four configurations
// follow the design description; the channel protocol, key handling and
// the delay scale are this implementation's choices.
module irdvs_aes256_core
  import irdvs_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  // key load
  input  logic                  key_valid_i,
  output logic                  key_ready_o,
  input  key256_t               key_i,
  output logic                  keys_valid_o,
  // plaintext in
  input  logic                  pt_valid_i,
  output logic                  pt_ready_o,
  input  block_t                pt_i,
  // ciphertext out
  output logic                  ct_valid_o,
  input  logic                  ct_ready_i,
  output block_t                ct_o,
  // voltage islands
  input  island_cfg_e           cfg_i,
  input  vcode_t                dom_vcode_i [NUM_DOMAINS],
  // status
  output logic [NUM_STAGES-1:0] stage_busy_o,
  output logic [NUM_STAGES-1:0] stage_stall_o,
  output logic [DELAY_W-1:0]    island_delay_o [NUM_ISLANDS]  // modelled round delays, cycles
);
  block_t             round_keys [NUM_ROUNDS+1];
  logic               key_busy, pipe_empty;
  dom_sel_t           island_dom  [NUM_ISLANDS];
  logic [DELAY_W-1:0] stage_delay  [NUM_STAGES];

  // channel s enters stage s; channel NUM_STAGES is the ciphertext output
  logic   ch_valid [NUM_STAGES+1];
  logic   ch_ready [NUM_STAGES+1];
  block_t ch_data  [NUM_STAGES+1];

  aes256_key_expand u_keys (
    .clk, .rst_n,
    .key_valid_i (key_valid_i && key_ready_o),
    .key_i,
    .key_busy_o  (key_busy),
    .keys_ready_o(keys_valid_o),
    .round_keys_o(round_keys)
  );

  island_domain_map u_map (.cfg_i, .island_dom_o(island_dom));

  island_delay_model u_delay (
    .dom_vcode_i, .island_dom_i(island_dom),
    .island_delay_o, .stage_delay_o(stage_delay)
  );

  assign ch_valid[0] = pt_valid_i && keys_valid_o;
  assign pt_ready_o  = ch_ready[0] && keys_valid_o;
  assign ch_data[0]  = pt_i ^ round_keys[0];

  for (genvar s = 0; s < NUM_STAGES; s++) begin : g_stage
    irdvs_stage #(.LAST(s == NUM_STAGES - 1)) u_stage (
      .clk, .rst_n,
      .in_valid_i (ch_valid[s]),   .in_ready_o (ch_ready[s]),   .in_data_i (ch_data[s]),
      .out_valid_o(ch_valid[s+1]), .out_ready_i(ch_ready[s+1]), .out_data_o(ch_data[s+1]),
      .rk_a_i     (round_keys[2*s + 1]),
      .rk_b_i     (round_keys[2*s + 2]),
      .delay_i    (stage_delay[s]),
      .busy_o     (stage_busy_o[s]),
      .stall_o    (stage_stall_o[s])
    );
  end

  assign ct_valid_o = ch_valid[NUM_STAGES];
  assign ch_ready[NUM_STAGES] = ct_ready_i;
  assign ct_o = ch_data[NUM_STAGES];

  always_comb begin
    pipe_empty = 1'b1;
    for (int s = 1; s <= NUM_STAGES; s++)
      if (ch_valid[s]) pipe_empty = 1'b0;
    if (stage_busy_o != '0) pipe_empty = 1'b0;
  end
  assign key_ready_o = !key_busy && pipe_empty;

  // Round keys must not change while an encryption is in flight.
  a_key_quiet: assert property (@(posedge clk) disable iff (!rst_n)
    key_busy |-> pipe_empty);
endmodule
