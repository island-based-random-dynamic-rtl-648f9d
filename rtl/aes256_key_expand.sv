// aes256_key_expand: AES-256 key schedule that computes and holds the 15
// round keys used by the seven pipeline stages.
//
// When key_valid_i is high and the unit is not busy, the 256-bit key is
// taken: round keys 0 and 1 are its two halves. One further round key
// (four 32-bit words of the FIPS-197 schedule) is then produced per clock
// from a window of the last eight words, so all 15 keys are ready
// 13 cycles after the key was taken; keys_ready_o then rises and stays high
// until the next key is taken. The words of an even round key start with
// SubWord(RotWord(w)) ^ Rcon, those of an odd one with SubWord(w), as the
// standard prescribes for 8-word keys.
//
// The design only states that the core runs AES-256; how the key is loaded
// and that keys are expanded once and held (rather than computed on the fly
// beside the data) is this implementation's choice. Reset clears
// keys_ready_o; the round keys themselves are not reset.
module aes256_key_expand
  import irdvs_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    key_valid_i,
  input  key256_t key_i,
  output logic    key_busy_o,    // expansion in progress, key_valid_i ignored
  output logic    keys_ready_o,  // round_keys_o holds a complete schedule
  output block_t  round_keys_o [NUM_ROUNDS+1]
);
  logic [255:0] win;        // w[i-8] in [255:224] ... w[i-1] in [31:0]
  logic [3:0]   rnd;        // index of the round key being computed
  logic [7:0]   rcon;
  logic         busy;
  logic [31:0]  t, n0, n1, n2, n3;

  always_comb begin
    if (!rnd[0]) t = sub_word({win[23:0], win[31:24]}) ^ {rcon, 24'h0};
    else         t = sub_word(win[31:0]);
    n0 = win[255:224] ^ t;
    n1 = win[223:192] ^ n0;
    n2 = win[191:160] ^ n1;
    n3 = win[159:128] ^ n2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      keys_ready_o <= 1'b0;
      rnd          <= '0;
      rcon         <= 8'h01;
      win          <= '0;
    end else if (!busy && key_valid_i) begin
      busy            <= 1'b1;
      keys_ready_o    <= 1'b0;
      rnd             <= 4'd2;
      rcon            <= 8'h01;
      win             <= key_i;
      round_keys_o[0] <= key_i[255:128];
      round_keys_o[1] <= key_i[127:0];
    end else if (busy) begin
      round_keys_o[rnd] <= {n0, n1, n2, n3};
      win               <= {win[127:0], n0, n1, n2, n3};
      if (!rnd[0]) rcon <= xtime(rcon);
      rnd <= rnd + 4'd1;
      if (rnd == 4'(NUM_ROUNDS)) begin
        busy         <= 1'b0;
        keys_ready_o <= 1'b1;
      end
    end
  end

  assign key_busy_o = busy;
endmodule
