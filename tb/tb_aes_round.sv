// tb_aes_round: checks one AES round island against the reference model.
// First the reference itself is checked on the FIPS-197 AES-256 example
// (key 00..1f, plaintext 00112233..ff, ciphertext 8ea2b7ca..6089); then the
// RTL round is compared with the reference round on that example's 14
// rounds and on 2000 random states and keys, half of them final rounds.
module tb_aes_round;
  import aes_ref_pkg::*;

  logic [127:0] state_i, rk_i, state_o;
  logic         final_i;
  int checks = 0, failures = 0;

  aes_round dut (.state_i, .round_key_i(rk_i), .final_i, .state_o);

  task automatic check(input logic [127:0] got, input logic [127:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [255:0] key;
    logic [127:0] s, e;
    rk_arr_t rks;
    load_sbox();
    key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    check(encrypt_ref(key, 128'h00112233445566778899aabbccddeeff),
          128'h8ea2b7ca516745bfeafc49904b496089, "reference FIPS-197");
    rks = expand_ref(key);
    s = 128'h00112233445566778899aabbccddeeff ^ rks[0];
    for (int r = 1; r <= 14; r++) begin
      state_i = s; rk_i = rks[r]; final_i = (r == 14);
      #1;
      e = round_ref(s, rks[r], r == 14);
      check(state_o, e, $sformatf("round %0d", r));
      s = e;
    end
    check(s, 128'h8ea2b7ca516745bfeafc49904b496089, "chained rounds");
    for (int i = 0; i < 2000; i++) begin
      state_i = rand128(); rk_i = rand128(); final_i = i[0];
      #1;
      check(state_o, round_ref(state_i, rk_i, final_i), "random round");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
