// tb_aes256_key_expand: checks the AES-256 key schedule. For the FIPS-197
// example keys it compares round key 14 with the published value, and for
// those and 20 random keys all 15 round keys with the reference schedule.
// It checks that keys_ready_o rises exactly 13 cycles after the edge that
// took the key, and that a key offered during an expansion is ignored.
module tb_aes256_key_expand;
  import aes_ref_pkg::*;
  import irdvs_pkg::*;

  logic         clk = 0, rst_n = 0;
  logic         key_valid;
  logic [255:0] key;
  logic         busy, ready;
  block_t       rks [NUM_ROUNDS+1];
  int checks = 0, failures = 0;

  aes256_key_expand dut (.clk, .rst_n, .key_valid_i(key_valid), .key_i(key),
                         .key_busy_o(busy), .keys_ready_o(ready), .round_keys_o(rks));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_and_check(input logic [255:0] k, input bit poke_during_busy);
    rk_arr_t exp;
    int n;
    @(negedge clk);
    key = k; key_valid = 1;
    @(negedge clk);               // key taken at the edge just passed
    check(busy && !ready, "busy after load");
    key = ~k;                     // must be ignored
    key_valid = poke_during_busy;
    n = 0;
    while (!ready && n < 100) begin
      @(negedge clk);
      n++;
    end
    key_valid = 0;
    check(n == 13, $sformatf("expansion took %0d cycles after the load edge, expected 13", n));
    exp = expand_ref(k);
    for (int r = 0; r <= 14; r++)
      check(rks[r] === exp[r], $sformatf("round key %0d: got %h exp %h", r, rks[r], exp[r]));
    @(negedge clk);
    check(ready && !busy, "ready holds");
  endtask

  initial begin
    load_sbox();
    key_valid = 0; key = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!ready && !busy, "idle after reset");
    load_and_check(256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f, 1'b1);
    load_and_check(256'h603deb1015ca71be2b73aef0857d77811f352c073b6108d72d9810a30914dff4, 1'b0);
    check(rks[14] === 128'hfe4890d1e6188d0b046df344706c631e, "FIPS-197 A.3 last round key");
    for (int i = 0; i < 20; i++) load_and_check(rand256(), i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
