// tb_irdvs_aes256_core: end-to-end test of the iRDVS AES-256 core at its
// default (and only) size.
//
// 1. Loads the FIPS-197 AES-256 key, checks the 13-cycle expansion, encrypts
//    the FIPS-197 plaintext alone and checks the ciphertext and the empty-
//    pipeline latency, sum over stages of max(delay,1) plus 6 hand-offs,
//    with stage delays worked out here from a hand-made table.
// 2. Runs batches of 32 encryptions in the style of the fixed-vs-random
//    leakage test: the plaintext of interest (fixed or random, alternating
//    per batch) sits in the middle of 31 random ones so the pipeline is full.
//    Batches cycle through the constant (all 0.8 V), DVS (one random voltage
//    in 0.6..0.8 V), adjacent and alternating iRDVS configurations (four
//    independent random voltages in 0.6..1.0 V); voltages change between
//    batches. Between two batches a new random key is requested while
//    encryptions are still in flight. Ciphertext ready is random.
//    Every ciphertext is compared, in order, with the reference model.
// Each mechanism must occur: stalls between stages, output backpressure,
// plaintexts held off, several encryptions overlapping, unequal stage
// delays, every configuration, voltage changes and a key load held off by
// a busy pipeline.
module tb_irdvs_aes256_core;
  import aes_ref_pkg::*;
  import irdvs_pkg::*;

  logic clk = 0, rst_n = 0;
  logic key_valid, key_ready, keys_valid;
  logic [255:0] key;
  logic pt_valid, pt_ready, ct_valid, ct_ready;
  logic [127:0] pt, ct;
  island_cfg_e cfg;
  vcode_t vc [NUM_DOMAINS];
  logic [NUM_STAGES-1:0] sbusy, sstall;
  logic [DELAY_W-1:0] idelay [NUM_ISLANDS];

  irdvs_aes256_core dut (
    .clk, .rst_n,
    .key_valid_i(key_valid), .key_ready_o(key_ready), .key_i(key), .keys_valid_o(keys_valid),
    .pt_valid_i(pt_valid), .pt_ready_o(pt_ready), .pt_i(pt),
    .ct_valid_o(ct_valid), .ct_ready_i(ct_ready), .ct_o(ct),
    .cfg_i(cfg), .dom_vcode_i(vc),
    .stage_busy_o(sbusy), .stage_stall_o(sstall), .island_delay_o(idelay));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  localparam int EXP_DELAY [8] = '{14, 9, 7, 5, 4, 4, 4, 4};
  localparam int ADJ [14] = '{0, 0, 0, 0, 1, 1, 1, 2, 2, 2, 2, 3, 3, 3};
  localparam int NBATCH = 16;

  // mechanism counters
  int n_inner_stall = 0, n_out_backpressure = 0, n_pt_held = 0, n_overlap = 0;
  int n_unequal = 0, n_vchange = 0, n_key_held = 0, n_key_loads = 0, n_ct = 0;
  int n_cfg [4] = '{0, 0, 0, 0};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int island_dom(input island_cfg_e c, input int i);
    return (c == CFG_ADJACENT) ? ADJ[i] : (c == CFG_ALTERNATING) ? i % 4 : 0;
  endfunction

  function automatic int stage_delay(input int s);
    return EXP_DELAY[vc[island_dom(cfg, 2*s)]] + EXP_DELAY[vc[island_dom(cfg, 2*s+1)]];
  endfunction

  task automatic set_voltages(input island_cfg_e c);
    cfg = c;
    case (c)
      CFG_CONSTANT: for (int d = 0; d < 4; d++) vc[d] = 3'd2;
      CFG_DVS: begin
        vc[0] = vcode_t'($urandom_range(0, 2));
        for (int d = 1; d < 4; d++) vc[d] = vc[0];
      end
      default: for (int d = 0; d < 4; d++) vc[d] = vcode_t'($urandom_range(0, 4));
    endcase
    n_vchange++;
  endtask

  task automatic load_key(input logic [255:0] k);
    int n;
    @(negedge clk);
    key = k; key_valid = 1;
    n = 0;
    while (!key_ready) begin
      n_key_held++;
      @(negedge clk);
    end
    @(negedge clk);             // taken at the edge just passed
    key_valid = 0;
    while (!keys_valid && n < 100) begin
      @(negedge clk);
      n++;
    end
    check(n == 13, $sformatf("key expansion %0d cycles", n));
    n_key_loads++;
  endtask

  logic [127:0] exp_q [$];
  logic [255:0] cur_key;

  // One negedge step: check outputs, then drive the next edge.
  bit pt_taken_last;
  task automatic step(input bit offer, input logic [127:0] next_pt, output bit took);
    int busy_n;
    @(negedge clk);
    busy_n = $countones(sbusy);
    if (busy_n >= 2) n_overlap++;
    if (sstall[NUM_STAGES-2:0] != '0) n_inner_stall++;
    ct_ready = ($urandom_range(0, 4) != 0);
    #1;
    if (ct_valid && !ct_ready) n_out_backpressure++;
    if (ct_valid && ct_ready) begin
      check(exp_q.size() > 0, "unexpected ciphertext");
      if (exp_q.size() > 0) check(ct === exp_q.pop_front(), $sformatf("ciphertext %0d", n_ct));
      n_ct++;
    end
    if (!pt_valid || pt_taken_last) begin
      pt_valid = offer;
      pt = next_pt;
    end
    #1;
    if (pt_valid && !pt_ready) n_pt_held++;
    pt_taken_last = pt_valid && pt_ready;
    took = pt_taken_last;
    if (took) exp_q.push_back(encrypt_ref(cur_key, pt));
  endtask

  initial begin
    logic [127:0] fixed_pt;
    bit took;
    int lat, expect_lat;
    load_sbox();
    key_valid = 0; key = '0; pt_valid = 0; pt = '0; ct_ready = 1;
    set_voltages(CFG_CONSTANT);
    n_vchange = 0;
    pt_taken_last = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!pt_ready && !ct_valid, "idle after reset");

    // 1. FIPS-197 example, alone in the pipeline
    cur_key = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    load_key(cur_key);
    @(negedge clk);
    pt = 128'h00112233445566778899aabbccddeeff; pt_valid = 1;
    #1 check(pt_ready, "ready for first plaintext");
    @(negedge clk);             // taken
    pt_valid = 0;
    lat = 0;
    while (!ct_valid && lat < 1000) begin
      @(negedge clk);
      lat++;
    end
    expect_lat = 6;
    for (int s = 0; s < 7; s++) expect_lat += stage_delay(s);
    check(lat == expect_lat, $sformatf("latency %0d expected %0d", lat, expect_lat));
    check(ct === 128'h8ea2b7ca516745bfeafc49904b496089, $sformatf("FIPS-197 ciphertext %h", ct));
    for (int i = 0; i < 14; i++)
      check(int'(idelay[i]) == EXP_DELAY[2], "island delay at 0.8 V");
    @(negedge clk);
    ct_ready = 1;
    @(negedge clk);
    check(!ct_valid, "ciphertext taken");

    // 2. batches of 32
    fixed_pt = 128'hda39a3ee5e6b4b0d3255bfef95601890;
    for (int b = 0; b < NBATCH; b++) begin
      island_cfg_e c;
      c = island_cfg_e'(b % 4);
      if (b == NBATCH / 2) begin
        cur_key = rand256();
        // request the key while the last batch is still in flight
        fork
          load_key(cur_key);
          repeat (400) step(0, '0, took);
        join_any
        wait fork;
      end
      set_voltages(c);
      n_cfg[c]++;
      begin
        bit diff;
        diff = 0;
        for (int s = 1; s < 7; s++) if (stage_delay(s) != stage_delay(0)) diff = 1;
        if (diff) n_unequal++;
      end
      for (int i = 0; i < 32; i++) begin
        logic [127:0] p;
        p = (i == 15 && b[0]) ? fixed_pt : rand128();
        took = 0;
        while (!took) step(($urandom_range(0, 7) != 0), p, took);
      end
    end
    // drain
    for (int n = 0; n < 2000 && exp_q.size() > 0; n++) step(0, '0, took);
    check(exp_q.size() == 0, "all ciphertexts returned");
    check(n_ct == NBATCH * 32, $sformatf("%0d ciphertexts", n_ct));

    $display("mechanisms: inner stalls %0d, output backpressure %0d, plaintext held %0d, overlap %0d",
             n_inner_stall, n_out_backpressure, n_pt_held, n_overlap);
    $display("            unequal-delay batches %0d, voltage changes %0d, key held %0d, key loads %0d",
             n_unequal, n_vchange, n_key_held, n_key_loads);
    $display("            batches per config: constant %0d dvs %0d adjacent %0d alternating %0d",
             n_cfg[0], n_cfg[1], n_cfg[2], n_cfg[3]);
    check(n_inner_stall > 0, "stall between stages");
    check(n_out_backpressure > 0, "output backpressure");
    check(n_pt_held > 0, "plaintext held off");
    check(n_overlap > 0, "overlapping encryptions");
    check(n_unequal > 0, "unequal stage delays");
    check(n_vchange > 0, "voltage change");
    check(n_key_held > 0, "key load held off");
    check(n_key_loads == 2, "key loads");
    for (int c = 0; c < 4; c++) check(n_cfg[c] > 0, $sformatf("configuration %0d run", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
