// tb_tvla_batches: runs the four measured cases of the core (constant 0.8 V,
// DVS with one random voltage in 0.6..0.8 V, adjacent and alternating iRDVS
// with four independent random voltages in 0.6..1.0 V) as batches of 32
// encryptions, as in a fixed-vs-random leakage test: the plaintext of
// interest (alternately fixed and random) sits in the middle of 31 random
// ones. Voltages change between batches; the pipeline is drained first.
//
// With plaintexts always offered and ciphertexts always taken, a batch
// lasts exactly
//     T = sum_s d_s + 6 + 31 * (max_s d_s + 1)    cycles, d_s = max(delay,1),
// from the edge that takes the first plaintext to the edge after which the
// last ciphertext is valid: the first word crosses the empty pipeline, and
// the slowest stage then releases one word per max_s d_s + 1 cycles. Stage
// delays come from a hand-computed table (4/5/7/9/14 cycles per island at
// 1.0..0.6 V). The testbench checks every ciphertext and every T, that the
// constant case always takes the same time, that DVS takes one of its three
// possible times and more than one of them, and it reports the spread of
// batch times per case (on silicon, the spread of trace lengths).
module tb_tvla_batches;
  import aes_ref_pkg::*;
  import irdvs_pkg::*;

  localparam int BATCHES = 24;   // per case
  localparam int EXP_DELAY [8] = '{14, 9, 7, 5, 4, 4, 4, 4};
  localparam int ADJ [14] = '{0, 0, 0, 0, 1, 1, 1, 2, 2, 2, 2, 3, 3, 3};

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

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int island_dom(input island_cfg_e c, input int i);
    return (c == CFG_ADJACENT) ? ADJ[i] : (c == CFG_ALTERNATING) ? i % 4 : 0;
  endfunction

  function automatic int batch_cycles();
    int sum, mx, d;
    sum = 0; mx = 0;
    for (int s = 0; s < 7; s++) begin
      d = EXP_DELAY[vc[island_dom(cfg, 2*s)]] + EXP_DELAY[vc[island_dom(cfg, 2*s+1)]];
      sum += d;
      if (d > mx) mx = d;
    end
    return sum + 6 + 31 * (mx + 1);
  endfunction

  bit pt_ready_last = 0;

  initial begin
    logic [255:0] k;
    logic [127:0] fixed_pt, exp_q [$];
    int t, t_first, sent, got, expect_t, dur;
    int tmin [4], tmax [4], seen_dvs [int];
    load_sbox();
    key_valid = 0; key = '0; pt_valid = 0; pt = '0; ct_ready = 1;
    cfg = CFG_CONSTANT;
    for (int d = 0; d < 4; d++) vc[d] = 3'd2;
    repeat (3) @(negedge clk);
    rst_n = 1;
    k = rand256();
    fixed_pt = rand128();
    @(negedge clk);
    key = k; key_valid = 1;
    @(negedge clk);
    key_valid = 0;
    while (!keys_valid) @(negedge clk);

    for (int c = 0; c < 4; c++) begin
      tmin[c] = 1 << 30; tmax[c] = 0;
      for (int b = 0; b < BATCHES; b++) begin
        cfg = island_cfg_e'(c);
        case (cfg)
          CFG_CONSTANT: for (int d = 0; d < 4; d++) vc[d] = 3'd2;
          CFG_DVS: begin
            vc[0] = vcode_t'($urandom_range(0, 2));
            for (int d = 1; d < 4; d++) vc[d] = vc[0];
          end
          default: for (int d = 0; d < 4; d++) vc[d] = vcode_t'($urandom_range(0, 4));
        endcase
        expect_t = batch_cycles();
        sent = 0; got = 0; t = 0; t_first = -1; dur = 0;
        while (got < 32 && t < 5000) begin
          // drive at the negedge, then observe the coming edge's handshakes
          pt_valid = (sent < 32);
          if (sent < 32 && (t == 0 || pt_ready_last)) pt = (sent == 15 && b[0]) ? fixed_pt : rand128();
          #1;
          if (ct_valid) begin
            check(exp_q.size() > 0 && ct === exp_q.pop_front(), "ciphertext");
            got++;
            if (got == 32) begin
              dur = t - 1 - t_first;
              check(dur == expect_t, $sformatf("case %0d batch %0d: %0d cycles, expected %0d",
                                               c, b, dur, expect_t));
            end
          end
          if (pt_valid && pt_ready) begin
            exp_q.push_back(encrypt_ref(k, pt));
            if (sent == 0) t_first = t;
            sent++;
          end
          pt_ready_last = pt_valid && pt_ready;
          @(negedge clk);
          t++;
        end
        pt_valid = 0;
        check(got == 32, "batch complete");
        if (dur < tmin[c]) tmin[c] = dur;
        if (dur > tmax[c]) tmax[c] = dur;
        if (cfg == CFG_DVS) seen_dvs[dur] = 1;
        repeat (3) @(negedge clk);
      end
      $display("case %0d: batch of 32 takes %0d..%0d cycles", c, tmin[c], tmax[c]);
    end
    check(tmin[0] == tmax[0] && tmin[0] == 569, "constant case: always 98 + 6 + 31*15 cycles");
    check(seen_dvs.num() >= 2 && seen_dvs.num() <= 3, "DVS case has two or three batch times");
    check(tmax[2] > tmin[2] && tmax[3] > tmin[3], "iRDVS batch times vary");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
