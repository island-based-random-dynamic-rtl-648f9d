// tb_irdvs_stage: checks one pipeline stage, in a middle-stage instance
// (LAST = 0) and a last-stage instance (LAST = 1) driven alike. Words are
// offered with random gaps and random completion delays 0..20, and the
// downstream ready is random, so stalls occur. Each result is compared with
// two reference rounds; each word's latency, from the edge that takes it to
// the edge after which out_valid_o is high, must be max(delay,1); and a
// stalled result must stay valid and unchanged.
module tb_irdvs_stage;
  import aes_ref_pkg::*;
  import irdvs_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, out_ready;
  logic [127:0] in_data, rka, rkb;
  logic [DELAY_W-1:0] delay;
  logic in_ready [2], out_valid [2], busy [2], stall [2];
  logic [127:0] out_data [2];
  int checks = 0, failures = 0, stalls = 0, words = 0;

  for (genvar g = 0; g < 2; g++) begin : g_dut
    irdvs_stage #(.LAST(g == 1)) dut (
      .clk, .rst_n,
      .in_valid_i(in_valid), .in_ready_o(in_ready[g]), .in_data_i(in_data),
      .out_valid_o(out_valid[g]), .out_ready_i(out_ready), .out_data_o(out_data[g]),
      .rk_a_i(rka), .rk_b_i(rkb), .delay_i(delay), .busy_o(busy[g]), .stall_o(stall[g]));
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, take_cyc, take_delay;
    bit pending, seen;
    logic [127:0] word, held;
    bit was_stalled, last_taken;
    load_sbox();
    rka = rand128(); rkb = rand128();
    in_valid = 0; out_ready = 0; in_data = '0; delay = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    cyc = 0; pending = 0; seen = 0; was_stalled = 0; last_taken = 0;
    while (words < 400) begin
      @(negedge clk);
      cyc++;
      // outputs as they are after the last edge
      check(in_ready[0] == in_ready[1] && out_valid[0] == out_valid[1], "instances agree on handshake");
      if (was_stalled) check(out_valid[0] && out_data[0] === held, "stalled result held");
      if (pending && out_valid[0] && !seen) begin
        seen = 1;
        check(cyc - 1 - take_cyc == ((take_delay > 1) ? take_delay : 1),
              $sformatf("latency %0d for delay %0d", cyc - 1 - take_cyc, take_delay));
        check(out_data[0] === round_ref(round_ref(word, rka, 0), rkb, 0), "middle stage data");
        check(out_data[1] === round_ref(round_ref(word, rka, 0), rkb, 1), "last stage data");
      end
      // drive the next edge
      out_ready = ($urandom_range(0, 2) != 0);
      #1;
      if (!in_valid || last_taken) begin
        if ($urandom_range(0, 3) != 0) begin
          in_valid = 1; in_data = rand128(); delay = DELAY_W'($urandom_range(0, 20));
        end else in_valid = 0;
      end
      #1;
      was_stalled = out_valid[0] && !out_ready;
      held = out_data[0];
      if (was_stalled) begin
        stalls++;
        check(stall[0] && stall[1], "stall flag");
      end
      if (out_valid[0] && out_ready) begin
        check(pending && seen, "result handed on once");
        pending = 0;
        words++;
      end
      last_taken = in_valid && in_ready[0];
      if (last_taken) begin
        pending = 1; seen = 0; word = in_data; take_cyc = cyc; take_delay = int'(delay);
      end
    end
    check(stalls > 0, "stall exercised");
    $display("stage test: %0d words, %0d stall cycles", words, stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
