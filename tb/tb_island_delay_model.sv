// tb_island_delay_model: checks the voltage-to-delay model. The expected
// island delays, 4/5/7/9/14 cycles at 1.0/0.9/0.8/0.7/0.6 V, were worked out
// by hand from tau ~ V/(V-0.3)^2 scaled to 4 cycles at 1.0 V and rounded up.
// Every voltage code combination of the four domains is applied under random
// island-to-domain assignments; each island delay and each stage delay (sum
// of its two islands) is compared.
module tb_island_delay_model;
  import irdvs_pkg::*;

  vcode_t             vc  [NUM_DOMAINS];
  dom_sel_t           dom [NUM_ISLANDS];
  logic [DELAY_W-1:0] idl [NUM_ISLANDS];
  logic [DELAY_W-1:0] sdl [NUM_STAGES];
  int checks = 0, failures = 0;

  localparam int EXP [8] = '{14, 9, 7, 5, 4, 4, 4, 4};

  island_delay_model dut (.dom_vcode_i(vc), .island_dom_i(dom),
                          .island_delay_o(idl), .stage_delay_o(sdl));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 4096; n++) begin
      for (int d = 0; d < 4; d++) vc[d] = vcode_t'(n >> (3*d));
      for (int i = 0; i < 14; i++) dom[i] = dom_sel_t'($urandom_range(0, 3));
      #1;
      for (int i = 0; i < 14; i++) begin
        checks++;
        if (int'(idl[i]) != EXP[vc[dom[i]]]) begin
          failures++;
          if (failures < 10) $display("FAIL island %0d code %0d: %0d", i, vc[dom[i]], idl[i]);
        end
      end
      for (int s = 0; s < 7; s++) begin
        checks++;
        if (int'(sdl[s]) != EXP[vc[dom[2*s]]] + EXP[vc[dom[2*s+1]]]) begin
          failures++;
          if (failures < 10) $display("FAIL stage %0d: %0d", s, sdl[s]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
