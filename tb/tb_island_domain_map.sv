// tb_island_domain_map: checks the island-to-domain assignment for all four
// configurations against tables written out by hand, and that both iRDVS
// configurations use all four domains while constant and DVS use one.
module tb_island_domain_map;
  import irdvs_pkg::*;

  island_cfg_e cfg;
  dom_sel_t    dom [NUM_ISLANDS];
  int checks = 0, failures = 0;

  island_domain_map dut (.cfg_i(cfg), .island_dom_o(dom));

  localparam int ADJ [14] = '{0, 0, 0, 0, 1, 1, 1, 2, 2, 2, 2, 3, 3, 3};
  localparam int ALT [14] = '{0, 1, 2, 3, 0, 1, 2, 3, 0, 1, 2, 3, 0, 1};

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 4; c++) begin
      bit [3:0] used;
      cfg = island_cfg_e'(c);
      #1;
      used = '0;
      for (int i = 0; i < 14; i++) begin
        int e;
        e = (c == 2) ? ADJ[i] : (c == 3) ? ALT[i] : 0;
        checks++;
        if (int'(dom[i]) != e) begin
          failures++;
          $display("FAIL cfg %0d island %0d: got %0d exp %0d", c, i, dom[i], e);
        end
        used[dom[i]] = 1'b1;
      end
      checks++;
      if (used != ((c >= 2) ? 4'b1111 : 4'b0001)) begin
        failures++;
        $display("FAIL cfg %0d domains used %b", c, used);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
