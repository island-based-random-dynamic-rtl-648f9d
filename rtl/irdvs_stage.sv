// irdvs_stage: one of the seven stages of the iRDVS AES-256 pipeline.
//
// A stage holds two AES round islands in series. The flip-flop that would
// sit between them is transparent, so both rounds are evaluated in one pass
// from the stage's input register (din). The stage talks to its
// neighbours over a valid/ready channel, the synchronous stand-in for the
// asynchronous handshake channels between islands: a word moves when valid
// and ready are both high at a clock edge.
//
// Timing. On silicon the time a stage needs depends on the supply voltages
// of its two islands. Here that time is the input delay_i, in clock cycles,
// sampled when a word is taken: out_valid_o rises max(delay_i,1) clock edges
// after the edge that took the word, and the result is held while
// out_ready_i is low (a stall). The stage takes a new word in the same cycle
// in which it hands its result on, so with every stage ready one word leaves
// every max(delay,1)+1 cycles.
//
// The two-rounds-per-stage split and the flow control that copes with
// unequal stage delays follow the design description; the valid/ready
// protocol, the delay counter that stands in for completion detection, and
// the reset (stage empty) are choices of this implementation.
module irdvs_stage
  import irdvs_pkg::*;
#(
  parameter bit LAST = 1'b0   // second round is AES round 14 (no MixColumns)
) (
  input  logic               clk,
  input  logic               rst_n,
  // upstream channel
  input  logic               in_valid_i,
  output logic               in_ready_o,
  input  block_t             in_data_i,
  // downstream channel
  output logic               out_valid_o,
  input  logic               out_ready_i,
  output block_t             out_data_o,
  // round keys of the two islands
  input  block_t             rk_a_i,
  input  block_t             rk_b_i,
  // completion delay of this stage, in cycles
  input  logic [DELAY_W-1:0] delay_i,
  // status
  output logic               busy_o,   // word inside, result not yet valid
  output logic               stall_o   // result valid, downstream not ready
);
  typedef enum logic [1:0] {ST_EMPTY, ST_BUSY, ST_FULL} st_e;

  st_e                st;
  logic [DELAY_W-1:0] cnt;
  block_t             din, mid;
  logic               take;

  assign out_valid_o = (st == ST_FULL);
  assign in_ready_o  = (st == ST_EMPTY) || (st == ST_FULL && out_ready_i);
  assign take        = in_valid_i && in_ready_o;
  assign busy_o      = (st == ST_BUSY);
  assign stall_o     = (st == ST_FULL) && !out_ready_i;

  aes_round u_island_a (.state_i(din), .round_key_i(rk_a_i), .final_i(1'b0), .state_o(mid));
  aes_round u_island_b (.state_i(mid), .round_key_i(rk_b_i), .final_i(LAST), .state_o(out_data_o));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= ST_EMPTY;
      cnt <= '0;
      din <= '0;
    end else if (take) begin
      din <= in_data_i;
      st  <= ST_BUSY;
      cnt <= (delay_i > DELAY_W'(1)) ? delay_i : DELAY_W'(1);
    end else begin
      unique case (st)
        ST_BUSY: begin
          cnt <= cnt - DELAY_W'(1);
          if (cnt == DELAY_W'(1)) st <= ST_FULL;
        end
        ST_FULL:  if (out_ready_i) st <= ST_EMPTY;
        default:  ;
      endcase
    end
  end

  // Channel rules: a valid result is held, unchanged, until it is taken.
  a_hold_out: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid_o && !out_ready_i |=> out_valid_o && $stable(out_data_o));
  // The producer keeps its word offered until this stage takes it.
  a_hold_in: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid_i && !in_ready_o |=> in_valid_i && $stable(in_data_i));
endmodule
