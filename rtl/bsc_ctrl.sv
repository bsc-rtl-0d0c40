// bsc_ctrl -- sequencer of one BSC operation.
//
// One operation runs through four phases (bsc_pkg::ctrl_state_t):
//   IDLE  ready is high; a cycle with `start` high is the load cycle: load_o
//         tells the datapath to capture its operands and clear the adders.
//   ACC   D intra-block cycles; acc_en is high and cyc counts 0..D-1. No
//         result bit can leave yet because the sign is unknown until all D
//         bits are added: these are the pipeline stalls (stall is high).
//   REV   one cycle in which OUR sums the blocks' counts (rev_o).
//   OUT   BITLEN cycles, one result bit each (out_o); done_o marks the last.
// Latency from the load cycle to the last result bit, both counted, is
// D + BITLEN + 2 cycles, e.g. 82 for BITLEN = 64 and K = 4 (D = 16), and the
// stall count is D. These are the cycle and stall figures the design reports
// for k = 1..64. The revision cycle follows the design's example; the load
// cycle, which the reported counts need, and the one-operation-at-a-time
// schedule (no overlap with the next operation) are this design's choices.
// `start` outside IDLE is ignored.
module bsc_ctrl
  import bsc_pkg::*;
#(
  parameter int unsigned BITLEN = 64,
  parameter int unsigned K      = 4,
  localparam int unsigned D     = BITLEN / K,
  localparam int unsigned CW    = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned NW    = $clog2(BITLEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  output logic          load_o,
  output logic          acc_en,
  output logic [CW-1:0] cyc,
  output logic          rev_o,
  output logic          out_o,
  output logic          done_o,
  output logic          stall,
  output ctrl_state_t   state_o
);
  ctrl_state_t   state;
  logic [NW-1:0] cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      cnt   <= '0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state <= ST_ACC;
          cnt   <= '0;
        end
        ST_ACC: begin
          if (cnt == NW'(D - 1)) begin
            state <= ST_REV;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        ST_REV: begin
          state <= ST_OUT;
          cnt   <= '0;
        end
        ST_OUT: begin
          if (cnt == NW'(BITLEN - 1)) begin
            state <= ST_IDLE;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  always_comb begin
    ready   = state == ST_IDLE;
    load_o  = ready && start;
    acc_en  = state == ST_ACC;
    stall   = acc_en;
    cyc     = CW'(cnt);
    rev_o   = state == ST_REV;
    out_o   = state == ST_OUT;
    done_o  = out_o && cnt == NW'(BITLEN - 1);
    state_o = state;
  end

  a_done_in_out: assert property (@(posedge clk) disable iff (!rst_n) done_o |-> out_o);
  a_acc_count: assert property (@(posedge clk) disable iff (!rst_n) acc_en |-> cnt < NW'(D));

endmodule
