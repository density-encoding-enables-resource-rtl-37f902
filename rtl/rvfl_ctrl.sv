// rvfl_ctrl: sequencer for one classification pass.
//
// A pass starts with a one-cycle start pulse while idle. The controller then
//   1. LOAD: the quantized feature levels are captured (v_load) and the
//      readout accumulators cleared (acc_clr), in the start cycle itself;
//   2. RUN: the hidden neurons are swept in G = N/LANES groups, one group
//      address (rd_addr) per cycle;
//   3. the memories answer one cycle later, so acc_en and acc_grp (the group
//      whose data is on the memory outputs) trail rd_addr by one cycle;
//   4. RESULT: once the last group is accumulated the outputs are captured
//      (res_load) and done pulses in the next cycle.
// start to done takes G + 3 cycles; busy is high from the cycle after start
// until done. start while busy is ignored (start_ignored pulses).
// The phases are the algorithm's; the schedule and handshake are this
// design's. Synchronous active-high reset.
module rvfl_ctrl #(
  parameter int unsigned N     = rvfl_pkg::N_DEF,
  parameter int unsigned LANES = rvfl_pkg::LANES_DEF,
  localparam int unsigned G    = N / LANES,
  localparam int unsigned AW   = rvfl_pkg::ubits(G - 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  output logic          busy,
  output logic          v_load,
  output logic          acc_clr,
  output logic [AW-1:0] rd_addr,
  output logic          acc_en,
  output logic [AW-1:0] acc_grp,
  output logic          res_load,
  output logic          done,
  output logic          start_ignored
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN, S_RESULT} state_t;

  state_t        state;
  logic [AW-1:0] grp;

  assign busy          = (state != S_IDLE);
  assign v_load        = (state == S_IDLE) && start;
  assign acc_clr       = v_load;
  assign rd_addr       = grp;
  assign res_load      = (state == S_RESULT);
  assign start_ignored = busy && start;

  always_ff @(posedge clk) begin
    if (rst) begin
      state   <= S_IDLE;
      grp     <= '0;
      acc_en  <= 1'b0;
      acc_grp <= '0;
      done    <= 1'b0;
    end else begin
      done    <= res_load;
      acc_en  <= (state == S_RUN);
      acc_grp <= grp;
      unique case (state)
        S_IDLE: begin
          grp <= '0;
          if (start) state <= S_RUN;
        end
        S_RUN: begin
          if (grp == AW'(G - 1)) state <= S_DRAIN;
          else                   grp   <= grp + 1'b1;
        end
        S_DRAIN:  state <= S_RESULT;
        S_RESULT: state <= S_IDLE;
        default:  state <= S_IDLE;
      endcase
    end
  end

  // The last group must be accumulated in the DRAIN cycle.
  a_drain_acc: assert property (@(posedge clk) disable iff (rst)
    (state == S_DRAIN) |-> acc_en);

endmodule
