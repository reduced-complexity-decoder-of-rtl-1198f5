// ccft_ctrl: control unit of the folded two-step partial CCFT.
//
// One syndrome computation takes T1 + T2 cycles: step 1 runs the tier-1
// (63-point) sub-DFTs for T1 cycles, step 2 the tier-2 (65-point) sub-DFTs
// for T2 cycles. The unit is a three-state machine (IDLE, STEP1, STEP2) with
// one cycle counter; `cyc` is the cycle number within the current step and
// selects which columns / rows the folded sub-DFT modules work on.
//
// Interface: `start` is accepted when `ready` is high, i.e. in IDLE or in the
// last cycle of step 2, so vectors can follow each other every T1 + T2
// cycles. `done` is a one-cycle pulse in the cycle after the last step-2
// write, when all syndromes are in the output register: it comes T1 + T2
// cycles after the cycle in which `start` was accepted. A `start` while not
// ready is ignored. Reset is synchronous, active low.
//
// The T1 + T2 cycle schedule is the paper's; the state encoding, the
// start/ready/done handshake and the overlap of the next start with the last
// step-2 cycle are this design's choices.
module ccft_ctrl #(
  parameter int unsigned T1 = 13,   // cycles of step 1
  parameter int unsigned T2 = 9,    // cycles of step 2
  localparam int unsigned TMAX = (T1 > T2) ? T1 : T2,
  localparam int unsigned CW   = (TMAX > 1) ? $clog2(TMAX) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  output logic          step1,   // tier-1 results written at the end of this cycle
  output logic          step2,   // tier-2 results written at the end of this cycle
  output logic [CW-1:0] cyc,     // cycle within the current step
  output logic          done
);

  typedef enum logic [1:0] {IDLE, STEP1, STEP2} state_t;

  state_t        state;
  logic [CW-1:0] cnt;
  logic          last1, last2;

  assign last1 = (state == STEP1) && (cnt == CW'(T1 - 1));
  assign last2 = (state == STEP2) && (cnt == CW'(T2 - 1));
  assign ready = (state == IDLE) || last2;
  assign step1 = (state == STEP1);
  assign step2 = (state == STEP2);
  assign cyc   = cnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= last2;
      unique case (state)
        IDLE: begin
          cnt <= '0;
          if (start) state <= STEP1;
        end
        STEP1: begin
          if (last1) begin
            state <= STEP2;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        STEP2: begin
          if (last2) begin
            state <= start ? STEP1 : IDLE;
            cnt   <= '0;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: begin
          state <= IDLE;
          cnt   <= '0;
        end
      endcase
    end
  end

  a_cnt_step1: assert property (@(posedge clk) disable iff (!rst_n)
                                step1 |-> cnt < CW'(T1));
  a_cnt_step2: assert property (@(posedge clk) disable iff (!rst_n)
                                step2 |-> cnt < CW'(T2));
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n)
                                 done |=> !done || (T1 + T2 == 1));

endmodule
