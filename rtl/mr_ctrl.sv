// mr_ctrl: sequencer of the model-recovery pipeline.
//
// A run processes samples 0 .. nsamp-1. Because the GRU flow evaluates each
// sample time independently there is no loop-carried dependency, and the
// controller can start a new sample every II cycles, II = 1, 2 or 3 (0 is taken
// as 1). Sample i is issued with time t_i = i * dt, kept as a running sum that
// saturates at the top of the Q4.12 range. The controller counts results that
// leave the pipeline (retire) and ends the run after the last one, so done means
// every result, and the loss, is complete.
//
// Interface: start (one-cycle pulse, ignored while busy) begins a run; en is the
// pipeline advance signal, low while the output stream is stalled; issue_valid,
// issue_idx and issue_t describe the sample entering the pipeline this cycle
// (it enters only when en is high); cycles counts the clock cycles of the run
// from start to done.
// Timing: busy rises the cycle after start; the first sample issues then; done
// rises (and busy falls) the cycle after the last retire, and stays high until
// the next start.
// Pipelining with an initiation interval of 1, and the option of 2 or 3, follow
// the source; making II a run-time setting and t = i * dt are this design's choices.
module mr_ctrl
  import mr_pkg::*;
#(
  parameter int unsigned DEPTH = N_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [CW-1:0] nsamp,
  input  fx_t           dt,
  input  logic [1:0]    ii,
  input  logic          en,
  input  logic          retire,
  output logic          issue_valid,
  output logic [AW-1:0] issue_idx,
  output fx_t           issue_t,
  output logic          issue_last,
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e        state;
  logic [CW-1:0] n_run;     // samples in this run
  logic [CW-1:0] issued;
  logic [CW-1:0] retired;
  logic [1:0]    ii_cnt;
  logic [1:0]    ii_last;
  logic signed [31:0] t_acc;

  assign busy      = (state == S_RUN);
  assign done      = (state == S_DONE);
  assign ii_last   = (ii == 2'd0) ? 2'd0 : ii - 2'd1;
  assign issue_valid = busy && (issued < n_run) && (ii_cnt == 2'd0);
  assign issue_idx = AW'(issued);
  assign issue_last = issue_valid && (issued + 1'b1 == n_run);
  assign issue_t   = fx_sat(t_acc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      n_run   <= '0;
      issued  <= '0;
      retired <= '0;
      ii_cnt  <= '0;
      t_acc   <= '0;
      cycles  <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: begin
          if (start) begin
            n_run   <= (nsamp > CW'(DEPTH)) ? CW'(DEPTH) : nsamp;
            issued  <= '0;
            retired <= '0;
            ii_cnt  <= '0;
            t_acc   <= '0;
            cycles  <= '0;
            state   <= (nsamp == '0) ? S_DONE : S_RUN;
          end
        end
        S_RUN: begin
          cycles <= cycles + 1;
          if (en) begin
            ii_cnt <= (ii_cnt >= ii_last) ? 2'd0 : ii_cnt + 2'd1;
            if (issue_valid) begin
              issued <= issued + 1'b1;
              // Saturating t = i * dt (kept wide, clipped when read).
              if (t_acc < 32'sd65536 && t_acc > -32'sd65536) t_acc <= t_acc + 32'(dt);
            end
          end
          if (retire) begin
            retired <= retired + 1'b1;
            if (retired + 1'b1 == n_run) state <= S_DONE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end


  // A run never retires more results than it issued.
  a_retire_le_issue: assert property (@(posedge clk) disable iff (!rst_n)
    retire |-> (retired < issued));


endmodule
