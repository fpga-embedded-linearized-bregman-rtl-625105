// lbi_main_ctrl: top-level control unit of the LBI core.
//
// On start it clears the iteration control (one cycle), pre-fills the
// mu_k = 1/k CORDIC pipeline with STAGES-1 values of k, and then runs L
// iterations. Each iteration is: one cycle that pulses new_iter (and pushes
// the next k into the CORDIC), the read phase of the iteration control
// until read_done, one hand-over cycle that pulses store_start, and the
// store phase of the writing unit until store_done. A final cycle pulses
// done. busy is high from the cycle after start up to and including the
// done cycle, so a run takes
//   C = 21 + sum over iterations of (3 * ceil(k/M) + ceil(log2 M) + 6)
// cycles with the default 20 CORDIC stages.
module lbi_main_ctrl #(
  parameter int unsigned STAGES = 20,
  parameter int unsigned NW     = 19
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [NW-1:0] n_len,
  input  logic [31:0]   l_iters,
  input  logic          read_done,
  input  logic          store_done,
  output logic          init,
  output logic          new_iter,
  output logic          store_start,
  output logic          cordic_adv,
  output logic [NW-1:0] cordic_k,
  output logic [31:0]   iter_cnt,
  output logic          busy,
  output logic          done
);

  typedef enum logic [2:0] {
    S_IDLE, S_INIT, S_PREFILL, S_NEWIT, S_READ, S_HAND, S_STORE, S_DONE
  } state_t;

  state_t      state;
  logic [31:0] pre_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      pre_cnt  <= '0;
      iter_cnt <= '0;
      cordic_k <= NW'(1);
    end else begin
      unique case (state)
        S_IDLE: if (start) state <= S_INIT;
        S_INIT: begin
          pre_cnt  <= '0;
          iter_cnt <= '0;
          cordic_k <= NW'(1);
          if (STAGES > 1)          state <= S_PREFILL;
          else if (l_iters == '0)  state <= S_DONE;
          else                     state <= S_NEWIT;
        end
        S_PREFILL: begin
          pre_cnt <= pre_cnt + 1;
          if (pre_cnt == 32'(STAGES - 2)) state <= (l_iters == '0) ? S_DONE : S_NEWIT;
        end
        S_NEWIT: begin
          iter_cnt <= iter_cnt + 1;
          state    <= S_READ;
        end
        S_READ:  if (read_done) state <= S_HAND;
        S_HAND:  state <= S_STORE;
        S_STORE: if (store_done) state <= (iter_cnt == l_iters) ? S_DONE : S_NEWIT;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
      if (cordic_adv) cordic_k <= (cordic_k == n_len) ? NW'(1) : cordic_k + 1'b1;
    end
  end

  always_comb begin
    init        = (state == S_INIT);
    new_iter    = (state == S_NEWIT);
    store_start = (state == S_HAND);
    cordic_adv  = (state == S_PREFILL) || (state == S_NEWIT);
    busy        = (state != S_IDLE);
    done        = (state == S_DONE);
  end

  a_start_when_idle: assert property (@(posedge clk) disable iff (rst) start |-> state == S_IDLE)
    else $error("lbi_main_ctrl: start while busy");

endmodule
