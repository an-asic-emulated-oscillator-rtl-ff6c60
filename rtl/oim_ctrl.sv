// oim_ctrl: run controller of the PE array.
//
// A start pulse (ignored while shifting or already running) launches a run
// of total_iters Forward Euler iterations, one per clock cycle: run is high
// for exactly total_iters cycles, starting the cycle after start. During
// the first settle_iters iterations the PEs evolve under coupling only;
// from iteration settle_iters on (counting from 0) sync_enable is high and
// the synchronization term is applied, as the paper's settling period and
// sync_enable signal prescribe. iter_o is the index of the iteration being
// computed. When the last iteration has been computed, done rises and stays
// high until the next start or shift. Raising shift_en aborts a run. A
// start with total_iters = 0 sets done at once. The paper gives the
// function (settling period, 1,000 iterations in 5 us at 200 MHz, i.e. one
// iteration per cycle); the FSM, the abort rule and the counter widths are
// this design's choice.
module oim_ctrl
  import oim_pkg::*;
#(
  parameter int unsigned IW = ITER_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          shift_en,
  input  logic [IW-1:0] total_iters,
  input  logic [IW-1:0] settle_iters,
  output logic          run,
  output logic          sync_enable,
  output logic          busy,
  output logic          done,
  output logic [IW-1:0] iter_o
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e        state;
  logic [IW-1:0] iter;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      iter  <= '0;
    end else if (shift_en) begin
      state <= S_IDLE;
      iter  <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          iter  <= '0;
          state <= (total_iters == '0) ? S_DONE : S_RUN;
        end
        S_RUN: begin
          if (iter == total_iters - 1'b1) state <= S_DONE;
          else                            iter  <= iter + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign run         = (state == S_RUN);
  assign busy        = run;
  assign done        = (state == S_DONE);
  assign sync_enable = run && (iter >= settle_iters);
  assign iter_o      = iter;

  // The run must never outlast the programmed iteration count.
  a_iter_bound: assert property (@(posedge clk) disable iff (!rst_n)
    run |-> iter < total_iters);

  // Protocol: a start is only meaningful while the chain is not shifting.
  a_no_start_while_shift: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !shift_en);

endmodule
