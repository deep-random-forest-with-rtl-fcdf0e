// drf_ctrl: sequencer for one classification through the cascade.
//
// The levels are searched one after the other, because level k+1 searches on
// the votes of level k. For each level the sequencer precharges the match
// lines (1 cycle), keeps the search lines applied while the match lines
// evaluate (EVAL_CYCLES cycles; the paper senses at 10 ns, which is 10 cycles
// at the 1 GHz clock assumed here), samples the sense amplifiers (1 cycle)
// and loads the vote counters (1 cycle). After the last level it raises done
// for one cycle.
//
// Interface and timing: start is accepted in the idle state (busy = 0). The
// cycle-by-cycle phase outputs have one bit per level. A classification takes
// LAYERS * (EVAL_CYCLES + 3) cycles from the accepting clock edge to the edge
// that raises done; done is high for one cycle, and busy stays high until
// then. The state machine, the one-query-at-a-time flow and the clock rate
// are this design's choices.
module drf_ctrl #(
  parameter int unsigned LAYERS      = 2,
  parameter int unsigned EVAL_CYCLES = 10,
  localparam int unsigned LAYER_W    = (LAYERS > 1) ? $clog2(LAYERS) : 1,
  localparam int unsigned EVAL_W     = drf_pkg::width_of(EVAL_CYCLES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [LAYERS-1:0] precharge,
  output logic [LAYERS-1:0] evaluate,
  output logic [LAYERS-1:0] sample,
  output logic [LAYERS-1:0] vote_load
);
  typedef enum logic [2:0] {
    S_IDLE, S_PRE, S_EVAL, S_SAMPLE, S_VOTE, S_DONE
  } state_t;

  state_t             state;
  logic [LAYER_W-1:0] layer;
  logic [EVAL_W-1:0]  eval_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      layer    <= '0;
      eval_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_PRE;
          layer <= '0;
        end
        S_PRE: begin
          state    <= S_EVAL;
          eval_cnt <= EVAL_W'(1);
        end
        S_EVAL: begin
          if (eval_cnt == EVAL_W'(EVAL_CYCLES)) state <= S_SAMPLE;
          else eval_cnt <= eval_cnt + 1'b1;
        end
        S_SAMPLE: state <= S_VOTE;
        S_VOTE: begin
          if (layer == LAYER_W'(LAYERS - 1)) state <= S_DONE;
          else begin
            layer <= layer + 1'b1;
            state <= S_PRE;
          end
        end
        S_DONE: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    precharge = '0;
    evaluate  = '0;
    sample    = '0;
    vote_load = '0;
    unique case (state)
      S_PRE:    precharge[layer] = 1'b1;
      S_EVAL:   evaluate[layer]  = 1'b1;
      S_SAMPLE: sample[layer]    = 1'b1;
      S_VOTE:   vote_load[layer] = 1'b1;
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  if (EVAL_CYCLES < 1) begin : g_param_check
    $error("drf_ctrl: EVAL_CYCLES must be at least 1");
  end
endmodule
