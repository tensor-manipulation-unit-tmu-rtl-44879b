// tmu_fsm -- the TMU's centralized finite-state machine (execution model).
//
// One state per stage of the execution model: Fetch, Decode, Tensor Load
// (S_LD_MEM), fine-grained TM (S_ASSEMBLE / S_EVALUATE) or element-wise
// processing (S_ELEM), coarse-grained TM (S_ADDR_GEN), Tensor Store (S_ST_MEM)
// and Branch (S_UPDATE_INDEX). After Decode the class of the instruction
// selects the path: fine-grained and element-wise instructions stream their
// segment through the RME or the element-wise unit and then pass through
// S_ADDR_GEN, where the address pipeline and the assemble register drain;
// coarse-grained instructions go straight from S_LD_MEM to S_ADDR_GEN. Tensor
// Store writes the commit buffer out; Branch moves on to the next segment
// (back to S_LD_MEM) or to the next instruction (S_FETCH). A halt instruction
// returns to S_IDLE and raises done.
//
// The stage order and the branching follow the paper's execution-model
// figure. One transition is this design's own: when the commit buffer is
// about to overflow while a segment is still streaming (an operator whose
// output is larger than its input), the FSM enters S_ST_MEM early and goes back
// to the streaming state afterwards (ret_state).
//
// Timing: all inputs are sampled on the clock edge; fetch_req is high for the
// one cycle spent in S_FETCH, cfg_load for the Decode cycle, seg_next in
// S_UPDATE_INDEX.
module tmu_fsm
  import tmu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       dec_valid,
  input  class_e     dec_class,
  input  class_e     cls,            // class of the running instruction
  input  logic       ld_done,        // all beats of the segment loaded
  input  logic       stream_done,    // all beats of the segment processed
  input  logic       drain_done,     // address pipeline (and RME) empty
  input  logic       commit_hi,      // commit buffer has no room for another beat
  input  logic       store_done,     // commit buffer and pipeline empty
  input  logic       more_segments,
  output fsm_state_e state,
  output logic       fetch_req,
  output logic       cfg_load,
  output logic       seg_next,
  output logic       early_store,    // taking the early S_ST_MEM transition
  output logic       done
);
  fsm_state_e nxt, ret_state;
  logic       seg_fin;

  function automatic fsm_state_e class_state(class_e c);
    case (c)
      CLS_ASSEMBLE: return S_ASSEMBLE;
      CLS_EVALUATE: return S_EVALUATE;
      CLS_ELEM:     return S_ELEM;
      default:      return S_ADDR_GEN;
    endcase
  endfunction

  logic streaming;
  assign streaming = (state == S_ASSEMBLE) || (state == S_EVALUATE) ||
                     (state == S_ELEM) || (state == S_ADDR_GEN);

  always_comb begin
    nxt         = state;
    early_store = 1'b0;
    case (state)
      S_IDLE:    if (start) nxt = S_FETCH;
      S_FETCH:   nxt = S_DECODE;
      S_DECODE:  if (dec_valid) nxt = (dec_class == CLS_HALT) ? S_IDLE : S_LD_MEM;
      S_LD_MEM:  if (ld_done) nxt = class_state(cls);
      S_ASSEMBLE, S_EVALUATE, S_ELEM, S_ADDR_GEN: begin
        if (commit_hi) begin
          nxt = S_ST_MEM; early_store = 1'b1;
        end else if (state == S_ADDR_GEN) begin
          if (stream_done && drain_done) nxt = S_ST_MEM;
        end else if (stream_done) nxt = S_ADDR_GEN;
      end
      S_ST_MEM:  if (store_done) nxt = seg_fin ? S_UPDATE_INDEX : ret_state;
      S_UPDATE_INDEX: nxt = more_segments ? S_LD_MEM : S_FETCH;
      default:   nxt = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ret_state <= S_IDLE;
      seg_fin   <= 1'b0;
      done      <= 1'b0;
    end else begin
      state <= nxt;
      if (streaming && early_store) ret_state <= state;
      if (state == S_ADDR_GEN && nxt == S_ST_MEM && !early_store) seg_fin <= 1'b1;
      else if (state == S_UPDATE_INDEX)                          seg_fin <= 1'b0;
      if (start)                                              done <= 1'b0;
      else if (state == S_DECODE && dec_valid && dec_class == CLS_HALT) done <= 1'b1;
    end
  end

  assign fetch_req = (state == S_FETCH);
  assign cfg_load  = (state == S_DECODE) && dec_valid && (dec_class != CLS_HALT);
  assign seg_next  = (state == S_UPDATE_INDEX);

  a_known_state: assert property (@(posedge clk) disable iff (!rst_n) state inside {
      S_IDLE, S_FETCH, S_DECODE, S_LD_MEM, S_ASSEMBLE, S_EVALUATE, S_ELEM,
      S_ADDR_GEN, S_ST_MEM, S_UPDATE_INDEX});
endmodule
