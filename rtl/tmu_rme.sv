// tmu_rme -- Reconfigurable Masking Engine (RME) for fine-grained tensor manipulation.
//
// Byte-level manipulation of the beats read out of the tensor buffer, in one
// of two schemes chosen by the decoded class:
//
//  * assemble: the bytes selected by the byte masking register are packed
//    into a new continuous datastream (tmu_assembler). Used by Rearrange.
//  * evaluate: the byte destination register routes every byte lane to one of
//    N_CAL calculation units (or to none, value 3), which reduce their bytes
//    over a window (one tensor-buffer segment). In reduce mode the unit
//    results (one byte per unit that received data) are appended to the
//    assembled stream at the end of each window: maximum/minimum retrieval, or
//    averaging as used for down-scaling (Resize). In filter mode the window
//    is evaluated first; if the result of unit cond_unit is greater than the
//    threshold the window is read a second time (in_phase = 1) and its bytes
//    selected by the byte masking register are committed; otherwise it is
//    dropped (Bboxcal: keep the boxes whose confidence passes).
//
// The segment read masking counters, which decide which bus transfers of a
// load reach the tensor buffer, are part of the RME as in the paper's figure
// (ld_* ports).
//
// Follows the paper: the two schemes, byte masking and byte destination
// registers, three calculation units, FSM-controlled conditional commit.
// Own choices: the window = one segment, the reduce/filter modes, the
// two-pass filter, the DEST_NONE code.
//
// flush takes effect once pending results are in the assembler.
//
// Timing: in_valid/in_ready handshake; in_last marks the last beat of a
// window. In evaluate mode the cycle after a window's last beat is used to
// take the results (in_ready low); ev_done pulses in that cycle, with ev_pass
// the filter decision. out_* is a valid/ready stream of assembled beats.
module tmu_rme
  import tmu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,          // start of an instruction
  input  class_e     cls,
  input  inst_t      cfg,
  // load path: segment read masking counters
  input  logic       ld_step,
  output logic       ld_acquire,
  // beats from the tensor buffer
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_beat,
  input  logic       in_last,
  input  logic       in_phase,
  output logic       ev_done,
  output logic       ev_pass,
  // end of instruction
  input  logic       flush,
  output logic       idle,
  // assembled output
  output logic       out_valid,
  input  logic       out_ready,
  output beat_t      out_beat,
  output strb_t      out_strb
);
  logic evaluate;
  assign evaluate = (cls == CLS_EVALUATE);

  tmu_seg_mask_cnt u_segmask (
    .clk, .rst_n, .clear, .step(ld_step),
    .period(cfg.seg_period), .keep(cfg.seg_keep), .acquire(ld_acquire)
  );

  // ---------------- evaluate scheme ----------------
  logic               res_pending;            // window finished, results next cycle
  logic               eval_beat;
  logic signed [7:0]  res  [N_CAL];
  logic [N_CAL-1:0]   seen;
  strb_t              sel  [N_CAL];

  always_comb
    for (int u = 0; u < N_CAL; u++)
      for (int i = 0; i < BUS_BYTES; i++)
        sel[u][i] = (cfg.byte_dest[i] == 2'(u));

  for (genvar u = 0; u < N_CAL; u++) begin : g_cal
    tmu_cal_unit u_cal (
      .clk, .rst_n,
      .clear(clear || ev_done),
      .in_valid(eval_beat), .in_beat, .sel(sel[u]),
      .op(cal_op_e'(cfg.cal_op[u])), .avg_shift(cfg.avg_shift),
      .result(res[u]), .seen(seen[u])
    );
  end

  // ---------------- assemble register ----------------
  logic  asm_in_valid, asm_in_ready;
  beat_t asm_in_beat;
  strb_t asm_in_mask;
  logic  asm_empty;
  logic  reduce_push;

  assign reduce_push = res_pending && (cfg.ev_mode == EV_REDUCE);

  always_comb begin
    asm_in_beat = in_beat;
    asm_in_mask = cfg.byte_mask;
    if (reduce_push) begin
      asm_in_beat = '0;
      asm_in_mask = '0;
      for (int u = 0; u < N_CAL; u++) begin
        asm_in_beat[8*u +: 8] = res[u];
        asm_in_mask[u]        = seen[u];
      end
    end
  end

  // beats that go to the assembler: assemble scheme, or phase 1 of a filter
  logic pass_to_asm;
  assign pass_to_asm = !evaluate || in_phase;

  assign asm_in_valid = reduce_push || (in_valid && pass_to_asm && !res_pending);
  assign eval_beat    = in_valid && in_ready && evaluate && !in_phase;

  always_comb begin
    if (res_pending)      in_ready = 1'b0;
    else if (pass_to_asm) in_ready = asm_in_ready;
    else                  in_ready = 1'b1;
  end

  // the cycle after the last evaluated beat the results are complete
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              res_pending <= 1'b0;
    else if (clear)                          res_pending <= 1'b0;
    else if (eval_beat && in_last)           res_pending <= 1'b1;
    else if (res_pending && (!reduce_push || asm_in_ready)) res_pending <= 1'b0;
  end

  assign ev_done = res_pending && (!reduce_push || asm_in_ready);
  logic [1:0] cu;
  assign cu      = (cfg.cond_unit < 2'(N_CAL)) ? cfg.cond_unit : 2'd0;
  assign ev_pass = (cfg.cond_unit < 2'(N_CAL)) && seen[cu] && (res[cu] > cfg.threshold);

  tmu_assembler u_asm (
    .clk, .rst_n, .clear,
    .in_valid(asm_in_valid), .in_ready(asm_in_ready),
    .in_beat(asm_in_beat), .in_mask(asm_in_mask),
    .grp_in(cfg.grp_in), .grp_out(cfg.grp_out),
    .flush(flush && !res_pending), .empty(asm_empty),
    .out_valid, .out_ready, .out_beat, .out_strb
  );

  assign idle = asm_empty && !res_pending;
endmodule
