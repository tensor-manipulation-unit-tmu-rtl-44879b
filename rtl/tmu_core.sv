// tmu_core -- one Tensor Manipulation Unit (TMU).
//
// The TMU executes TM instructions held in its INST BUF. Each instruction
// moves one tensor of wi x hi x cb beats (16 bytes each) from memory, or from
// the TPU forwarding stream, to memory, or to the forwarding output, in
// segments of at most seg_len beats. For every segment the FSM runs:
//
//   S_LD_MEM    read the segment's beats (in order, contiguous from src0_base,
//               plus the same number from src1_base for element-wise
//               operators) into the tensor buffer; for fine-grained operators
//               the RME's segment read masking counters decide which beats
//               are kept.
//   stream      the MUX sends the buffered beats either to the RME
//               (fine-grained: assemble or evaluate), or through the
//               element-wise unit, or directly (coarse-grained) to the address
//               generator, which computes each output beat's address from its
//               position (x_i, y_i, c_i) with the instruction's matrices A and
//               B. Fine-grained output beats are numbered in order and that
//               number is their x_i.
//   S_ST_MEM    the commit buffer is written out.
//   S_UPDATE_INDEX  next segment, or next instruction.
//
// Follows the paper: the blocks and their order (INST BUF, fetch & decode,
// configurable registers, FSM, tensor buffer, MUX, RME, element-wise
// processing, address generator, commit buffer), the 16-byte bus, memory to
// memory operation, output forwarding in and out. Own choices: the memory
// interface (a simplified AXI-like pair of channels: read requests with
// in-order responses, posted writes), the segment handling, the input
// coordinate order (c_i fastest, then x_i, then y_i) and the credit rule that
// keeps the commit buffer from overflowing.
//
// Interface timing: every *_valid/*_ready pair is a handshake that transfers
// on a clock edge where both are high, except rd_rsp_valid, which the core
// always accepts (it only has reads outstanding for which it holds room).
// start (one cycle) runs the program from instruction 0; done rises when a
// halt instruction is decoded and stays high until the next start.
module tmu_core
  import tmu_pkg::*;
#(
  parameter int INST_DEPTH   = 16,
  parameter int BUF_DEPTH    = 64,
  parameter int COMMIT_DEPTH = 16,
  localparam int IAW = $clog2(INST_DEPTH),
  localparam int BAW = $clog2(BUF_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  // instruction load and control
  input  logic           inst_wr_en,
  input  logic [IAW-1:0] inst_wr_addr,
  input  inst_t          inst_wr_data,
  input  logic           start,
  output logic           done,
  output fsm_state_e     state,
  // memory read channel (towards DMA)
  output logic           rd_req_valid,
  input  logic           rd_req_ready,
  output addr_t          rd_req_addr,
  input  logic           rd_rsp_valid,
  input  beat_t          rd_rsp_data,
  // memory write channel
  output logic           wr_valid,
  input  logic           wr_ready,
  output addr_t          wr_addr,
  output beat_t          wr_data,
  output strb_t          wr_strb,
  // output forwarding from the TPU into the tensor buffer
  input  logic           fwd_in_valid,
  output logic           fwd_in_ready,
  input  beat_t          fwd_in_data,
  // manipulated datastream forwarded to downstream engines
  output logic           fwd_out_valid,
  input  logic           fwd_out_ready,
  output addr_t          fwd_out_addr,
  output beat_t          fwd_out_data,
  output strb_t          fwd_out_strb
);
  localparam int HALF = BUF_DEPTH / 2;
  localparam int CAW  = $clog2(COMMIT_DEPTH);

  // ------------------------------------------------------------------
  // Fetch, decode, configuration registers, FSM
  // ------------------------------------------------------------------
  logic           ib_rd_en;
  logic [IAW-1:0] ib_rd_addr, pc;
  inst_t          ib_rd_data, dec_inst, cfg;
  logic           dec_valid, fetch_req, cfg_load, seg_next, early_store;
  class_e         dec_class, cls;
  logic [31:0]    total_beats;
  logic [7:0]     seg_beats;

  tmu_inst_buf #(.DEPTH(INST_DEPTH)) u_ibuf (
    .clk, .wr_en(inst_wr_en), .wr_addr(inst_wr_addr), .wr_data(inst_wr_data),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  tmu_fetch_decode #(.DEPTH(INST_DEPTH)) u_fd (
    .clk, .rst_n, .start, .fetch_req, .ib_rd_en, .ib_rd_addr, .ib_rd_data,
    .dec_valid, .dec_inst, .dec_class, .pc
  );

  tmu_cfg_regs #(.BUF_DEPTH(BUF_DEPTH)) u_cfg (
    .clk, .rst_n, .load(cfg_load), .inst_in(dec_inst), .cls_in(dec_class),
    .cfg, .cls, .total_beats, .seg_beats
  );

  logic ld_done, stream_done, drain_done, commit_hi, store_done, more_segments;

  tmu_fsm u_fsm (
    .clk, .rst_n, .start, .dec_valid, .dec_class, .cls,
    .ld_done, .stream_done, .drain_done, .commit_hi, .store_done, .more_segments,
    .state, .fetch_req, .cfg_load, .seg_next, .early_store, .done
  );

  logic fine, elem, two_op;
  assign fine   = (cls == CLS_ASSEMBLE) || (cls == CLS_EVALUATE);
  assign elem   = (cls == CLS_ELEM);
  assign two_op = elem;

  logic streaming;
  assign streaming = (state == S_ASSEMBLE) || (state == S_EVALUATE) ||
                     (state == S_ELEM) || (state == S_ADDR_GEN);

  // ------------------------------------------------------------------
  // Segment bookkeeping (Branch stage)
  // ------------------------------------------------------------------
  logic [31:0] n0;          // first input beat of the current segment
  logic [31:0] remain;
  logic [7:0]  seg_n;       // beats of each operand in this segment
  logic [8:0]  nreq;        // beats to load in this segment
  logic        last_seg;

  assign remain        = total_beats - n0;
  assign seg_n         = (remain < 32'(seg_beats)) ? remain[7:0] : seg_beats;
  assign nreq          = two_op ? {seg_n, 1'b0} : {1'b0, seg_n};
  assign last_seg      = (remain <= 32'(seg_beats));
  assign more_segments = !last_seg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        n0 <= '0;
    else if (cfg_load) n0 <= '0;
    else if (seg_next) n0 <= n0 + 32'(seg_n);
  end

  // ------------------------------------------------------------------
  // Tensor Load
  // ------------------------------------------------------------------
  logic [8:0]     rq, rs;         // requests issued, beats received
  logic [BAW:0]   fill;           // beats written to the tensor buffer
  logic           seg_start;
  logic           beat_in, ld_acquire, buf_we;
  logic [BAW-1:0] buf_waddr;
  beat_t          beat_in_data;

  assign seg_start = (state == S_DECODE) || (state == S_UPDATE_INDEX);

  assign rd_req_valid = (state == S_LD_MEM) && !cfg.src_fwd && (rq < nreq);
  always_comb begin
    if (two_op && rq >= 9'(seg_n))
      rd_req_addr = cfg.src1_base + ((n0 + 32'(rq) - 32'(seg_n)) << $clog2(BUS_BYTES));
    else
      rd_req_addr = cfg.src0_base + ((n0 + 32'(rq)) << $clog2(BUS_BYTES));
  end

  assign fwd_in_ready = (state == S_LD_MEM) && cfg.src_fwd && (rs < nreq);
  assign beat_in      = cfg.src_fwd ? (fwd_in_valid && fwd_in_ready) : rd_rsp_valid;
  assign beat_in_data = cfg.src_fwd ? fwd_in_data : rd_rsp_data;
  assign buf_we       = beat_in && (!fine || ld_acquire);

  always_comb begin
    if (fine)                           buf_waddr = fill[BAW-1:0];
    else if (two_op && rs >= 9'(seg_n)) buf_waddr = BAW'(HALF) + BAW'(rs - 9'(seg_n));
    else                                buf_waddr = BAW'(rs);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rq <= '0; rs <= '0; fill <= '0;
    end else if (seg_start) begin
      rq <= '0; rs <= '0; fill <= '0;
    end else begin
      if (rd_req_valid && rd_req_ready) rq <= rq + 1'b1;
      if (beat_in)                      rs <= rs + 1'b1;
      if (beat_in && !fine)             fill <= (BAW+1)'(seg_n);
      else if (buf_we)                  fill <= fill + 1'b1;
    end
  end

  assign ld_done = (state == S_LD_MEM) && (rs == nreq);

  // ------------------------------------------------------------------
  // Tensor buffer and stream sequencer (feeds the MUX)
  // ------------------------------------------------------------------
  logic [BAW:0]   rp;
  logic           hold_v, hold_last, phase, wait_ev, sdone;
  logic           buf_re, consume, sink_ready;
  beat_t          buf_q0, buf_q1;

  tmu_tensor_buf #(.DEPTH(BUF_DEPTH)) u_tbuf (
    .clk, .we(buf_we), .waddr(buf_waddr), .wdata(beat_in_data),
    .re0(buf_re), .raddr0(rp[BAW-1:0]), .rdata0(buf_q0),
    .re1(buf_re), .raddr1(BAW'(HALF) + rp[BAW-1:0]), .rdata1(buf_q1)
  );

  logic stream_state;   // states in which the buffered beats move
  assign stream_state = (state == S_ASSEMBLE) || (state == S_EVALUATE) || (state == S_ELEM) ||
                        (state == S_ADDR_GEN && cls == CLS_COARSE);

  assign consume = hold_v && sink_ready && stream_state;
  assign buf_re  = stream_state && !sdone && !wait_ev && (rp < fill) && (!hold_v || consume);

  logic rme_ev_done, rme_ev_pass;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp <= '0; hold_v <= 1'b0; hold_last <= 1'b0; phase <= 1'b0; wait_ev <= 1'b0; sdone <= 1'b0;
    end else if (state == S_LD_MEM) begin
      rp <= '0; hold_v <= 1'b0; hold_last <= 1'b0; phase <= 1'b0; wait_ev <= 1'b0;
      sdone <= 1'b0;
    end else begin
      if (stream_state && !sdone && !wait_ev && !hold_v && rp >= fill) sdone <= 1'b1;  // empty segment
      if (buf_re) begin
        rp        <= rp + 1'b1;
        hold_v    <= 1'b1;
        hold_last <= (rp == fill - 1'b1);
      end else if (consume) hold_v <= 1'b0;
      if (consume && hold_last) begin
        if (cls == CLS_EVALUATE && !phase) wait_ev <= 1'b1;
        else                               sdone   <= 1'b1;
      end
      if (wait_ev && rme_ev_done) begin
        wait_ev <= 1'b0;
        if (cfg.ev_mode == EV_FILTER && rme_ev_pass) begin
          phase <= 1'b1;
          rp    <= '0;
        end else sdone <= 1'b1;
      end
    end
  end

  // input coordinates of the beat being consumed (coarse and element-wise)
  logic [IDX_W-1:0] xc, yc, cc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xc <= '0; yc <= '0; cc <= '0;
    end else if (cfg_load) begin
      xc <= '0; yc <= '0; cc <= '0;
    end else if (consume && !fine) begin
      if (cc + 1'b1 < cfg.cb) cc <= cc + 1'b1;
      else begin
        cc <= '0;
        if (xc + 1'b1 < cfg.wi) xc <= xc + 1'b1;
        else begin
          xc <= '0;
          yc <= yc + 1'b1;
        end
      end
    end
  end

  // ------------------------------------------------------------------
  // RME and element-wise unit
  // ------------------------------------------------------------------
  logic  rme_in_ready, rme_out_valid, rme_out_ready, rme_idle, rme_flush;
  beat_t rme_out_beat, elem_y;
  strb_t rme_out_strb;
  logic  ld_step;

  assign ld_step   = beat_in && fine;
  assign rme_flush = (state == S_ADDR_GEN) && fine && last_seg && sdone;

  tmu_rme u_rme (
    .clk, .rst_n, .clear(cfg_load), .cls, .cfg,
    .ld_step, .ld_acquire,
    .in_valid(hold_v && fine && stream_state), .in_ready(rme_in_ready),
    .in_beat(buf_q0), .in_last(hold_last), .in_phase(phase),
    .ev_done(rme_ev_done), .ev_pass(rme_ev_pass),
    .flush(rme_flush), .idle(rme_idle),
    .out_valid(rme_out_valid), .out_ready(rme_out_ready),
    .out_beat(rme_out_beat), .out_strb(rme_out_strb)
  );

  tmu_elem_unit u_elem (
    .a(buf_q0), .b(buf_q1), .eop(cfg.eop), .mul_shift(cfg.mul_shift), .y(elem_y)
  );

  // ------------------------------------------------------------------
  // MUX -> address generator -> commit buffer
  // ------------------------------------------------------------------
  logic [1:0]     ag_inflight;
  logic           ag_in_valid, ag_out_valid, credit_ok;
  logic [IDX_W-1:0] ag_xi, ag_yi, ag_ci;
  beat_t          ag_beat, cb_data;
  strb_t          ag_strb, cb_strb;
  addr_t          ag_addr, cb_addr;
  logic [CAW:0]   cb_count;
  logic           cb_empty, cb_full, cb_pop;
  logic [IDX_W-1:0] out_idx;   // output beat number (fine-grained)
  beat_t          cb_data_in;
  strb_t          cb_strb_in;

  // a beat may enter the address pipeline only if the commit buffer will
  // have room for it and for all beats already in the pipeline
  assign credit_ok = (32'(cb_count) + 32'(ag_inflight) + 32'(ag_out_valid) + 1) <= COMMIT_DEPTH;

  assign sink_ready    = fine ? rme_in_ready : credit_ok;
  assign rme_out_ready = fine && credit_ok && (streaming || state == S_ADDR_GEN);

  always_comb begin
    if (fine) begin                        // MUX: RME path
      ag_in_valid = rme_out_valid && rme_out_ready;
      ag_beat     = rme_out_beat;
      ag_strb     = rme_out_strb;
      ag_xi       = out_idx;
      ag_yi       = '0;
      ag_ci       = '0;
    end else begin                         // MUX: coarse / element-wise path
      ag_in_valid = consume;
      ag_beat     = elem ? elem_y : buf_q0;
      ag_strb     = '1;
      ag_xi       = xc;
      ag_yi       = yc;
      ag_ci       = cc;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       out_idx <= '0;
    else if (cfg_load)                out_idx <= '0;
    else if (fine && ag_in_valid)     out_idx <= out_idx + 1'b1;
  end

  tmu_addr_gen u_ag (
    .clk, .rst_n, .in_valid(ag_in_valid), .xi(ag_xi), .yi(ag_yi), .ci(ag_ci),
    .in_tag({ag_strb, ag_beat}),
    .a(cfg.a), .a_shr(cfg.a_shr), .b(cfg.b), .c_stride(cfg.c_stride), .addr_base(cfg.dst_base),
    .out_valid(ag_out_valid), .out_addr(ag_addr), .out_tag({cb_strb_in, cb_data_in}),
    .inflight(ag_inflight)
  );

  tmu_commit_buf #(.DEPTH(COMMIT_DEPTH)) u_cb (
    .clk, .rst_n, .push(ag_out_valid), .push_addr(ag_addr), .push_data(cb_data_in),
    .push_strb(cb_strb_in), .pop(cb_pop), .pop_addr(cb_addr), .pop_data(cb_data),
    .pop_strb(cb_strb), .empty(cb_empty), .full(cb_full), .count(cb_count)
  );

  logic pipe_empty;
  assign pipe_empty = (ag_inflight == 0) && !ag_out_valid;

  assign stream_done = sdone;
  assign drain_done  = pipe_empty && !hold_v &&
                       (!fine || (last_seg ? rme_idle : !rme_out_valid));
  assign commit_hi   = !credit_ok && !cb_empty;

  // ------------------------------------------------------------------
  // Tensor Store
  // ------------------------------------------------------------------
  logic st_active;
  assign st_active     = (state == S_ST_MEM) && !cb_empty;
  assign wr_valid      = st_active && !cfg.dst_fwd;
  assign fwd_out_valid = st_active && cfg.dst_fwd;
  assign wr_addr       = cb_addr;
  assign wr_data       = cb_data;
  assign wr_strb       = cb_strb;
  assign fwd_out_addr  = cb_addr;
  assign fwd_out_data  = cb_data;
  assign fwd_out_strb  = cb_strb;
  assign cb_pop        = (wr_valid && wr_ready) || (fwd_out_valid && fwd_out_ready);
  assign store_done    = cb_empty && pipe_empty;

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   rd_rsp_valid |-> (state == S_LD_MEM && !cfg.src_fwd && rs < rq));
endmodule
