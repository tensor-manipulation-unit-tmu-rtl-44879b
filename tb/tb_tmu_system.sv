// tb_tmu_system -- end-to-end test of the two-TMU subsystem at its default sizes.
//
// A DRAM model sits on the DMA port and a TPU stand-in drives and sinks the
// forwarding streams. Both cores run a program at the same time, so their
// loads and stores compete for the port:
//   core 0: Transpose (3 segments), Rearrange RGB->16 channels (assemble,
//           output larger than the commit buffer), Bboxcal (evaluate/filter),
//           a copy from the TPU forwarding input to the forwarding output, halt
//   core 1: Add (element-wise, two operands), a max/min/average reduction with
//           the segment read masking counters dropping every other beat
//           (evaluate/reduce), Rot90, Upsample x2 (4 instructions), halt
// Every output byte is compared with a reference computed from the operator's
// definition. The testbench also counts how often each mechanism occurred
// (early store on a full commit buffer, port conflicts, DRAM back-pressure,
// dropped beats, accepted and rejected boxes, segment branches, forwarding in
// and out, load of one core overlapping work of the other, each dataflow
// class) and counts a failure for any that never occurred.
module tb_tmu_system;
  import tmu_pkg::*;
  import tb_tmu_pkg::*;

  localparam int N = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [N-1:0] inst_wr_en, start, done;
  logic [3:0]   inst_wr_addr;
  inst_t        inst_wr_data;
  fsm_state_e   state [N];
  logic         m_rd_req_valid, m_rd_req_ready, m_rd_rsp_valid, m_wr_valid, m_wr_ready, m_conflict;
  addr_t        m_rd_req_addr, m_wr_addr;
  logic [0:0]   m_rd_req_id, m_rd_rsp_id;
  beat_t        m_rd_rsp_data, m_wr_data;
  strb_t        m_wr_strb;
  logic [N-1:0] fwd_in_valid, fwd_in_ready, fwd_out_valid, fwd_out_ready;
  beat_t        fwd_in_data [N];
  addr_t        fwd_out_addr [N];
  beat_t        fwd_out_data [N];
  strb_t        fwd_out_strb [N];

  tmu_system dut (.*);

  tb_dram_model #(.DEPTH(2048), .LATENCY(6), .IW(1)) u_dram (
    .clk, .rst_n,
    .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready), .rd_req_addr(m_rd_req_addr),
    .rd_req_id(m_rd_req_id), .rd_rsp_valid(m_rd_rsp_valid), .rd_rsp_id(m_rd_rsp_id),
    .rd_rsp_data(m_rd_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
    .wr_strb(m_wr_strb)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic logic [7:0] mbyte(int beat, int k);
    return u_dram.mem[beat][8*k +: 8];
  endfunction

  // ---------------- layout (beat numbers) ----------------
  localparam int TS_IN = 0,    TS_OUT = 100;   // Transpose 4x3x2
  localparam int AD_A  = 200,  AD_B = 300, AD_OUT = 400;   // Add 4x4x1
  localparam int RR_IN = 500,  RR_OUT = 600;   // Rearrange 32 RGB pixels
  localparam int BB_IN = 700,  BB_OUT = 800;   // Bboxcal 6 boxes of 2 beats
  localparam int RD_IN = 900,  RD_OUT = 1000;  // reduction, 8 beats
  localparam int RT_IN = 1100, RT_OUT = 1200;  // Rot90 3x4x1
  localparam int US_IN = 1300, US_OUT = 1400;  // Upsample 2x2x1, s = 2
  localparam int FW_DST = 1500;                // forwarding copy 4x2x1
  localparam int NBOX = 6;
  localparam logic signed [7:0] CONF [NBOX] = '{8'sd50, -8'sd10, 8'sd60, 8'sd21, 8'sd20, 8'sd90};

  function automatic addr_t ba(int beat); return addr_t'(beat * BUS_BYTES); endfunction

  // ---------------- programs ----------------
  inst_t prog0 [5];
  inst_t prog1 [8];
  initial begin
    inst_t t;
    prog0[0] = inst_transpose(ba(TS_IN), ba(TS_OUT), 4, 3, 2, 8);
    t = fine_out(inst_base(OP_REARRANGE, ba(RR_IN), ba(RR_OUT), 6, 1, 1, 4));
    t.grp_in = 5'd3; t.grp_out = 5'd16;
    prog0[1] = t;
    t = fine_out(inst_base(OP_BBOXCAL, ba(BB_IN), ba(BB_OUT), 2 * NBOX, 1, 1, 2));
    t.byte_dest[4] = 2'd0; t.cal_op[0] = CAL_MAX; t.ev_mode = EV_FILTER;
    t.cond_unit = 2'd0; t.threshold = 8'sd20;
    prog0[2] = t;
    t = inst_copy(OP_ROUTE, '0, ba(FW_DST), 4, 2, 1, 1, 0, 8);
    t.src_fwd = 1'b1; t.dst_fwd = 1'b1;
    prog0[3] = t;
    prog0[4] = '0;   // halt

    t = inst_copy(OP_ADD, ba(AD_A), ba(AD_OUT), 4, 4, 1, 1, 0, 8);
    t.src1_base = ba(AD_B); t.eop = EOP_ADD;
    prog1[0] = t;
    t = fine_out(inst_base(OP_RESIZE, ba(RD_IN), ba(RD_OUT), 8, 1, 1, 1));
    for (int i = 0; i < 16; i++) t.byte_dest[i] = (i < 4) ? 2'd0 : (i < 10) ? 2'd1 : 2'd2;
    t.cal_op[0] = CAL_MAX; t.cal_op[1] = CAL_MIN; t.cal_op[2] = CAL_AVG; t.avg_shift = 3'd2;
    t.ev_mode = EV_REDUCE; t.seg_period = 8'd2; t.seg_keep = 8'd1;
    prog1[1] = t;
    prog1[2] = inst_rot90(ba(RT_IN), ba(RT_OUT), 3, 4, 1, 0);
    for (int k = 0; k < 4; k++) prog1[3 + k] = inst_upsample(ba(US_IN), ba(US_OUT), 2, 2, 1, 2, k % 2, k / 2, 0);
    prog1[7] = '0;
  end

  // ---------------- TPU stand-in on the forwarding ports ----------------
  int fin_sent = 0, fout_got = 0;
  beat_t fout_data [8];
  addr_t fout_addr [8];
  assign fwd_in_valid[0] = (fin_sent < 8);
  assign fwd_in_data[0]  = pat_beat(77, fin_sent);
  assign fwd_in_valid[1] = 1'b0;
  assign fwd_in_data[1]  = '0;
  assign fwd_out_ready   = 2'b01;
  always @(posedge clk) begin
    if (fwd_in_valid[0] && fwd_in_ready[0]) fin_sent <= fin_sent + 1;
    if (fwd_out_valid[0] && fwd_out_ready[0]) begin
      if (fout_got < 8) begin
        fout_data[fout_got] <= fwd_out_data[0];
        fout_addr[fout_got] <= fwd_out_addr[0];
      end
      fout_got <= fout_got + 1;
    end
  end

  // ---------------- mechanism counters ----------------
  int n_early, n_conflict, n_bp, n_drop, n_acc, n_rej, n_branch, n_fin, n_fout, n_overlap;
  int n_asm, n_eval, n_elem, n_coarse;
  fsm_state_e prev [N];
  function automatic bit busy_other(fsm_state_e s);
    return s inside {S_ASSEMBLE, S_EVALUATE, S_ELEM, S_ADDR_GEN, S_ST_MEM};
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (dut.g_tmu[0].u_core.u_fsm.early_store || dut.g_tmu[1].u_core.u_fsm.early_store) n_early++;
    if (m_conflict) n_conflict++;
    if ((m_rd_req_valid && !m_rd_req_ready) || (m_wr_valid && !m_wr_ready)) n_bp++;
    if (dut.g_tmu[1].u_core.ld_step && !dut.g_tmu[1].u_core.ld_acquire) n_drop++;
    if (dut.g_tmu[0].u_core.rme_ev_done && dut.g_tmu[0].u_core.cfg.ev_mode == EV_FILTER) begin
      if (dut.g_tmu[0].u_core.rme_ev_pass) n_acc++; else n_rej++;
    end
    if (fwd_in_valid[0] && fwd_in_ready[0]) n_fin++;
    if (fwd_out_valid[0] && fwd_out_ready[0]) n_fout++;
    if ((state[0] == S_LD_MEM && busy_other(state[1])) || (state[1] == S_LD_MEM && busy_other(state[0])))
      n_overlap++;
    for (int i = 0; i < N; i++) begin
      if (prev[i] == S_UPDATE_INDEX && state[i] == S_LD_MEM) n_branch++;
      if (state[i] == S_ASSEMBLE && prev[i] != S_ASSEMBLE) n_asm++;
      if (state[i] == S_EVALUATE && prev[i] != S_EVALUATE) n_eval++;
      if (state[i] == S_ELEM && prev[i] != S_ELEM) n_elem++;
      if (state[i] == S_ADDR_GEN && prev[i] == S_LD_MEM) n_coarse++;
      prev[i] = state[i];
    end
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- stimulus and checks ----------------
  initial begin
    inst_wr_en = '0; inst_wr_addr = '0; inst_wr_data = '0; start = '0;
    for (int i = 0; i < 2048; i++) u_dram.mem[i] = '0;
    for (int n = 0; n < 24; n++) u_dram.mem[TS_IN + n] = pat_beat(1, n);
    for (int n = 0; n < 16; n++) begin
      beat_t a, b;
      a = pat_beat(2, n); b = pat_beat(3, n);
      if (n == 0) begin a[7:0] = 8'd100; b[7:0] = 8'd100; end   // saturates
      u_dram.mem[AD_A + n] = a; u_dram.mem[AD_B + n] = b;
    end
    for (int n = 0; n < 6; n++) u_dram.mem[RR_IN + n] = pat_beat(4, n);
    for (int bx = 0; bx < NBOX; bx++) begin
      beat_t b0, b1;
      b0 = pat_beat(5, 2 * bx); b1 = pat_beat(5, 2 * bx + 1);
      b0[39:32] = CONF[bx]; b1[39:32] = -8'sd100;
      u_dram.mem[BB_IN + 2 * bx] = b0; u_dram.mem[BB_IN + 2 * bx + 1] = b1;
    end
    for (int n = 0; n < 8; n++) u_dram.mem[RD_IN + n] = pat_beat(6, n);
    for (int n = 0; n < 12; n++) u_dram.mem[RT_IN + n] = pat_beat(7, n);
    for (int n = 0; n < 4; n++) u_dram.mem[US_IN + n] = pat_beat(8, n);

    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 5; i++) begin
      inst_wr_en <= 2'b01; inst_wr_addr <= 4'(i); inst_wr_data <= prog0[i]; @(posedge clk);
    end
    for (int i = 0; i < 8; i++) begin
      inst_wr_en <= 2'b10; inst_wr_addr <= 4'(i); inst_wr_data <= prog1[i]; @(posedge clk);
    end
    inst_wr_en <= '0;
    start <= 2'b11; @(posedge clk); start <= '0;
    wait (done == 2'b11);
    repeat (5) @(posedge clk);

    // Transpose: out pixel (x=y_i, y=x_i) of a 3-wide output
    for (int y = 0; y < 3; y++) for (int x = 0; x < 4; x++) for (int c = 0; c < 2; c++)
      check(u_dram.mem[TS_OUT + (x * 3 + y) * 2 + c] == pat_beat(1, (y * 4 + x) * 2 + c), "transpose");
    // Add with saturation
    for (int n = 0; n < 16; n++) for (int k = 0; k < 16; k++) begin
      int s;
      s = int'(signed'(u_dram.mem[AD_A + n][8*k +: 8])) + int'(signed'(u_dram.mem[AD_B + n][8*k +: 8]));
      s = (s > 127) ? 127 : (s < -128) ? -128 : s;
      check(mbyte(AD_OUT + n, k) == 8'(s), $sformatf("add beat %0d byte %0d", n, k));
    end
    // Rearrange: pixel p -> beat p = {R,G,B,0...}
    for (int p = 0; p < 32; p++) for (int k = 0; k < 16; k++)
      check(mbyte(RR_OUT + p, k) == ((k < 3) ? mbyte(RR_IN + (3 * p + k) / 16, (3 * p + k) % 16) : 8'h00),
            $sformatf("rearrange pixel %0d byte %0d", p, k));
    // Bboxcal: boxes with confidence > 20, packed
    begin
      int o;
      o = 0;
      for (int bx = 0; bx < NBOX; bx++) if (CONF[bx] > 8'sd20) begin
        check(u_dram.mem[BB_OUT + 2 * o]     == u_dram.mem[BB_IN + 2 * bx], "bbox beat 0");
        check(u_dram.mem[BB_OUT + 2 * o + 1] == u_dram.mem[BB_IN + 2 * bx + 1], "bbox beat 1");
        o++;
      end
      check(u_dram.mem[BB_OUT + 2 * o] == '0, "bbox: nothing beyond the kept boxes");
    end
    // reduction of beats 0,2,4,6: max(bytes 0-3), min(bytes 4-9), sum(bytes 10-15)>>2
    for (int w = 0; w < 4; w++) begin
      int mx, mn, sm, v;
      mx = -999; mn = 999; sm = 0;
      for (int k = 0; k < 16; k++) begin
        v = int'(signed'(mbyte(RD_IN + 2 * w, k)));
        if (k < 4) mx = (v > mx) ? v : mx;
        else if (k < 10) mn = (v < mn) ? v : mn;
        else sm += v;
      end
      sm = sm >>> 2;
      sm = (sm > 127) ? 127 : (sm < -128) ? -128 : sm;
      check(mbyte(RD_OUT, 3 * w)     == 8'(mx), $sformatf("reduce max %0d", w));
      check(mbyte(RD_OUT, 3 * w + 1) == 8'(mn), $sformatf("reduce min %0d", w));
      check(mbyte(RD_OUT, 3 * w + 2) == 8'(sm), $sformatf("reduce avg %0d", w));
    end
    for (int k = 12; k < 16; k++) check(mbyte(RD_OUT, k) == 8'h00, "reduce strobe");
    // Rot90: in (x,y) of a 3x4 image -> out (x=3-y, y=x), output width 4
    for (int y = 0; y < 4; y++) for (int x = 0; x < 3; x++)
      check(u_dram.mem[RT_OUT + x * 4 + (3 - y)] == pat_beat(7, y * 3 + x), "rot90");
    // Upsample x2 of a 2x2 image: out (X,Y) = in (X/2, Y/2), output width 4
    for (int Y = 0; Y < 4; Y++) for (int X = 0; X < 4; X++)
      check(u_dram.mem[US_OUT + Y * 4 + X] == pat_beat(8, (Y / 2) * 2 + X / 2), "upsample");
    // forwarding copy
    check(fout_got == 8, "forwarded beat count");
    for (int n = 0; n < 8; n++) begin
      check(fout_data[n] == pat_beat(77, n), "forwarded data");
      check(fout_addr[n] == ba(FW_DST + n), "forwarded address");
    end

    $display("mechanisms: early_store=%0d conflict=%0d backpressure=%0d drop=%0d accept=%0d reject=%0d branch=%0d fwd_in=%0d fwd_out=%0d overlap=%0d assemble=%0d evaluate=%0d elem=%0d coarse=%0d",
             n_early, n_conflict, n_bp, n_drop, n_acc, n_rej, n_branch, n_fin, n_fout, n_overlap,
             n_asm, n_eval, n_elem, n_coarse);
    check(n_early > 0, "early store never happened");
    check(n_conflict > 0, "port conflict never happened");
    check(n_bp > 0, "DRAM back-pressure never happened");
    check(n_drop > 0, "segment masking never dropped a beat");
    check(n_acc > 0 && n_rej > 0, "filter accept/reject");
    check(n_branch > 0, "segment branch never happened");
    check(n_fin > 0 && n_fout > 0, "forwarding never happened");
    check(n_overlap > 0, "load/work overlap never happened");
    check(n_asm > 0 && n_eval > 0 && n_elem > 0 && n_coarse > 0, "a dataflow class was never used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
