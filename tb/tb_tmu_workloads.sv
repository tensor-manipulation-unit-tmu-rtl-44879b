// tb_tmu_workloads -- the operator workloads at their published sizes on one
// TMU core with default parameters.
//
// Each operator runs as its own program on a 448 x 448 feature map with 64
// int8 channels (4 channel blocks of 16 bytes), i.e. 802,816 input beats:
// Transpose, Rot90, Route (two such tensors into one of 128 channels), Add
// (two operands), Upsample x2 (four instructions, 3.2 M output beats), and
// Rearrange of a 448 x 448 RGB image into 16-channel pixels (37,632 input
// beats, 200,704 output beats). The DRAM model answers without stalls. Every
// output beat is compared with the operator's definition, and the cycle count
// is checked against the core's sequential load / address / store schedule:
// at most 3.5 cycles per moved beat for a coarse-grained operator (one
// beat per cycle in each of the three phases of a 64-beat segment, plus the
// pipeline and memory latencies), 4.6 for Add, which loads two operands.
module tb_tmu_workloads;
  import tmu_pkg::*;
  import tb_tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic inst_wr_en = 1'b0, start = 1'b0, done;
  logic [3:0] inst_wr_addr = '0;
  inst_t inst_wr_data = '0;
  fsm_state_e state;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  addr_t rd_req_addr, wr_addr, fwd_out_addr;
  beat_t rd_rsp_data, wr_data, fwd_out_data;
  strb_t wr_strb, fwd_out_strb;
  logic fwd_in_valid = 1'b0, fwd_in_ready, fwd_out_valid, fwd_out_ready = 1'b1;
  beat_t fwd_in_data = '0;
  logic [0:0] rsp_id;

  tmu_core dut (.*);

  localparam int W = 448, H = 448, CB = 4, NB = W * H * CB;
  localparam int IN0 = 0, IN1 = 1 << 20, OUT = 2 << 20;
  localparam int DEPTH = OUT + 4 * NB;

  tb_dram_model #(.DEPTH(DEPTH), .LATENCY(6), .IW(1), .STALLS(1'b0)) u_dram (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id(1'b0),
    .rd_rsp_valid, .rd_rsp_id(rsp_id), .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  function automatic addr_t ba(int beat); return addr_t'(beat * BUS_BYTES); endfunction

  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    repeat (80_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // run a program, return its cycle count
  task automatic run(inst_t prog [$], output longint cycles);
    longint t0;
    prog.push_back('0);   // halt
    foreach (prog[i]) begin
      inst_wr_en = 1'b1; inst_wr_addr = 4'(i); inst_wr_data = prog[i]; @(negedge clk);
    end
    inst_wr_en = 1'b0;
    t0 = cyc;
    start = 1'b1; @(negedge clk); start = 1'b0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  // one output beat against its expected value; only the first mismatches are printed
  int bad;
  task automatic cmp(int ob, beat_t e, string what);
    checks++;
    if (u_dram.mem[ob] !== e) begin
      failures++; bad++;
      if (bad <= 5) $display("FAIL: %s beat %0d", what, ob);
    end
  endtask

  task automatic rate(string what, longint cycles, longint beats, real limit);
    $display("%-10s %0d beats moved in %0d cycles (%.2f cycles per beat)", what, beats, cycles,
             real'(cycles) / real'(beats));
    chk(real'(cycles) <= limit * real'(beats), {what, " cycles per beat"});
  endtask

  initial begin
    inst_t p [$];
    inst_t t;
    longint c;
    for (int n = 0; n < NB; n++) begin
      u_dram.mem[IN0 + n] = pat_beat(21, n);
      u_dram.mem[IN1 + n] = pat_beat(22, n);
    end
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);

    // Transpose: out(x_o = y, y_o = x) with output width H
    p = {inst_transpose(ba(IN0), ba(OUT), W, H, CB, 0)};
    run(p, c); rate("Transpose", c, NB, 3.5);
    bad = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int k = 0; k < CB; k++)
      cmp(OUT + (x * H + y) * CB + k, pat_beat(21, (y * W + x) * CB + k), "transpose");

    // Rot90: out(x_o = H-1-y, y_o = x)
    p = {inst_rot90(ba(IN0), ba(OUT), W, H, CB, 0)};
    run(p, c); rate("Rot90", c, NB, 3.5);
    bad = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int k = 0; k < CB; k++)
      cmp(OUT + (x * H + (H - 1 - y)) * CB + k, pat_beat(21, (y * W + x) * CB + k), "rot90");

    // Route: 64 + 64 channels -> 128 channels
    p = {inst_copy(OP_ROUTE, ba(IN0), ba(OUT), W, H, CB, 2 * CB, 0, 0),
         inst_copy(OP_ROUTE, ba(IN1), ba(OUT), W, H, CB, 2 * CB, CB, 0)};
    run(p, c); rate("Route", c, 2 * NB, 3.5);
    bad = 0;
    for (int q = 0; q < W * H; q++) for (int k = 0; k < CB; k++) begin
      cmp(OUT + q * 2 * CB + k,      pat_beat(21, q * CB + k), "route a");
      cmp(OUT + q * 2 * CB + CB + k, pat_beat(22, q * CB + k), "route b");
    end

    // Add: saturating int8
    t = inst_copy(OP_ADD, ba(IN0), ba(OUT), W, H, CB, CB, 0, 0);
    t.src1_base = ba(IN1); t.eop = EOP_ADD;
    p = {t};
    run(p, c); rate("Add", c, NB, 4.6);
    bad = 0;
    for (int n = 0; n < NB; n++) begin
      beat_t e, a, b;
      a = pat_beat(21, n); b = pat_beat(22, n);
      for (int i = 0; i < 16; i++) begin
        int s;
        s = int'($signed(a[8*i +: 8])) + int'($signed(b[8*i +: 8]));
        e[8*i +: 8] = 8'((s > 127) ? 127 : (s < -128) ? -128 : s);
      end
      cmp(OUT + n, e, "add");
    end

    // Upsample x2: four instructions, one per sub-pixel offset
    p = {};
    for (int k = 0; k < 4; k++) p.push_back(inst_upsample(ba(IN0), ba(OUT), W, H, CB, 2, k % 2, k / 2, 0));
    run(p, c); rate("Upsample", c, 4 * NB, 3.5);
    bad = 0;
    for (int yo = 0; yo < 2 * H; yo++) for (int xo = 0; xo < 2 * W; xo++) for (int k = 0; k < CB; k++)
      cmp(OUT + (yo * 2 * W + xo) * CB + k, pat_beat(21, ((yo / 2) * W + xo / 2) * CB + k), "upsample");

    // Rearrange: 448 x 448 RGB (3 bytes per pixel, packed) -> 16-channel pixels
    t = fine_out(inst_base(OP_REARRANGE, ba(IN0), ba(OUT), W * H * 3 / 16, 1, 1, 0));
    t.grp_in = 5'd3; t.grp_out = 5'd16;
    p = {t};
    run(p, c); rate("Rearrange", c, W * H, 6.0);
    bad = 0;
    for (int q = 0; q < W * H; q++) begin
      beat_t e;
      e = '0;
      for (int j = 0; j < 3; j++) e[8*j +: 8] = pat(21, 3 * q + j);
      cmp(OUT + q, e, "rearrange");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
