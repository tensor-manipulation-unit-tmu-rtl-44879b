// tb_tmu_core -- one TMU core on a DRAM model, with a throughput check.
//
// Program: Split of an 8x4x2 tensor into two 8x4x1 tensors in one
// coarse-grained instruction (c_o = 32 c_i places the second channel block 32
// beats further), Route (concatenation) of the two halves back into an
// 8x4x2 tensor with two instructions, an element-wise Mul with a shift and
// saturation, and halt. Every output beat is compared with its definition.
//
// Rate: the DRAM model answers without stalls, so a coarse-grained segment
// must move at one 16-byte beat per cycle (16 bytes x 300 MHz = 4.8 GB/s):
// per 32-beat segment the cycles in S_LD_MEM may exceed 32 only by the read
// latency, those in S_ADDR_GEN and in S_ST_MEM only by a few pipeline cycles.
module tb_tmu_core;
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

  localparam int LAT = 6;
  tb_dram_model #(.DEPTH(1024), .LATENCY(LAT), .IW(1), .STALLS(1'b0)) u_dram (
    .clk, .rst_n,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_req_id(1'b0),
    .rd_rsp_valid, .rd_rsp_id(rsp_id), .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data, .wr_strb
  );

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask

  localparam int IN = 0, SP = 100, RT = 200, MA = 300, MB = 340, MO = 380;
  function automatic addr_t ba(int beat); return addr_t'(beat * BUS_BYTES); endfunction

  // cycles per segment in S_LD_MEM, in S_ADDR_GEN and in S_ST_MEM (a segment
  // may visit S_ADDR_GEN and S_ST_MEM several times when the commit buffer fills)
  int ld_cyc [$], ag_cyc [$], st_cyc [$];
  int c_ld = 0, c_ag = 0, c_st = 0;
  always @(posedge clk) if (rst_n) begin
    if (state == S_LD_MEM) c_ld++;
    if (state == S_ADDR_GEN) c_ag++;
    if (state == S_ST_MEM) c_st++;
    if (state == S_UPDATE_INDEX) begin
      ld_cyc.push_back(c_ld); ag_cyc.push_back(c_ag); st_cyc.push_back(c_st);
      c_ld = 0; c_ag = 0; c_st = 0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    inst_t prog [5];
    inst_t t;
    t = inst_copy(OP_ROUTE, ba(IN), ba(SP), 8, 4, 2, 1, 0, 32);   // Split
    t.a[2][2] = 16'sd32;
    prog[0] = t;
    prog[1] = inst_copy(OP_ROUTE, ba(SP),      ba(RT), 8, 4, 1, 2, 0, 32);
    prog[2] = inst_copy(OP_ROUTE, ba(SP + 32), ba(RT), 8, 4, 1, 2, 1, 32);
    t = inst_copy(OP_ADD, ba(MA), ba(MO), 4, 2, 1, 1, 0, 0);
    t.src1_base = ba(MB); t.eop = EOP_MUL; t.mul_shift = 3'd2;
    prog[3] = t;
    prog[4] = '0;
    for (int i = 0; i < 1024; i++) u_dram.mem[i] = '0;
    for (int n = 0; n < 64; n++) u_dram.mem[IN + n] = pat_beat(11, n);
    for (int n = 0; n < 8; n++) begin
      u_dram.mem[MA + n] = pat_beat(12, n); u_dram.mem[MB + n] = pat_beat(13, n);
    end
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 5; i++) begin
      inst_wr_en = 1'b1; inst_wr_addr = 4'(i); inst_wr_data = prog[i]; @(negedge clk);
    end
    inst_wr_en = 1'b0;
    start = 1'b1; @(negedge clk); start = 1'b0;
    chk(!done, "done cleared by start");
    while (!done) @(negedge clk);
    repeat (4) @(negedge clk);
    chk(state == S_IDLE, "idle after halt");

    // Split: SP[k*32 + p] = IN[2p + k]
    for (int k = 0; k < 2; k++)
      for (int p = 0; p < 32; p++)
        chk(u_dram.mem[SP + 32 * k + p] == pat_beat(11, 2 * p + k), $sformatf("split %0d %0d", k, p));
    // Route: RT = IN
    for (int n = 0; n < 64; n++) chk(u_dram.mem[RT + n] == pat_beat(11, n), $sformatf("route %0d", n));
    // Mul
    for (int n = 0; n < 8; n++)
      for (int i = 0; i < 16; i++) begin
        int a, b, p;
        a = int'($signed(pat(12, 16 * n + i))); b = int'($signed(pat(13, 16 * n + i)));
        p = (a * b) >>> 2;
        p = (p > 127) ? 127 : (p < -128) ? -128 : p;
        chk(u_dram.mem[MO + n][8*i +: 8] == 8'(p), $sformatf("mul %0d %0d", n, i));
      end
    // rate: first four coarse segments are 32 beats each
    chk(ag_cyc.size() >= 4 && ld_cyc.size() >= 4, "segments seen");
    for (int s = 0; s < 4; s++) begin
      $display("segment %0d, 32 beats: load %0d, address generation %0d, store %0d cycles",
               s, ld_cyc[s], ag_cyc[s], st_cyc[s]);
      chk(ld_cyc[s] <= 32 + LAT + 4, "load at one beat per cycle");
      chk(ag_cyc[s] <= 32 + 6, "address generation at one beat per cycle");
      chk(st_cyc[s] <= 32 + 6, "store at one beat per cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
