// tb_tmu_prefetch -- the two-TMU double-buffering arrangement on a full-size
// Transpose (448 x 448 x 64 int8, 802,816 beats).
//
// The subsystem runs the Transpose twice on a DRAM model without stalls:
// first on core 0 alone, then split by rows between the two cores (core k
// transposes input rows 224k .. 224k+223, which land at output columns
// offset by b[0] = 224k). Each core loads, transforms and stores its segments
// one after another; with two cores, one core's load overlaps the other's
// address generation or store, and they meet only on the shared memory port.
// Both results are compared beat by beat with the definition, and the
// two-core run must take at most 0.65 of the single-core cycles.
module tb_tmu_prefetch;
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

  assign fwd_in_valid  = '0;
  assign fwd_in_data   = '{default: '0};
  assign fwd_out_ready = '1;

  tmu_system dut (.*);

  localparam int W = 448, H = 448, CB = 4, NB = W * H * CB;
  localparam int IN0 = 0, OUT = 1 << 20;

  tb_dram_model #(.DEPTH(OUT + NB), .LATENCY(6), .IW(1), .STALLS(1'b0)) u_dram (
    .clk, .rst_n,
    .rd_req_valid(m_rd_req_valid), .rd_req_ready(m_rd_req_ready), .rd_req_addr(m_rd_req_addr),
    .rd_req_id(m_rd_req_id), .rd_rsp_valid(m_rd_rsp_valid), .rd_rsp_id(m_rd_rsp_id),
    .rd_rsp_data(m_rd_rsp_data),
    .wr_valid(m_wr_valid), .wr_ready(m_wr_ready), .wr_addr(m_wr_addr), .wr_data(m_wr_data),
    .wr_strb(m_wr_strb)
  );

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", s); end
  endtask
  function automatic addr_t ba(int beat); return addr_t'(beat * BUS_BYTES); endfunction

  longint cyc = 0;
  int n_conflict = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && m_conflict) n_conflict++;
  end

  initial begin
    repeat (20_000_000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic load(int core, int slot, inst_t t);
    inst_wr_en = '0; inst_wr_en[core] = 1'b1; inst_wr_addr = 4'(slot); inst_wr_data = t;
    @(negedge clk);
    inst_wr_en = '0;
  endtask

  task automatic run(logic [N-1:0] which, output longint cycles);
    longint t0;
    t0 = cyc;
    start = which; @(negedge clk); start = '0;
    while ((done & which) != which) @(negedge clk);
    cycles = cyc - t0;
  endtask

  task automatic check_out(string what);
    int bad;
    bad = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int k = 0; k < CB; k++) begin
      checks++;
      if (u_dram.mem[OUT + (x * H + y) * CB + k] !== pat_beat(31, (y * W + x) * CB + k)) begin
        failures++; bad++;
        if (bad <= 5) $display("FAIL: %s pixel (%0d,%0d) block %0d", what, x, y, k);
      end
    end
  endtask

  initial begin
    longint c1, c2;
    inst_t t;
    inst_wr_en = '0; inst_wr_addr = '0; inst_wr_data = '0; start = '0;
    for (int n = 0; n < NB; n++) begin
      u_dram.mem[IN0 + n] = pat_beat(31, n);
      u_dram.mem[OUT + n] = '0;
    end
    repeat (2) @(posedge clk); rst_n = 1'b1;
    @(negedge clk);

    // one core
    load(0, 0, inst_transpose(ba(IN0), ba(OUT), W, H, CB, 0));
    load(0, 1, '0);
    run(2'b01, c1);
    check_out("single core");
    for (int n = 0; n < NB; n++) u_dram.mem[OUT + n] = '0;

    // two cores, half of the rows each
    for (int k = 0; k < 2; k++) begin
      t = inst_transpose(ba(IN0 + k * (H / 2) * W * CB), ba(OUT), W, H / 2, CB, 0);
      t.a[1][0] = COEF_W'(H);          // output row pitch is the full height
      t.b[0]    = OFS_W'(k * (H / 2));  // output column offset
      load(k, 0, t);
      load(k, 1, '0);
    end
    run(2'b11, c2);
    check_out("two cores");

    $display("Transpose 448x448x64: one core %0d cycles, two cores %0d cycles (ratio %.2f), port conflicts %0d",
             c1, c2, real'(c2) / real'(c1), n_conflict);
    chk(real'(c2) <= 0.65 * real'(c1), "two-core speed-up");
    chk(n_conflict > 0, "cores met on the shared port");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
