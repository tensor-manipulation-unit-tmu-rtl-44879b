// tb_tmu_rme -- Reconfigurable Masking Engine: the two schemes and the load mask.
//
//  1. assemble: random beats through a random byte mask, compacted stream.
//  2. evaluate/reduce: lanes 0-4 to a MAX unit, 5-9 to MIN, 10-14 to SUM,
//     lane 15 to none; each window of random length yields 3 result bytes.
//  3. evaluate/filter: window = 2 beats, MAX unit gates the commit against a
//     threshold; passing windows are read again and their masked bytes kept.
//  4. segment read masking: ld_acquire pattern for a (period, keep) pair.
// Expected values are computed here from the beats; output has random stalls.
module tb_tmu_rme;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, ld_step = 1'b0, ld_acquire, in_valid = 1'b0, in_ready, in_last = 1'b0, in_phase = 1'b0;
  logic ev_done, ev_pass, flush = 1'b0, idle, out_valid, out_ready = 1'b0;
  class_e cls = CLS_ASSEMBLE;
  inst_t cfg;
  beat_t in_beat = '0, out_beat;
  strb_t out_strb;
  int checks = 0, failures = 0;
  byte unsigned exp_q [$];
  int n_pass = 0, n_drop = 0;

  tmu_rme dut (.*);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, s); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    $display("stuck: in_valid=%b in_ready=%b idle=%b", in_valid, in_ready, idle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) out_ready <= ($urandom % 4 != 0);
  always @(posedge clk) if (rst_n && out_valid && out_ready)
    for (int i = 0; i < 16; i++) if (out_strb[i]) begin
      if (exp_q.size() == 0) chk(0, "extra output byte");
      else begin
        byte unsigned e;
        e = exp_q.pop_front();
        chk(out_beat[8*i +: 8] == e, $sformatf("byte %h exp %h", out_beat[8*i +: 8], e));
      end
    end

  function automatic beat_t rnd_beat();
    beat_t b;
    for (int j = 0; j < 4; j++) b[32*j +: 32] = $urandom;
    return b;
  endfunction

  task automatic send(beat_t b, bit last, bit phase);
    @(negedge clk);
    in_valid = 1'b1; in_beat = b; in_last = last; in_phase = phase;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
    #1 in_valid = 1'b0; in_last = 1'b0;
  endtask

  task automatic finish_instr();
    @(negedge clk); flush = 1'b1;
    while (!idle) @(negedge clk);
    flush = 1'b0;
    repeat (2) @(negedge clk);
    chk(exp_q.size() == 0, $sformatf("%0d bytes not produced", exp_q.size()));
    exp_q.delete();
    clear = 1'b1; @(negedge clk); clear = 1'b0;
  endtask

  function automatic int s8(byte unsigned v);
    return int'($signed(v));
  endfunction

  initial begin
    cfg = '0;
    cfg.grp_in = 5'd16; cfg.grp_out = 5'd16;
    for (int i = 0; i < 16; i++) cfg.byte_dest[i] = 2'd3;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    clear = 1'b1; @(negedge clk); clear = 1'b0;

    // 1. assemble
    cls = CLS_ASSEMBLE;
    cfg.byte_mask = 16'($urandom) | 16'h0001;
    for (int n = 0; n < 30; n++) begin
      beat_t b;
      b = rnd_beat();
      for (int i = 0; i < 16; i++) if (cfg.byte_mask[i]) exp_q.push_back(b[8*i +: 8]);
      send(b, 1'b0, 1'b0);
    end
    finish_instr();

    $display("phase 2 @%0t", $time);
    // 2. evaluate, reduce
    cls = CLS_EVALUATE; cfg.ev_mode = EV_REDUCE;
    for (int i = 0; i < 15; i++) cfg.byte_dest[i] = 2'(i / 5);
    cfg.byte_dest[15] = 2'd3;
    cfg.cal_op[0] = CAL_MAX; cfg.cal_op[1] = CAL_MIN; cfg.cal_op[2] = CAL_SUM;
    for (int w = 0; w < 12; w++) begin
      int len, mx, mn, sm;
      len = 1 + $urandom % 5; mx = -1000; mn = 1000; sm = 0;
      for (int n = 0; n < len; n++) begin
        beat_t b;
        b = rnd_beat();
        for (int i = 0; i < 15; i++) begin
          int v;
          v = s8(b[8*i +: 8]);
          if (i < 5) mx = (v > mx) ? v : mx;
          else if (i < 10) mn = (v < mn) ? v : mn;
          else sm += v;
        end
        send(b, n == len - 1, 1'b0);
      end
      sm = (sm > 127) ? 127 : (sm < -128) ? -128 : sm;
      exp_q.push_back(8'(mx)); exp_q.push_back(8'(mn)); exp_q.push_back(8'(sm));
    end
    finish_instr();

    $display("phase 3 @%0t", $time);
    // 3. evaluate, filter
    cfg.ev_mode = EV_FILTER; cfg.cond_unit = 2'd0; cfg.threshold = 8'sd40;
    for (int i = 0; i < 16; i++) cfg.byte_dest[i] = (i == 4 || i == 12) ? 2'd0 : 2'd3;
    cfg.byte_mask = 16'h0f0f;
    for (int w = 0; w < 16; w++) begin
      beat_t bs [2];
      int mx;
      bit pass, got_done, got_pass;
      mx = -1000;
      for (int n = 0; n < 2; n++) begin
        bs[n] = rnd_beat();
        mx = (s8(bs[n][39:32]) > mx) ? s8(bs[n][39:32]) : mx;
        mx = (s8(bs[n][103:96]) > mx) ? s8(bs[n][103:96]) : mx;
      end
      pass = (mx > 40);
      send(bs[0], 1'b0, 1'b0);
      send(bs[1], 1'b1, 1'b0);
      got_done = 1'b0;
      for (int c = 0; c < 4 && !got_done; c++) begin
        if (ev_done) begin got_done = 1'b1; got_pass = ev_pass; end
        @(negedge clk);
      end
      chk(got_done, "ev_done");
      chk(got_pass == pass, $sformatf("filter decision max=%0d", mx));
      if (pass) begin
        n_pass++;
        for (int n = 0; n < 2; n++) begin
          for (int i = 0; i < 16; i++) if (cfg.byte_mask[i]) exp_q.push_back(bs[n][8*i +: 8]);
          send(bs[n], n == 1, 1'b1);
        end
      end else n_drop++;
    end
    chk(n_pass > 0 && n_drop > 0, "both filter outcomes seen");
    finish_instr();

    // 4. segment read masking on the load path
    cfg.seg_period = 8'd5; cfg.seg_keep = 8'd2;
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    for (int n = 0; n < 23; n++) begin
      chk(ld_acquire == ((n % 5) < 2), $sformatf("acquire at beat %0d", n));
      ld_step = 1'b1; @(negedge clk); ld_step = 1'b0;
      if ($urandom % 2 == 1) @(negedge clk);
    end
    $display("filter: %0d kept, %0d dropped", n_pass, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
