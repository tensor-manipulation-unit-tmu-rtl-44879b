// tb_tmu_assembler -- random beats and byte masks into the assemble register with
// random output back-pressure, for several (grp_in, grp_out) settings. The
// expected stream is built in the testbench: selected bytes in order, each
// group of grp_in bytes padded with zeros to grp_out bytes, cut into 16-byte
// beats; a short last group is not padded; the flushed tail is checked
// through out_strb.
module tb_tmu_assembler;
  import tmu_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic clear = 1'b0, in_valid = 1'b0, in_ready, flush = 1'b0, empty, out_valid, out_ready = 1'b0;
  beat_t in_beat, out_beat;
  strb_t in_mask, out_strb;
  logic [4:0] grp_in, grp_out;
  int checks = 0, failures = 0;
  byte unsigned exp_q [$];

  tmu_assembler dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) out_ready <= ($urandom % 4 != 0);

  int got_bytes;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int i = 0; i < 16; i++) if (out_strb[i]) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("FAIL: extra byte"); end
      else begin
        byte unsigned e;
        e = exp_q.pop_front();
        if (out_beat[8*i +: 8] !== e) begin failures++; if (failures < 10) $display("FAIL: byte %0d", got_bytes); end
      end
      got_bytes++;
    end
  end

  initial begin
    int GI [4] = '{16, 3, 1, 5};
    int GO [4] = '{16, 16, 2, 8};
    in_beat = '0; in_mask = '0; grp_in = 5'd16; grp_out = 5'd16;
    repeat (2) @(posedge clk); rst_n = 1'b1;
    for (int s = 0; s < 4; s++) begin
      byte unsigned sel [$];
      beat_t bs [40]; strb_t ms [40];
      grp_in = 5'(GI[s]); grp_out = 5'(GO[s]);
      @(negedge clk); clear = 1'b1; @(negedge clk); clear = 1'b0;
      for (int n = 0; n < 40; n++) begin
        for (int j = 0; j < 4; j++) bs[n][32*j +: 32] = $urandom;
        ms[n] = (s == 1) ? 16'hffff : 16'($urandom);
        for (int i = 0; i < 16; i++) if (ms[n][i]) sel.push_back(bs[n][8*i +: 8]);
      end
      // expected stream for this setting
      while (sel.size() > 0) begin
        if (sel.size() < GI[s])
          while (sel.size() > 0) exp_q.push_back(sel.pop_front());   // short last group
        else
          for (int j = 0; j < GO[s]; j++)
            if (j < GI[s]) exp_q.push_back(sel.pop_front());
            else exp_q.push_back(8'h00);
      end
      for (int n = 0; n < 40; n++) begin
        @(negedge clk);
        in_valid = 1'b1; in_beat = bs[n]; in_mask = ms[n];
        while (!in_ready) @(negedge clk);
        @(negedge clk);
        in_valid = 1'b0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
      @(negedge clk); flush = 1'b1;
      while (!empty) @(negedge clk);
      flush = 1'b0;
      @(negedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d bytes missing", exp_q.size()); end
      exp_q.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
