// tmu_assembler -- assemble register of the RME ("Shift & Assemble").
//
// Packs the bytes of incoming beats that are selected by a byte mask into a
// continuous output datastream of full 16-byte beats. Selected bytes keep
// their order (lowest byte lane first) and are appended to a byte queue; from
// there they are moved in groups of grp_in bytes, each group followed by
// (grp_out - grp_in) zero bytes, into the assemble register, which emits a
// beat whenever it holds 16 bytes. With grp_in = grp_out the stream is only
// compacted (e.g. picking a sub-set of channels); with grp_in = 3 and
// grp_out = 16 RGB pixels become zero-padded 16-channel pixels (Rearrange).
// flush pushes out what is left: a last short group (its bytes only, without
// padding), then a last partial beat with out_strb marking its valid bytes.
//
// Follows the paper: byte masking register, selected bytes "assembled into a
// new datastream in the assemble register". Own choices: the group/zero-pad
// rule, the two 32-byte queues and the flush behaviour.
//
// Interface: in_valid/in_ready and out_valid/out_ready are valid/ready
// handshakes. One input beat per cycle while the byte queue holds at most 16
// bytes; at most one group per cycle moves to the assemble register. Requires
// 1 <= grp_in <= grp_out <= 16.
module tmu_assembler
  import tmu_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       in_valid,
  output logic       in_ready,
  input  beat_t      in_beat,
  input  strb_t      in_mask,
  input  logic [4:0] grp_in,
  input  logic [4:0] grp_out,
  input  logic       flush,
  output logic       empty,
  output logic       out_valid,
  input  logic       out_ready,
  output beat_t      out_beat,
  output strb_t      out_strb
);
  localparam int QB = 2 * BUS_BYTES;

  logic [QB-1:0][7:0] q, q_n, o, o_n;
  logic [5:0]         qcnt, qcnt_n, ocnt, ocnt_n;

  logic       grp_fire, in_fire, out_fire;
  logic [5:0] take;    // bytes taken from the queue for this group
  logic [5:0] gi, go;
  logic [5:0] add;     // bytes appended to the assemble register for this group

  assign gi = 6'(grp_in);
  assign go = 6'(grp_out);

  assign in_ready  = (qcnt <= 6'(BUS_BYTES)) && !flush;
  assign in_fire   = in_valid && in_ready;
  assign out_valid = (ocnt >= 6'(BUS_BYTES)) || (flush && qcnt == 0 && ocnt != 0);
  assign out_fire  = out_valid && out_ready;
  assign empty     = (qcnt == 0) && (ocnt == 0);

  always_comb begin
    logic [5:0] room;
    take = (qcnt >= gi) ? gi : qcnt;
    add  = (take < gi) ? take : go;
    room = out_fire ? (6'(QB) - ocnt + 6'(BUS_BYTES)) : (6'(QB) - ocnt);
    grp_fire = ((qcnt >= gi) || (flush && qcnt != 0)) && (room >= go);
  end

  always_comb begin
    logic [5:0] k;
    k = '0;
    q_n = q; qcnt_n = qcnt; o_n = o; ocnt_n = ocnt;
    // assemble register: emit, then append a group
    if (out_fire) begin
      for (int i = 0; i < QB; i++) o_n[i] = (i + BUS_BYTES < QB) ? o[i + BUS_BYTES] : 8'h00;
      ocnt_n = (ocnt >= 6'(BUS_BYTES)) ? ocnt - 6'(BUS_BYTES) : 6'd0;
    end
    if (grp_fire) begin
      for (int j = 0; j < BUS_BYTES; j++)
        if (6'(j) < add && int'(ocnt_n) + j < QB)
          o_n[int'(ocnt_n) + j] = (6'(j) < take) ? q[j] : 8'h00;
      ocnt_n = ocnt_n + add;
      for (int i = 0; i < QB; i++) q_n[i] = (i + int'(take) < QB) ? q[i + int'(take)] : 8'h00;
      qcnt_n = qcnt - take;
    end
    // byte queue: append the selected bytes of the input beat
    if (in_fire) begin
      k = qcnt_n;
      for (int i = 0; i < BUS_BYTES; i++)
        if (in_mask[i]) begin
          if (int'(k) < QB) q_n[k] = in_beat[8*i +: 8];
          k = k + 1'b1;
        end
      qcnt_n = k;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= '0; o <= '0; qcnt <= '0; ocnt <= '0;
    end else if (clear) begin
      q <= '0; o <= '0; qcnt <= '0; ocnt <= '0;
    end else begin
      q <= q_n; o <= o_n; qcnt <= qcnt_n; ocnt <= ocnt_n;
    end
  end

  always_comb begin
    out_beat = o[BUS_BYTES-1:0];
    for (int i = 0; i < BUS_BYTES; i++) out_strb[i] = (6'(i) < ocnt);
  end
endmodule
