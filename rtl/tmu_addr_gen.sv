// tmu_addr_gen -- address generator implementing the unified address abstraction.
//
// For every beat of a coarse-grained (or element-wise, or assembled
// fine-grained) output stream it maps the input position (x_i, y_i, c_i) to an
// output address:
//
//     (x_o, y_o, c_o) = ((A * (x_i, y_i, c_i)) >>> shr) + B          (per row)
//     addr_out        = addr_base + x_o * c_stride + y_o * c_stride + c_o * 16
//
// A (3x3, signed) and B come from the configuration registers, so one datapath
// serves Transpose, Rot90, Img2col, PixelShuffle/Unshuffle, Upsample,
// Route/Split and Add. Matrix rows whose entries are fractions in the paper
// (1/x_s, 1/s) are expressed with a per-row arithmetic right shift, which
// restricts those divisors to powers of two. y_o already carries the row
// stride (Table II puts w_i in the y_o row), so x_o and y_o are both scaled by
// the pixel stride c_stride; c_o counts 16-byte channel blocks.
//
// Three pipeline stages, as in the paper's figure: (1) the nine products of
// A's rows with the index vector, (2) row sums plus B form the vector C and
// its x_o and y_o parts are multiplied by the pixel stride, (3) post-addition
// with addr_base. A tag (the data beat and strobe) travels with each index, so
// out_valid/out_addr/out_tag appear exactly 3 cycles after in_valid. The
// pipeline never stalls; the caller reserves room downstream.
//
// Follows the paper: Eq. 1's structure, the 3-stage split, two multipliers
// for x_o and y_o before the final adders. Own choices: the c_stride and the
// "+ c_o * 16" reading of Eq. 1 (taken literally, Eq. 1 multiplies by c_o and
// would give every beat of channel block 0 the base address), the shifts,
// and all widths.
module tmu_addr_gen
  import tmu_pkg::*;
#(
  parameter int TAG_W = BUS_W + BUS_BYTES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] xi,
  input  logic [IDX_W-1:0] yi,
  input  logic [IDX_W-1:0] ci,
  input  logic [TAG_W-1:0] in_tag,
  input  coef_t [2:0][2:0] a,
  input  logic  [2:0][3:0] a_shr,
  input  ofs_t  [2:0]      b,
  input  logic [IDX_W-1:0] c_stride,
  input  addr_t            addr_base,
  output logic             out_valid,
  output addr_t            out_addr,
  output logic [TAG_W-1:0] out_tag,
  output logic [1:0]       inflight      // beats in stages 1..2 (stage 3 is out_valid)
);
  localparam int PW = COEF_W + IDX_W + 1;   // signed product width
  localparam int CW = 48;                   // width of the C vector

  // stage 1: products
  logic                    v1;
  logic signed [PW-1:0]    p1 [3][3];
  logic [TAG_W-1:0]        t1;
  // stage 2: C vector and stride products
  logic                    v2;
  addr_t                   xs2, ys2;      // low address bits of x_o*c_stride, y_o*c_stride
  logic signed [CW-1:0]    co2;
  logic [TAG_W-1:0]        t2;

  logic signed [IDX_W:0] idx [3];
  assign idx[0] = signed'({1'b0, xi});
  assign idx[1] = signed'({1'b0, yi});
  assign idx[2] = signed'({1'b0, ci});

  // row sums, shifts and B (combinational between stage 1 and stage 2)
  logic signed [CW-1:0] c_vec [3];
  always_comb begin
    for (int r = 0; r < 3; r++) begin
      logic signed [CW-1:0] s;
      s = CW'(p1[r][0]) + CW'(p1[r][1]) + CW'(p1[r][2]);
      c_vec[r] = (s >>> a_shr[r]) + CW'(b[r]);
    end
  end

  logic signed [IDX_W:0] cs;
  assign cs = signed'({1'b0, c_stride});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end

  always_ff @(posedge clk) begin
    for (int r = 0; r < 3; r++)
      for (int c = 0; c < 3; c++)
        p1[r][c] <= PW'(a[r][c] * idx[c]);
    t1  <= in_tag;
    xs2 <= ADDR_W'(c_vec[0] * cs);
    ys2 <= ADDR_W'(c_vec[1] * cs);
    co2 <= c_vec[2];
    t2  <= t1;
    out_addr <= addr_base + xs2 + ys2 + ADDR_W'(co2 * BUS_BYTES);
    out_tag  <= t2;
  end

  assign inflight = 2'(v1) + 2'(v2);
endmodule
