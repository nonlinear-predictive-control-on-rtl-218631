// fp_add: pipelined IEEE-754 single-precision adder.
//
// Operands are ordered by magnitude, the smaller mantissa is shifted right
// with a sticky bit, the mantissas are added or subtracted, the result is
// renormalised with a leading-zero count and rounded to nearest even. This
// is done in the first stage; the result then passes through LAT-1 further
// registers, so it appears exactly LAT cycles after the operands, with one
// new addition accepted every cycle. A tag travels with each operation.
// Following the paper: single precision and the adder latency of 6 cycles
// assumed in its scheduling figures (the latency that forces two updates of
// the same output element to be at least 6 cycles apart). Own choices:
// subnormals flush to zero, exact cancellation gives +0, infinities saturate.
module fp_add
  import nmpc_pkg::*;
#(
  parameter int unsigned LAT   = LAT_ADD,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fp32_t            a,
  input  fp32_t            b,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fp32_t            y,
  output logic [TAG_W-1:0] out_tag
);

  fp32_t sum;

  always_comb begin
    fp32_t       big, sml;
    logic [7:0]  eb, es, d;
    logic [26:0] mb, ms;     // 1.23 mantissa + guard, round, sticky
    logic [27:0] r;
    logic [4:0]  lz;
    logic [9:0]  e;
    logic [23:0] mant;
    logic        g, st;
    logic [24:0] rnd;
    if (a[30:0] >= b[30:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    eb = big[30:23];
    es = sml[30:23];
    mb = (eb == 0) ? 27'd0 : {1'b1, big[22:0], 3'b000};
    ms = (es == 0) ? 27'd0 : {1'b1, sml[22:0], 3'b000};
    d  = eb - es;
    if (d >= 8'd27) ms = {26'd0, |ms};
    else            ms = (ms >> d) | {26'd0, |(ms & ((27'd1 << d) - 27'd1))};
    if (big[31] == sml[31]) r = {1'b0, mb} + {1'b0, ms};
    else                    r = {1'b0, mb} - {1'b0, ms};
    // leading-zero count of r[27:0]
    lz = 5'd0;
    for (int i = 27; i >= 0; i--) begin
      if (r[i]) begin lz = 5'(27 - i); break; end
    end
    e = {2'b0, eb} + 10'd1 - {5'd0, lz};
    r = r << lz;                           // leading one now at bit 27
    mant = r[27:4];
    g    = r[3];
    st   = |r[2:0];
    rnd  = {1'b0, mant} + {24'd0, (g & (st | mant[0]))};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 10'd1;
    end
    if (eb == 8'hFF)
      sum = {big[31], 8'hFF, 23'd0};
    else if (eb == 8'd0)
      sum = 32'd0;                         // both operands zero / subnormal
    else if (r == 28'd0)
      sum = 32'd0;                         // exact cancellation
    else if (e[9] || e == 10'd0)
      sum = {big[31], 31'd0};
    else if (e >= 10'd255)
      sum = {big[31], 8'hFF, 23'd0};
    else
      sum = {big[31], e[7:0], rnd[22:0]};
  end

  fp32_t            pipe_d [LAT];
  logic             pipe_v [LAT];
  logic [TAG_W-1:0] pipe_t [LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) begin
        pipe_v[i] <= 1'b0;
        pipe_d[i] <= '0;
        pipe_t[i] <= '0;
      end
    end else begin
      pipe_v[0] <= in_valid;
      pipe_d[0] <= sum;
      pipe_t[0] <= in_tag;
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
        pipe_t[i] <= pipe_t[i-1];
      end
    end
  end

  assign out_valid = pipe_v[LAT-1];
  assign y         = pipe_d[LAT-1];
  assign out_tag   = pipe_t[LAT-1];

endmodule
