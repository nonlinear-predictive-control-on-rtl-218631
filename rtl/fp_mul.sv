// fp_mul: pipelined IEEE-754 single-precision multiplier.
//
// The product is formed in the first stage (24x24-bit mantissa product,
// normalisation by at most one place, round to nearest even) and then passes
// through LAT-1 further registers, so a result appears exactly LAT cycles
// after its operands, one new operation accepted every cycle.
// Interface: in_valid/a/b in, out_valid/y out, with a tag that travels with
// the data so callers can route results.
// Following the paper: single precision and the multiplier latency of 5
// cycles assumed in its scheduling figures. Own choices: subnormal inputs and
// results are flushed to zero, overflow gives infinity, NaN inputs are not
// propagated specially (they are treated like infinities).
module fp_mul
  import nmpc_pkg::*;
#(
  parameter int unsigned LAT   = LAT_MUL,
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

  fp32_t prod;

  always_comb begin
    logic        s;
    logic [9:0]  e;        // signed-ish biased exponent with headroom
    logic [47:0] m;
    logic [23:0] mant;
    logic        g, st;
    logic [24:0] rnd;
    s = a[31] ^ b[31];
    m = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (m[47]) begin
      mant = m[47:24]; g = m[23]; st = |m[22:0];
      e = {2'b0, a[30:23]} + {2'b0, b[30:23]} - 10'd126;
    end else begin
      mant = m[46:23]; g = m[22]; st = |m[21:0];
      e = {2'b0, a[30:23]} + {2'b0, b[30:23]} - 10'd127;
    end
    rnd = {1'b0, mant} + {24'd0, (g & (st | mant[0]))};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e   = e + 10'd1;
    end
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0)
      prod = {s, 31'd0};
    else if (a[30:23] == 8'hFF || b[30:23] == 8'hFF)
      prod = {s, 8'hFF, 23'd0};
    else if (e[9] || e == 10'd0)          // underflow (negative or zero exponent)
      prod = {s, 31'd0};
    else if (e >= 10'd255)
      prod = {s, 8'hFF, 23'd0};
    else
      prod = {s, e[7:0], rnd[22:0]};
  end

  // Delay line: stage 0 captures the product, LAT-1 more stages follow.
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
      pipe_d[0] <= prod;
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
