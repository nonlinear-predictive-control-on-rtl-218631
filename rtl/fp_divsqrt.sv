// fp_divsqrt: iterative IEEE-754 single-precision divider and square root.
//
// MINRES needs only two divisions and two square roots per iteration, so one
// small sequential unit serves both. Division runs a restoring radix-2
// recurrence over the 24-bit mantissas, producing 27 quotient bits (with a
// sticky remainder bit); square root runs the bit-by-bit restoring integer
// square-root recurrence over a 54-bit radicand, producing 27 root bits.
// Both round to nearest even.
// Interface: pulse start with op (0 = a/b, 1 = sqrt(a)) while busy is low;
// done pulses for one cycle, with the result on y, 29 cycles after the
// cycle in which start was sampled (27 recurrence cycles, one rounding cycle,
// one output register).
// Following the paper: single precision, and that these scalar operations
// are few and need no acceleration. Own choices: the algorithms, flush of
// subnormals to zero, sqrt of a negative number returning 0, x/0 returning
// infinity.
module fp_divsqrt
  import nmpc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  input  logic  op,        // 0: divide, 1: square root
  input  fp32_t a,
  input  fp32_t b,
  output logic  busy,
  output logic  done,
  output fp32_t y
);

  localparam int unsigned NBITS = 27;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_t;
  state_t state;

  logic        op_q, sign_q, special_q;
  fp32_t       special_y;
  logic [9:0]  exp_q;
  logic [4:0]  cnt;
  logic [55:0] rem;       // remainder (div) / partial remainder (sqrt)
  logic [53:0] rad;       // radicand bits still to bring in (sqrt)
  logic [26:0] quo;       // quotient / root bits
  logic [23:0] divisor;

  // result assembly
  fp32_t res;
  always_comb begin
    logic [26:0] q;
    logic [9:0]  e;
    logic [23:0] mant;
    logic        g, st;
    logic [24:0] rnd;
    q = quo;
    e = exp_q;
    st = (rem != 0);
    if (q[26]) begin
      mant = q[26:3]; g = q[2]; st = st | (|q[1:0]);
    end else begin
      mant = q[25:2]; g = q[1]; st = st | q[0];
      e = e - 10'd1;
    end
    rnd = {1'b0, mant} + {24'd0, (g & (st | mant[0]))};
    if (rnd[24]) begin
      rnd = rnd >> 1;
      e = e + 10'd1;
    end
    if (special_q)                 res = special_y;
    else if (e[9] || e == 10'd0)   res = {sign_q, 31'd0};
    else if (e >= 10'd255)         res = {sign_q, 8'hFF, 23'd0};
    else                           res = {sign_q, e[7:0], rnd[22:0]};
  end

  logic [55:0] trial, r2;
  assign r2    = {rem[53:0], rad[53:52]};
  assign trial = {27'd0, quo, 2'b01};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; op_q <= 1'b0; sign_q <= 1'b0; special_q <= 1'b0;
      special_y <= '0; exp_q <= '0; cnt <= '0; rem <= '0; rad <= '0;
      quo <= '0; divisor <= '0; y <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          op_q <= op;
          quo  <= '0;
          cnt  <= 5'(NBITS);
          state <= S_RUN;
          special_q <= 1'b0;
          if (!op) begin
            // a / b : value = 1.ma / 1.mb * 2^(ea-eb); quotient in (0.5, 2)
            sign_q  <= a[31] ^ b[31];
            exp_q   <= {2'b0, a[30:23]} - {2'b0, b[30:23]} + 10'd127;
            rem     <= {32'd0, 1'b1, a[22:0]};
            divisor <= {1'b1, b[22:0]};
            if (a[30:23] == 8'd0) begin
              special_q <= 1'b1; special_y <= {a[31] ^ b[31], 31'd0};
            end else if (b[30:23] == 8'd0 || a[30:23] == 8'hFF) begin
              special_q <= 1'b1; special_y <= {a[31] ^ b[31], 8'hFF, 23'd0};
            end else if (b[30:23] == 8'hFF) begin
              special_q <= 1'b1; special_y <= {a[31] ^ b[31], 31'd0};
            end
          end else begin
            // sqrt(a): make the exponent even, radicand m * 2^29 (m has 23 fraction bits)
            sign_q <= 1'b0;
            rem    <= '0;
            if (a[23]) begin   // biased exponent odd -> unbiased exponent even
              exp_q <= ({2'b0, a[30:23]} + 10'd127) >> 1;
              rad   <= {1'b0, 1'b1, a[22:0], 29'd0};
            end else begin
              exp_q <= ({2'b0, a[30:23]} + 10'd126) >> 1;
              rad   <= {1'b1, a[22:0], 1'b0, 29'd0};
            end
            if (a[30:23] == 8'd0 || a[31]) begin
              special_q <= 1'b1; special_y <= 32'd0;
            end else if (a[30:23] == 8'hFF) begin
              special_q <= 1'b1; special_y <= {1'b0, 8'hFF, 23'd0};
            end
          end
        end
        S_RUN: begin
          if (!op_q) begin
            // restoring division step
            if (rem[24:0] >= {1'b0, divisor}) begin
              quo <= {quo[25:0], 1'b1};
              rem <= {30'd0, (rem[24:0] - {1'b0, divisor}), 1'b0};
            end else begin
              quo <= {quo[25:0], 1'b0};
              rem <= {30'd0, rem[24:0], 1'b0};
            end
          end else begin
            // restoring square-root step: bring in two radicand bits
            if (r2 >= trial) begin
              rem <= r2 - trial;
              quo <= {quo[25:0], 1'b1};
            end else begin
              rem <= r2;
              quo <= {quo[25:0], 1'b0};
            end
            rad <= {rad[51:0], 2'b00};
          end
          cnt <= cnt - 5'd1;
          if (cnt == 5'd1) state <= S_DONE;
        end
        S_DONE: begin
          y <= res;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) done <= 1'b0;
    else        done <= (state == S_DONE);

endmodule
