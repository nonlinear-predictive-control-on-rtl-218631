// tb_fp_mul: checks fp_mul against a double-precision reference product
// rounded to single precision (exact, since a 24x24-bit product fits a double),
// including zero operands, back-to-back issue and the 5-cycle latency.
module tb_fp_mul;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = 5;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, out_valid;
  fp32_t a = 0, b = 0, y;
  logic [7:0] in_tag = 0, out_tag;
  int checks = 0, failures = 0;
  fp32_t exp_q [256];
  int unsigned issue_cyc [256];
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  fp_mul #(.LAT(LAT), .TAG_W(8)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (out_valid) begin
    checks++;
    if (y !== exp_q[out_tag]) begin
      failures++;
      if (failures < 10) $display("mul mismatch tag %0d: got %h exp %h", out_tag, y, exp_q[out_tag]);
    end
    checks++;
    if (cyc - issue_cyc[out_tag] != LAT) begin
      failures++;
      $display("latency %0d", cyc - issue_cyc[out_tag]);
    end
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      a = rand_fp(20); b = rand_fp(20);
      if (n % 97 == 0) a = 32'h0;
      if (n % 89 == 0) b = {1'b1, 31'h0};
      if (n == 5) begin a = FP_ONE; b = 32'h40490FDB; end
      in_tag = 8'(n);
      exp_q[in_tag] = r2f(f2r(a) * f2r(b));
      if (exp_q[in_tag][30:0] == 0) exp_q[in_tag] = {a[31] ^ b[31], 31'd0};
      issue_cyc[in_tag] = cyc;
      in_valid = (n % 7 != 3);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
