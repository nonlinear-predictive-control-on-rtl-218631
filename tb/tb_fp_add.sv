// tb_fp_add: checks fp_add against a double-precision reference sum rounded to
// single precision. Exponents are kept within 20 of each other, so the double
// sum is exact and the rounded value is the correctly rounded single result.
// Covers cancellation, opposite signs, zero operands and the 6-cycle latency.
module tb_fp_add;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LAT = 6;
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

  fp_add #(.LAT(LAT), .TAG_W(8)) dut (.*);

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
      if (failures < 10) $display("add mismatch tag %0d: got %h exp %h", out_tag, y, exp_q[out_tag]);
    end
    checks++;
    if (cyc - issue_cyc[out_tag] != LAT) failures++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      a = rand_fp(10); b = rand_fp(10);
      if (n % 50 == 0) b = {~a[31], a[30:0]};          // exact cancellation
      if (n % 31 == 0) b = {~a[31], a[30:2], 2'b00};   // near cancellation
      if (n % 97 == 0) a = 32'h0;
      in_tag = 8'(n);
      exp_q[in_tag] = r2f(f2r(a) + f2r(b));
      if (exp_q[in_tag][30:0] == 0) exp_q[in_tag] = 0;
      issue_cyc[in_tag] = cyc;
      in_valid = (n % 5 != 2);
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
