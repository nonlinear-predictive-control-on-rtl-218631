// tb_fp_divsqrt: checks division and square root against double-precision
// references rounded to single precision (allowing one unit in the last place
// for the rare double-rounding case), special cases x/0 and sqrt(0), and the
// fixed start-to-done latency.
module tb_fp_divsqrt;
  import nmpc_pkg::*;
  import tb_fp_pkg::*;

  localparam int unsigned LATENCY = 29;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, op = 0, busy, done;
  fp32_t a = 0, b = 0, y;
  int checks = 0, failures = 0;
  int unsigned exact = 0;

  fp_divsqrt dut (.*);

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic o, input fp32_t x, input fp32_t z, input fp32_t expv);
    int unsigned n = 0;
    @(negedge clk);
    start = 1; op = o; a = x; b = z;
    @(negedge clk);
    start = 0;
    n = 1;
    while (!done) begin @(negedge clk); n++; end
    checks++;
    if (y[31] != expv[31] || ulp_diff(y, expv) > 1) begin
      failures++;
      if (failures < 10) $display("op %0d a=%h b=%h got %h exp %h", o, x, z, y, expv);
    end
    if (y == expv) exact++;
    checks++;
    if (n != LATENCY) begin
      failures++;
      if (failures < 10) $display("latency %0d", n);
    end
  endtask

  initial begin
    fp32_t x, z;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(1'b0, 32'h40C00000, 32'h40000000, 32'h40400000);   // 6 / 2 = 3
    run(1'b1, 32'h41100000, 32'h0, 32'h40400000);          // sqrt 9 = 3
    run(1'b1, 32'h40000000, 32'h0, 32'h3FB504F3);          // sqrt 2
    run(1'b0, FP_ONE, 32'h0, 32'h7F800000);                // 1/0 = inf
    run(1'b1, 32'h0, 32'h0, 32'h0);                        // sqrt 0 = 0
    for (int n = 0; n < 1500; n++) begin
      x = rand_fp(40); z = rand_fp(40);
      run(1'b0, x, z, r2f(f2r(x) / f2r(z)));
      x[31] = 1'b0;
      run(1'b1, x, z, r2f($sqrt(f2r(x))));
    end
    checks++;
    if (exact < 2900) begin failures++; $display("only %0d exact", exact); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
