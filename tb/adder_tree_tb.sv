// adder_tree_tb - streams random input sets into a 16-input tree, one set per
// cycle with gaps, and checks every sum and its latency of log2(16) = 4 cycles
// against a reference computed in the testbench.
module adder_tree_tb;
  localparam int N = 16, W = 10, LAT = 4, OW = W + LAT, SETS = 40;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [W-1:0]  in_data [N];
  logic [OW-1:0] out_sum;
  int checks = 0, failures = 0;
  int exp_sum [$];
  int exp_cyc [$];
  int cyc = 0;

  adder_tree #(.N_IN(N), .IN_W(W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (exp_sum.size() == 0) begin
      failures++;
      $display("FAIL unexpected output");
    end else begin
      int e, c;
      e = exp_sum.pop_front();
      c = exp_cyc.pop_front();
      if (int'(out_sum) != e || cyc != c + LAT) begin
        failures++;
        $display("FAIL sum %0d exp %0d at cycle %0d exp %0d", out_sum, e, cyc, c + LAT);
      end
    end
  end

  initial begin
    foreach (in_data[i]) in_data[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int s = 0; s < SETS; s++) begin
      int tot;
      tot = 0;
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) begin
        in_data[i] = (s == 0) ? W'((1 << W) - 1) : W'($urandom);
        tot += int'(in_data[i]);
      end
      exp_sum.push_back(tot);
      exp_cyc.push_back(cyc + 1);
      if (s % 7 == 3) begin
        @(negedge clk);
        in_valid = 0;
      end
    end
    @(negedge clk);
    in_valid = 0;
    repeat (LAT + 3) @(posedge clk);
    checks++;
    if (exp_sum.size() != 0) begin
      failures++;
      $display("FAIL %0d sums never came out", exp_sum.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
