// ec_maj3_tb - exhaustive check of the EC majority voter: all eight
// combinations of the three carry copies against a count-of-ones reference.
module ec_maj3_tb;
  logic [2:0] c;
  logic       y;
  int checks = 0, failures = 0;

  ec_maj3 dut (.c_copies(c), .c_out(y));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 8; v++) begin
      int ones;
      c = 3'(v);
      #1;
      ones = int'(c[0]) + int'(c[1]) + int'(c[2]);
      checks++;
      if (y !== (ones >= 2)) begin
        failures++;
        $display("FAIL copies=%b got %b", c, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
