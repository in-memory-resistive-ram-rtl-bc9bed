// tb_sign_activation: feeds random sequences of row popcounts into the
// accumulator and checks the sum and y = (sum >= threshold) against a model
// kept in the testbench, including the boundary sum == threshold (y = +1).
module tb_sign_activation;
  logic        clk = 0, rst_n = 0;
  logic        clear, add;
  logic [5:0]  count;
  logic [10:0] threshold, acc;
  logic        y;
  int checks = 0, failures = 0;
  int model;

  sign_activation dut (.clk, .rst_n, .clear, .add, .count, .threshold, .acc, .y);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; add = 0; count = 0; threshold = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int rows;
      @(negedge clk); clear = 1; add = 0;
      @(negedge clk); clear = 0;
      model = 0;
      rows = 1 + ($urandom % 8);
      for (int r = 0; r < rows; r++) begin
        count = 6'($urandom % 33); add = 1;
        model += int'(count);
        @(negedge clk);
      end
      add = 0;
      // Threshold around the sum, hitting equality often.
      threshold = 11'(model + int'($urandom % 5) - 2 < 0 ? 0 : model + int'($urandom % 5) - 2);
      #1;
      checks++;
      if (int'(acc) != model) begin
        failures++; $display("FAIL acc=%0d expected=%0d", acc, model);
      end
      checks++;
      if (y !== (model >= int'(threshold))) begin
        failures++; $display("FAIL y=%b acc=%0d thr=%0d", y, acc, threshold);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
