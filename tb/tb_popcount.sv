// tb_popcount: compares the 32-input popcount with a bit-by-bit count done in
// the testbench, on all-zero, all-one, single-bit and random inputs.
module tb_popcount;
  logic [31:0] bits;
  logic [5:0]  count;
  int checks = 0, failures = 0;

  popcount dut (.bits, .count);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] v);
    int ref_cnt = 0;
    bits = v;
    #1;
    for (int i = 0; i < 32; i++) if (v[i]) ref_cnt++;
    checks++;
    if (int'(count) != ref_cnt) begin
      failures++; $display("FAIL bits=%h count=%0d expected=%0d", v, count, ref_cnt);
    end
  endtask

  initial begin
    check('0);
    check('1);
    for (int i = 0; i < 32; i++) check(32'd1 << i);
    for (int i = 0; i < 500; i++) check($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
