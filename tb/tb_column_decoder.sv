// tb_column_decoder: for every column address and random sense-amplifier
// outputs, checks that "out" is the addressed output and col_sel is one-hot
// on the addressed column.
module tb_column_decoder;
  localparam int unsigned COLS = 32;
  logic [4:0]      addr;
  logic [COLS-1:0] outs;
  logic            out;
  logic [COLS-1:0] col_sel;
  int checks = 0, failures = 0;

  column_decoder dut (.addr, .outs, .out, .col_sel);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int rep = 0; rep < 8; rep++)
      for (int a = 0; a < COLS; a++) begin
        outs = $urandom; addr = a[4:0];
        #1;
        checks++;
        if (out !== ((outs >> a) & 1)) begin
          failures++; $display("FAIL out addr=%0d outs=%h out=%b", a, outs, out);
        end
        checks++;
        if (col_sel !== (32'd1 << a)) begin
          failures++; $display("FAIL col_sel addr=%0d %h", a, col_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
