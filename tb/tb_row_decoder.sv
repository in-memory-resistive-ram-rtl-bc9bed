// tb_row_decoder: exhaustive check of the word-line decoder at its default
// size (32 rows): for every address with enable high exactly the addressed
// word line is high, and with enable low none is.
module tb_row_decoder;
  localparam int unsigned ROWS = 32;
  logic            en;
  logic [4:0]      addr;
  logic [ROWS-1:0] wl;
  int checks = 0, failures = 0;

  row_decoder dut (.en, .addr, .wl);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < ROWS; a++) begin
        en = e[0]; addr = a[4:0];
        #1;
        checks++;
        if (wl !== (e ? (32'd1 << a) : 32'd0)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d wl=%h", e, a, wl);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
