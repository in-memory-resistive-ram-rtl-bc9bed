// tb_rram_2t2r_array: programs random device states into the 32 x 32 array
// through its word-line / column-select / pulse ports, keeps a copy in the
// testbench, then selects each row and checks the resistances presented on
// every BL and BLb, and that a deselected array shows high resistance.
module tb_rram_2t2r_array;
  import bnn_pkg::*;
  localparam int unsigned ROWS = 32, COLS = 32;
  logic clk = 0;
  logic [ROWS-1:0] wl;
  logic [COLS-1:0] col_sel;
  logic prog_en, prog_set;
  dev_e prog_dev;
  logic [COLS-1:0][RW-1:0] r_bl, r_blb;
  logic model_bl [ROWS][COLS];
  logic model_blb [ROWS][COLS];
  int checks = 0, failures = 0;

  rram_2t2r_array dut (.clk, .wl, .col_sel, .prog_en, .prog_dev, .prog_set, .r_bl, .r_blb);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = '0; col_sel = '0; prog_en = 0; prog_set = 0; prog_dev = DEV_BL;
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        model_bl[r][c] = 0; model_blb[r][c] = 0;
      end
    // Random programming pulses (1 = LRS in the model copy).
    for (int i = 0; i < 3000; i++) begin
      int r, c;
      r = $urandom % ROWS; c = $urandom % COLS;
      @(negedge clk);
      wl = '0; wl[r] = 1'b1; col_sel = '0; col_sel[c] = 1'b1;
      prog_dev = dev_e'($urandom % 2); prog_set = 1'($urandom);
      prog_en = 1;
      if (prog_dev == DEV_BL) model_bl[r][c] = prog_set;
      else                    model_blb[r][c] = prog_set;
    end
    @(negedge clk); prog_en = 0; col_sel = '0;
    for (int r = 0; r < ROWS; r++) begin
      wl = '0; wl[r] = 1'b1;
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (r_bl[c] !== (model_bl[r][c] ? RW'(R_LRS) : RW'(R_HRS)) ||
            r_blb[c] !== (model_blb[r][c] ? RW'(R_LRS) : RW'(R_HRS))) begin
          failures++; $display("FAIL r=%0d c=%0d bl=%0d blb=%0d", r, c, r_bl[c], r_blb[c]);
        end
      end
    end
    wl = '0; #1;
    checks++;
    if (r_bl[0] !== RW'(R_HRS) || r_blb[COLS-1] !== RW'(R_HRS)) begin
      failures++; $display("FAIL deselected");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
