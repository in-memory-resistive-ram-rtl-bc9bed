// tb_memory_controller: sends row-programming requests with random weights and
// watches the controller's pulse outputs. Every pulse must address the
// requested row, visit the columns in order with the BL device then the BLb
// device, SET the BL device and RESET the BLb device for +1 (the reverse for
// -1), and each pulse must hold its address PULSE_CYCLES cycles. A row must
// take exactly 2*COLS*PULSE_CYCLES cycles from the handshake to ready.
module tb_memory_controller;
  import bnn_pkg::*;
  localparam int unsigned ROWS = 32, COLS = 32, PULSE_CYCLES = 4;
  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, busy, row_en, prog_en, prog_set;
  logic [4:0] req_row, row_addr, col_addr;
  logic [COLS-1:0] req_weights;
  dev_e prog_dev;
  int checks = 0, failures = 0;

  memory_controller dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_row, .req_weights, .busy,
    .row_en, .row_addr, .col_addr, .prog_en, .prog_dev, .prog_set);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_valid = 0; req_row = '0; req_weights = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      logic [4:0]      row;
      logic [COLS-1:0] w;
      int pulses, cycles, hold;
      logic [4:0] last_col;
      dev_e last_dev;
      row = 5'($urandom); w = $urandom;
      @(negedge clk);
      checks++;
      if (!req_ready) begin failures++; $display("FAIL not ready"); end
      req_valid = 1; req_row = row; req_weights = w;
      @(negedge clk);
      req_valid = 0; req_weights = ~w; req_row = ~row;  // must have been captured
      pulses = 0; cycles = 1; hold = 0;
      last_col = '0; last_dev = DEV_BL;
      while (!req_ready) begin
        hold++;
        if (hold > 1 && (col_addr !== last_col || prog_dev !== last_dev)) begin
          failures++; $display("FAIL address moved within a pulse");
        end
        last_col = col_addr; last_dev = prog_dev;
        if (!row_en || row_addr !== row) begin
          failures++; $display("FAIL row %0d/%0d", row_addr, row);
        end
        if (prog_en) begin
          int c;
          logic exp_set;
          dev_e exp_dev;
          c = pulses / 2;
          exp_dev = (pulses % 2 == 0) ? DEV_BL : DEV_BLB;
          exp_set = (exp_dev == DEV_BL) ? w[c] : !w[c];
          checks++;
          if (hold != PULSE_CYCLES || int'(col_addr) != c || prog_dev !== exp_dev ||
              prog_set !== exp_set) begin
            failures++;
            $display("FAIL pulse %0d: hold=%0d col=%0d dev=%0d set=%b", pulses, hold,
                     col_addr, prog_dev, prog_set);
          end
          pulses++; hold = 0;
        end
        @(negedge clk);
        cycles++;
      end
      checks++;
      if (pulses != 2 * COLS || cycles != 2 * COLS * PULSE_CYCLES + 1) begin
        failures++; $display("FAIL pulses=%0d cycles=%0d", pulses, cycles);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
