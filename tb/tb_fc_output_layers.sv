// tb_fc_output_layers: runs the binarized output layers of the two
// medical-signal classifiers on the default 32 x 32 layer: the EEG
// motor-imagery classifier's 80 -> 2 layer and the ECG electrode-inversion
// classifier's 75 -> 2 layer, with random weights, inputs and thresholds
// (the trained weights are not available).
//
// Mapping: a neuron with N inputs occupies ceil(N/32) consecutive rows.
// Unused positions in the last row hold weight +1 and input +1, so each adds
// exactly 1 to the popcount; the threshold written to the layer is the
// neuron's threshold plus the number of padding positions. The expected
// result y = sign(popcount(XNOR(w, x)) - b) over the real N inputs is
// computed here and compared with the layer's output.
module tb_fc_output_layers;
  import bnn_pkg::*;
  localparam int unsigned ROWS = 32, COLS = 32;

  logic clk = 0, rst_n = 0;
  logic prog_valid, prog_ready, prog_busy;
  logic [4:0] prog_row;
  logic [COLS-1:0] prog_weights;
  logic thr_we, x_we;
  logic [4:0] thr_addr, x_addr;
  logic [10:0] thr_data;
  logic [COLS-1:0] x_data;
  logic start, cfg_err, out_valid, out_y, done;
  logic [5:0] cfg_chunks, cfg_neurons;
  logic [4:0] out_neuron;
  logic [10:0] out_acc;
  logic rd_valid, rd_data_valid, rd_data;
  logic [4:0] rd_row, rd_col;
  mode_e mode;

  int checks = 0, failures = 0;

  bnn_fc_layer dut (
    .clk, .rst_n, .prog_valid, .prog_ready, .prog_row, .prog_weights, .prog_busy,
    .thr_we, .thr_addr, .thr_data, .x_we, .x_addr, .x_data,
    .start, .cfg_chunks, .cfg_neurons, .cfg_err, .out_valid, .out_neuron, .out_y,
    .out_acc, .done, .rd_valid, .rd_row, .rd_col, .rd_data_valid, .rd_data, .mode);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic program_row(input int r, input logic [COLS-1:0] w);
    @(negedge clk);
    prog_valid = 1; prog_row = 5'(r); prog_weights = w;
    while (!prog_ready) @(negedge clk);
    @(negedge clk);
    prog_valid = 0;
    while (prog_busy) @(negedge clk);
  endtask

  // One layer of n_in inputs and n_out neurons, several random trials.
  task automatic run_layer(input string name, input int n_in, input int n_out, input int trials);
    int chunks, pad;
    logic w [][];
    logic x [];
    int   b [];
    chunks = (n_in + COLS - 1) / COLS;
    pad    = chunks * COLS - n_in;
    w = new[n_out];
    b = new[n_out];
    x = new[n_in];
    for (int n = 0; n < n_out; n++) begin
      w[n] = new[n_in];
      for (int i = 0; i < n_in; i++) w[n][i] = 1'($urandom);
    end
    // Program: row n*chunks+k holds inputs k*32 .. k*32+31 of neuron n.
    for (int n = 0; n < n_out; n++)
      for (int k = 0; k < chunks; k++) begin
        logic [COLS-1:0] rowv;
        for (int j = 0; j < COLS; j++) begin
          int i = k * COLS + j;
          rowv[j] = (i < n_in) ? w[n][i] : 1'b1;
        end
        program_row(n * chunks + k, rowv);
      end
    for (int t = 0; t < trials; t++) begin
      int pc [];
      int got = 0;
      pc = new[n_out];
      for (int i = 0; i < n_in; i++) x[i] = 1'($urandom);
      for (int k = 0; k < chunks; k++) begin
        logic [COLS-1:0] xv;
        for (int j = 0; j < COLS; j++) begin
          int i = k * COLS + j;
          xv[j] = (i < n_in) ? x[i] : 1'b1;
        end
        @(negedge clk); x_we = 1; x_addr = 5'(k); x_data = xv;
      end
      for (int n = 0; n < n_out; n++) begin
        pc[n] = 0;
        for (int i = 0; i < n_in; i++) pc[n] += int'(!(w[n][i] ^ x[i]));
        b[n] = pc[n] + int'($urandom % 9) - 4;
        if (b[n] < 0) b[n] = 0;
        @(negedge clk); x_we = 0; thr_we = 1; thr_addr = 5'(n); thr_data = 11'(b[n] + pad);
      end
      @(negedge clk);
      thr_we = 0; x_we = 0;
      start = 1; cfg_chunks = 6'(chunks); cfg_neurons = 6'(n_out);
      @(negedge clk);
      start = 0;
      forever begin
        if (out_valid) begin
          check(int'(out_acc) - pad == pc[got],
                $sformatf("%s neuron %0d popcount %0d expected %0d", name, got, int'(out_acc) - pad, pc[got]));
          check(out_y == (pc[got] >= b[got]), $sformatf("%s neuron %0d y=%b", name, got, out_y));
          got++;
          if (done) break;
        end
        @(negedge clk);
      end
      check(got == n_out, $sformatf("%s outputs %0d", name, got));
    end
    $display("%s: %0d inputs, %0d neurons, %0d rows, %0d trials done", name, n_in, n_out,
             n_out * chunks, trials);
  endtask

  initial begin
    prog_valid = 0; prog_row = '0; prog_weights = '0;
    thr_we = 0; thr_addr = '0; thr_data = '0;
    x_we = 0; x_addr = '0; x_data = '0;
    start = 0; cfg_chunks = '0; cfg_neurons = '0;
    rd_valid = 0; rd_row = '0; rd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer("EEG FC80->2", 80, 2, 50);
    run_layer("ECG FC75->2", 75, 2, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
