// tb_bnn_fc_layer: end-to-end test of the in-memory binarized layer at its
// default size (32 x 32 synapses, no parameter overrides).
//
//  1. Programs random +1/-1 weights into all 32 rows through the memory
//     controller and checks each row takes 2*COLS*PULSE_CYCLES cycles.
//  2. Reads back stored weights through the column-decoder test path.
//  3. Runs layers with 1, 2 and 4 rows per neuron (32, 16 and 8 neurons) on
//     random inputs and thresholds, comparing every output and accumulated
//     popcount with y = sign(popcount(XNOR(w, x)) - b) computed here, and
//     checks the layer latency of neurons*(2*chunks+1) cycles.
//  4. Rejects an over-sized configuration (cfg_err).
//  5. Lets one device of some pairs drift towards the other state (still on
//     its side of its partner) and checks that the differential read is
//     unchanged, then reprograms a row between two inferences.
// Each mechanism is counted and a failure is counted for one that never
// occurred.
module tb_bnn_fc_layer;
  import bnn_pkg::*;
  localparam int unsigned ROWS = 32, COLS = 32, PULSE_CYCLES = 4;

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

  logic [COLS-1:0] W [ROWS];
  logic [COLS-1:0] X [ROWS];
  int              THR [ROWS];

  int checks = 0, failures = 0;
  int n_prog_rows = 0, n_reads = 0, n_single_chunk = 0, n_multi_chunk = 0;
  int n_y_pos = 0, n_y_neg = 0, n_cfg_err = 0, n_drift = 0, n_reprog_infer = 0;

  bnn_fc_layer dut (
    .clk, .rst_n, .prog_valid, .prog_ready, .prog_row, .prog_weights, .prog_busy,
    .thr_we, .thr_addr, .thr_data, .x_we, .x_addr, .x_data,
    .start, .cfg_chunks, .cfg_neurons, .cfg_err, .out_valid, .out_neuron, .out_y,
    .out_acc, .done, .rd_valid, .rd_row, .rd_col, .rd_data_valid, .rd_data, .mode);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic program_row(input int r, input logic [COLS-1:0] w);
    int cycles = 0;
    @(negedge clk);
    prog_valid = 1; prog_row = 5'(r); prog_weights = w;
    while (!prog_ready) @(negedge clk);
    @(negedge clk);
    prog_valid = 0;
    while (prog_busy) begin @(negedge clk); cycles++; end
    check(cycles == 2 * COLS * PULSE_CYCLES,
          $sformatf("program row %0d took %0d cycles", r, cycles));
    W[r] = w;
    n_prog_rows++;
    @(negedge clk);
  endtask

  task automatic read_weight(input int r, input int c);
    int lat = 0;
    @(negedge clk);
    rd_valid = 1; rd_row = 5'(r); rd_col = 5'(c);
    @(negedge clk);
    rd_valid = 0;
    while (!rd_data_valid) begin @(negedge clk); lat++; end
    check(lat == 1, $sformatf("read latency %0d", lat));
    check(rd_data == W[r][c], $sformatf("read w[%0d][%0d]=%b expected %b", r, c, rd_data, W[r][c]));
    n_reads++;
  endtask

  function automatic int ones(input logic [COLS-1:0] v);
    int s = 0;
    for (int i = 0; i < COLS; i++) s += int'(v[i]);
    return s;
  endfunction

  task automatic run_layer(input int chunks, input int neurons);
    int expected_acc [ROWS];
    int got = 0, cycles = 0;
    bit seen_done = 0;
    // Random inputs and thresholds near the expected popcount.
    for (int k = 0; k < chunks; k++) begin
      X[k] = $urandom;
      @(negedge clk); x_we = 1; x_addr = 5'(k); x_data = X[k];
    end
    for (int n = 0; n < neurons; n++) begin
      expected_acc[n] = 0;
      for (int k = 0; k < chunks; k++)
        expected_acc[n] += ones(~(W[n * chunks + k] ^ X[k]));
      THR[n] = expected_acc[n] + int'($urandom % 7) - 3;
      if (THR[n] < 0) THR[n] = 0;
      @(negedge clk); x_we = 0; thr_we = 1; thr_addr = 5'(n); thr_data = 11'(THR[n]);
    end
    @(negedge clk);
    thr_we = 0; x_we = 0;
    start = 1; cfg_chunks = 6'(chunks); cfg_neurons = 6'(neurons);
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!seen_done) begin
      if (out_valid) begin
        check(int'(out_neuron) == got, $sformatf("neuron order %0d/%0d", out_neuron, got));
        check(int'(out_acc) == expected_acc[got],
              $sformatf("acc neuron %0d = %0d expected %0d", got, out_acc, expected_acc[got]));
        check(out_y == (expected_acc[got] >= THR[got]),
              $sformatf("y neuron %0d = %b", got, out_y));
        if (out_y) n_y_pos++; else n_y_neg++;
        check(mode == MODE_INFER, "mode during inference");
        got++;
        seen_done = done;
      end
      @(negedge clk);
      if (!seen_done) cycles++;
    end
    check(got == neurons, $sformatf("outputs %0d/%0d", got, neurons));
    check(cycles == neurons * (2 * chunks + 1),
          $sformatf("layer latency %0d expected %0d", cycles, neurons * (2 * chunks + 1)));
    if (chunks == 1) n_single_chunk++; else n_multi_chunk++;
  endtask

  initial begin
    prog_valid = 0; prog_row = '0; prog_weights = '0;
    thr_we = 0; thr_addr = '0; thr_data = '0;
    x_we = 0; x_addr = '0; x_data = '0;
    start = 0; cfg_chunks = '0; cfg_neurons = '0;
    rd_valid = 0; rd_row = '0; rd_col = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. Program every row.
    for (int r = 0; r < ROWS; r++) program_row(r, $urandom);

    // 2. Test reads.
    for (int i = 0; i < 64; i++) read_weight($urandom % ROWS, $urandom % COLS);

    // 3. Layers.
    run_layer(1, 32);
    run_layer(2, 16);
    run_layer(4, 8);
    run_layer(1, 5);

    // 4. Over-sized configuration is refused.
    @(negedge clk);
    start = 1; cfg_chunks = 6'd3; cfg_neurons = 6'd11;
    #1;
    check(cfg_err == 1'b1, "cfg_err for 33 rows");
    if (cfg_err) n_cfg_err++;
    @(negedge clk);
    start = 0;
    check(mode == MODE_IDLE, "idle after refused start");

    // 5a. Drift of one device per pair, short of crossing its partner.
    for (int i = 0; i < 16; i++) begin
      int r, c;
      r = $urandom % ROWS; c = $urandom % COLS;
      // The HRS device of the pair drifts down to 4x the LRS value.
      if (W[r][c]) dut.u_array.force_dev(r, c, DEV_BLB, res_t'(4 * R_LRS));
      else         dut.u_array.force_dev(r, c, DEV_BL,  res_t'(4 * R_LRS));
      read_weight(r, c);
      n_drift++;
    end
    run_layer(1, 32);

    // 5b. Reprogram one row between inferences.
    program_row(7, $urandom);
    run_layer(2, 16);
    n_reprog_infer++;

    $display("mechanisms: prog_rows=%0d reads=%0d single_chunk_layers=%0d multi_chunk_layers=%0d y_pos=%0d y_neg=%0d cfg_err=%0d drift_reads=%0d reprogram_then_infer=%0d",
             n_prog_rows, n_reads, n_single_chunk, n_multi_chunk, n_y_pos, n_y_neg, n_cfg_err,
             n_drift, n_reprog_infer);
    check(n_prog_rows > 0,    "programming never happened");
    check(n_reads > 0,        "test read never happened");
    check(n_single_chunk > 0, "single-row neurons never ran");
    check(n_multi_chunk > 0,  "multi-row accumulation never ran");
    check(n_y_pos > 0,        "y=+1 never produced");
    check(n_y_neg > 0,        "y=-1 never produced");
    check(n_cfg_err > 0,      "cfg_err never raised");
    check(n_drift > 0,        "drift never exercised");
    check(n_reprog_infer > 0, "reprogram between inferences never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
