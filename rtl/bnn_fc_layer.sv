// bnn_fc_layer: one fully connected binarized neural-network layer computed
// inside a 2T2R resistive memory array.
//
// Weights (+1/-1) live in the ROWS x COLS array, one bit per 2T2R synapse.
// Inference reads one row at a time: the row decoder raises that row's word
// line, every column's precharge sense amplifier receives the input bit x_j
// and produces XNOR(w_j, x_j) directly, the popcount unit counts the ones, and
// the sign unit compares the count with the neuron's learned threshold b:
// y = sign(popcount - b). Only the binary result leaves the array, so weights
// never move. Before inference the memory controller programs the weights
// (one SET and one RESET pulse per synapse). A test read path returns a
// single stored weight through the column decoder, as on the test chip.
//
// Mapping of a layer (this design's choice): neuron n with CHUNKS*COLS inputs
// occupies rows n*CHUNKS .. n*CHUNKS+CHUNKS-1, and its row popcounts are
// summed before the threshold. Input chunk k (COLS bits) is written to the
// input buffer at x_addr=k, threshold of neuron n at thr_addr=n. With
// CHUNKS=1 this is the plain one-neuron-per-row layout.
//
// Interface and timing (all choices of this design):
//  * prog_valid/prog_ready: program row prog_row with prog_weights
//    (2*COLS*PULSE_CYCLES cycles, prog_busy high meanwhile).
//  * start with cfg_chunks, cfg_neurons (1 <= chunks*neurons <= ROWS, else
//    cfg_err pulses and nothing starts): per neuron, each row costs a
//    precharge cycle (sen low) and a sense cycle (sen high), then one output
//    cycle with out_valid; so a layer takes neurons*(2*chunks+1) cycles and
//    done pulses with the last output.
//  * rd_valid with rd_row/rd_col: after a precharge and a sense cycle
//    rd_data_valid is high for one cycle with the stored weight on rd_data.
//  * start, prog_valid and rd_valid are taken only when idle, in that order
//    of priority. Asynchronous active-low reset.
module bnn_fc_layer
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS         = bnn_pkg::DEF_ROWS,
  parameter int unsigned COLS         = bnn_pkg::DEF_COLS,
  parameter int unsigned PULSE_CYCLES = 4,
  localparam int unsigned RAW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW   = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned NW    = $clog2(ROWS + 1),
  localparam int unsigned CNT_W = $clog2(COLS + 1),
  localparam int unsigned ACC_W = $clog2(ROWS * COLS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  // Weight programming.
  input  logic             prog_valid,
  output logic             prog_ready,
  input  logic [RAW-1:0]   prog_row,
  input  logic [COLS-1:0]  prog_weights,
  output logic             prog_busy,
  // Threshold and input-buffer writes.
  input  logic             thr_we,
  input  logic [RAW-1:0]   thr_addr,
  input  logic [ACC_W-1:0] thr_data,
  input  logic             x_we,
  input  logic [RAW-1:0]   x_addr,
  input  logic [COLS-1:0]  x_data,
  // Inference.
  input  logic             start,
  input  logic [NW-1:0]    cfg_chunks,
  input  logic [NW-1:0]    cfg_neurons,
  output logic             cfg_err,
  output logic             out_valid,
  output logic [RAW-1:0]   out_neuron,
  output logic             out_y,
  output logic [ACC_W-1:0] out_acc,
  output logic             done,
  // Test read of one stored weight.
  input  logic             rd_valid,
  input  logic [RAW-1:0]   rd_row,
  input  logic [CAW-1:0]   rd_col,
  output logic             rd_data_valid,
  output logic             rd_data,
  // Status.
  output mode_e            mode
);

  typedef enum logic [2:0] {
    S_IDLE, S_PROG, S_PRE, S_SENSE, S_OUT, S_RD_PRE, S_RD_SENSE
  } state_e;

  state_e state;

  logic [ACC_W-1:0] thr_mem [ROWS];
  logic [COLS-1:0]  x_buf   [ROWS];

  logic [NW-1:0]  chunks, neurons;
  logic [NW-1:0]  chunk, neuron;
  logic [RAW-1:0] row;
  logic [RAW-1:0] rd_row_q;
  logic [CAW-1:0] rd_col_q;

  // Memory controller.
  logic           mc_req_valid, mc_req_ready, mc_busy;
  logic           mc_row_en;
  logic [RAW-1:0] mc_row_addr;
  logic [CAW-1:0] mc_col_addr;
  logic           mc_prog_en, mc_prog_set;
  dev_e           mc_prog_dev;

  // Array side.
  logic                    wl_en;
  logic [RAW-1:0]          wl_addr;
  logic [ROWS-1:0]         wl;
  logic [CAW-1:0]          col_addr;
  logic [COLS-1:0]         col_sel;
  logic [COLS-1:0][RW-1:0] r_bl, r_blb;
  logic                    sen;
  logic [COLS-1:0]         x_vec;
  logic [COLS-1:0]         xnor_out, xnor_out_b;
  logic                    col_out;

  // Popcount and sign.
  logic [CNT_W-1:0] count;
  logic             acc_clear, acc_add;
  logic [ACC_W-1:0] acc, threshold;
  logic             y;

  logic start_ok;
  logic [2*NW-1:0] cfg_rows;

  always_comb begin
    cfg_rows = cfg_chunks * cfg_neurons;
    start_ok = (cfg_chunks != '0) && (cfg_neurons != '0) && (32'(cfg_rows) <= ROWS);
  end

  // ---------------------------------------------------------------------
  // Sequencer.
  // ---------------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      chunks   <= '0;
      neurons  <= '0;
      chunk    <= '0;
      neuron   <= '0;
      row      <= '0;
      rd_row_q <= '0;
      rd_col_q <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start && start_ok) begin
            state   <= S_PRE;
            chunks  <= cfg_chunks;
            neurons <= cfg_neurons;
            chunk   <= '0;
            neuron  <= '0;
            row     <= '0;
          end else if (!start && prog_valid && mc_req_ready) begin
            state <= S_PROG;
          end else if (!start && !prog_valid && rd_valid) begin
            state    <= S_RD_PRE;
            rd_row_q <= rd_row;
            rd_col_q <= rd_col;
          end
        end
        S_PROG:  if (!mc_busy) state <= S_IDLE;
        S_PRE:   state <= S_SENSE;
        S_SENSE: begin
          if (chunk == chunks - 1'b1) begin
            state <= S_OUT;
          end else begin
            state <= S_PRE;
            chunk <= chunk + 1'b1;
            row   <= row + 1'b1;
          end
        end
        S_OUT: begin
          if (neuron == neurons - 1'b1) begin
            state <= S_IDLE;
          end else begin
            state  <= S_PRE;
            neuron <= neuron + 1'b1;
            chunk  <= '0;
            row    <= row + 1'b1;
          end
        end
        S_RD_PRE:   state <= S_RD_SENSE;
        S_RD_SENSE: state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // Threshold memory and input buffer (registers, written any time).
  always_ff @(posedge clk) begin
    if (thr_we) thr_mem[thr_addr] <= thr_data;
    if (x_we)   x_buf[x_addr]     <= x_data;
  end

  always_comb begin
    prog_ready   = (state == S_IDLE) && mc_req_ready && !start;
    mc_req_valid = prog_valid && prog_ready;
    prog_busy    = mc_busy;
    cfg_err      = (state == S_IDLE) && start && !start_ok;

    sen = (state == S_SENSE) || (state == S_RD_SENSE);

    // Row decoder source: controller while programming, sequencer otherwise.
    wl_en   = 1'b0;
    wl_addr = '0;
    if (mc_busy) begin
      wl_en   = mc_row_en;
      wl_addr = mc_row_addr;
    end else if (state == S_PRE || state == S_SENSE) begin
      wl_en   = 1'b1;
      wl_addr = row;
    end else if (state == S_RD_PRE || state == S_RD_SENSE) begin
      wl_en   = 1'b1;
      wl_addr = rd_row_q;
    end
    col_addr = mc_busy ? mc_col_addr : rd_col_q;

    // Inputs to the XNOR sense amplifiers: the buffered chunk during
    // inference, all +1 for a test read (so the output is the weight).
    x_vec = (state == S_PRE || state == S_SENSE) ? x_buf[chunk[RAW-1:0]] : '1;

    acc_clear = ((state == S_IDLE) && start && start_ok) || (state == S_OUT);
    acc_add   = (state == S_SENSE);
    threshold = thr_mem[neuron[RAW-1:0]];

    out_valid  = (state == S_OUT);
    out_neuron = neuron[RAW-1:0];
    out_y      = y;
    out_acc    = acc;
    done       = (state == S_OUT) && (neuron == neurons - 1'b1);

    rd_data_valid = (state == S_RD_SENSE);
    rd_data       = col_out;

    unique case (state)
      S_PROG:                       mode = MODE_PROG;
      S_PRE, S_SENSE, S_OUT:        mode = MODE_INFER;
      S_RD_PRE, S_RD_SENSE:         mode = MODE_READ;
      default:                      mode = MODE_IDLE;
    endcase
  end

  // ---------------------------------------------------------------------
  // Blocks.
  // ---------------------------------------------------------------------
  memory_controller #(
    .ROWS(ROWS), .COLS(COLS), .PULSE_CYCLES(PULSE_CYCLES)
  ) u_mc (
    .clk, .rst_n,
    .req_valid   (mc_req_valid),
    .req_ready   (mc_req_ready),
    .req_row     (prog_row),
    .req_weights (prog_weights),
    .busy        (mc_busy),
    .row_en      (mc_row_en),
    .row_addr    (mc_row_addr),
    .col_addr    (mc_col_addr),
    .prog_en     (mc_prog_en),
    .prog_dev    (mc_prog_dev),
    .prog_set    (mc_prog_set)
  );

  row_decoder #(.ROWS(ROWS)) u_row_dec (
    .en (wl_en), .addr (wl_addr), .wl (wl)
  );

  column_decoder #(.COLS(COLS)) u_col_dec (
    .addr (col_addr), .outs (xnor_out), .out (col_out), .col_sel (col_sel)
  );

  rram_2t2r_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk,
    .wl       (wl),
    .col_sel  (col_sel),
    .prog_en  (mc_prog_en),
    .prog_dev (mc_prog_dev),
    .prog_set (mc_prog_set),
    .r_bl     (r_bl),
    .r_blb    (r_blb)
  );

  for (genvar c = 0; c < COLS; c++) begin : g_pcsa
    pcsa_xnor u_pcsa (
      .sen        (sen),
      .x          (x_vec[c]),
      .r_bl       (r_bl[c]),
      .r_blb      (r_blb[c]),
      .xnor_out   (xnor_out[c]),
      .xnor_out_b (xnor_out_b[c])
    );
  end

  popcount #(.N(COLS)) u_popcount (
    .bits (xnor_out), .count (count)
  );

  sign_activation #(.CNT_W(CNT_W), .ACC_W(ACC_W)) u_sign (
    .clk, .rst_n,
    .clear     (acc_clear),
    .add       (acc_add),
    .count     (count),
    .threshold (threshold),
    .acc       (acc),
    .y         (y)
  );

  // The sense amplifiers never evaluate while a row is being programmed.
  a_no_sense_while_prog : assert property (@(posedge clk) disable iff (!rst_n) !(sen && mc_busy));
  // Differential outputs of a resolved amplifier are complementary.
  a_pcsa_complement : assert property (@(posedge clk) disable iff (!rst_n)
                                       sen |-> ((xnor_out ^ xnor_out_b) == '1));

endmodule
