// memory_controller: writes binary weights into the 2T2R array before
// inference.
//
// A request (valid/ready handshake) carries a row address and COLS weight bits
// (1 = +1, 0 = -1). The controller then walks the row column by column and,
// for each synapse, applies two programming pulses: first to the BL device,
// then to the BLb device. For +1 the BL device is SET (low resistance) and the
// BLb device RESET (high resistance); for -1 the reverse. This is the
// differential weight convention of the array; the order of the pulses and
// the pulse length are this design's choices.
//
// Timing: each pulse holds the row, column and device selection stable for
// PULSE_CYCLES clock cycles, and prog_en is high in the last of them, where
// the array takes the new state. A row therefore takes 2*COLS*PULSE_CYCLES
// cycles after the handshake; req_ready is high only when idle.
// Asynchronous active-low reset.
module memory_controller
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS         = bnn_pkg::DEF_ROWS,
  parameter int unsigned COLS         = bnn_pkg::DEF_COLS,
  parameter int unsigned PULSE_CYCLES = 4,
  localparam int unsigned RAW = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CAW = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned PW  = (PULSE_CYCLES > 1) ? $clog2(PULSE_CYCLES) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // Request: program one row.
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [RAW-1:0]  req_row,
  input  logic [COLS-1:0] req_weights,
  output logic            busy,
  // To the row decoder, the column decoder and the array.
  output logic            row_en,
  output logic [RAW-1:0]  row_addr,
  output logic [CAW-1:0]  col_addr,
  output logic            prog_en,
  output dev_e            prog_dev,
  output logic            prog_set
);

  typedef enum logic { S_IDLE, S_PULSE } state_e;

  state_e          state;
  logic [COLS-1:0] weights;
  logic [PW-1:0]   pcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      weights  <= '0;
      row_addr <= '0;
      col_addr <= '0;
      prog_dev <= DEV_BL;
      pcnt     <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (req_valid) begin
            state    <= S_PULSE;
            weights  <= req_weights;
            row_addr <= req_row;
            col_addr <= '0;
            prog_dev <= DEV_BL;
            pcnt     <= '0;
          end
        end
        S_PULSE: begin
          if (32'(pcnt) != PULSE_CYCLES - 1) begin
            pcnt <= pcnt + 1'b1;
          end else begin
            pcnt <= '0;
            if (prog_dev == DEV_BL) begin
              prog_dev <= DEV_BLB;
            end else begin
              prog_dev <= DEV_BL;
              if (32'(col_addr) == COLS - 1) state    <= S_IDLE;
              else                           col_addr <= col_addr + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state == S_PULSE);
    req_ready = (state == S_IDLE);
    row_en    = busy;
    prog_en   = busy && (32'(pcnt) == PULSE_CYCLES - 1);
    // BL device holds the weight, BLb device its complement.
    prog_set  = (prog_dev == DEV_BL) ? weights[col_addr] : !weights[col_addr];
  end

  // A pulse only ever goes to a device of the row being programmed.
  a_prog_in_busy : assert property (@(posedge clk) disable iff (!rst_n) prog_en |-> busy);

endmodule
