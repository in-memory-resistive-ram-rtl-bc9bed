// rram_2t2r_array: BEHAVIOURAL MODEL of the hafnium-oxide 2T2R resistive memory
// array (not synthesizable logic: the real part is a set of analog resistive
// devices integrated in the back end of line of a 130 nm CMOS process).
//
// ROWS x COLS synapses. Each synapse is a pair of one-transistor/one-resistor
// devices sharing word line WLi and source line SLi, one on bit line BLj and
// one on BLbj. A weight is stored differentially: BL device in the low
// resistance state (LRS) and BLb device in the high resistance state (HRS)
// means +1; the opposite pair means -1.
//
// Read: the row whose word line is high presents, for every column, the
// resistance of its BL device on r_bl[j] and of its BLb device on r_blb[j]
// (combinational); the sense amplifiers compare the two. With no word line
// high every bit line sees R_HRS.
// Program: at a rising clock edge with prog_en high, the device chosen by the
// high word line, the one-hot col_sel and prog_dev is SET to R_LRS
// (prog_set=1) or RESET to R_HRS (prog_set=0). The programming voltages on
// SL/BL/BLb are abstracted into this single event; their values, the
// resistance values and the initial state (all devices HRS) are this model's
// assumptions. Device-to-device variability is not modelled, but a testbench
// may overwrite a device through force_dev() to emulate a bit error.
module rram_2t2r_array
  import bnn_pkg::*;
#(
  parameter int unsigned ROWS  = bnn_pkg::DEF_ROWS,
  parameter int unsigned COLS  = bnn_pkg::DEF_COLS,
  parameter res_t        LRS   = res_t'(bnn_pkg::R_LRS),
  parameter res_t        HRS   = res_t'(bnn_pkg::R_HRS)
) (
  input  logic                      clk,
  input  logic [ROWS-1:0]           wl,
  input  logic [COLS-1:0]           col_sel,
  input  logic                      prog_en,
  input  dev_e                      prog_dev,
  input  logic                      prog_set,
  output logic [COLS-1:0][RW-1:0]   r_bl,
  output logic [COLS-1:0][RW-1:0]   r_blb
);

  res_t dev_bl  [ROWS][COLS];
  res_t dev_blb [ROWS][COLS];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        dev_bl[r][c]  = HRS;
        dev_blb[r][c] = HRS;
      end
  end

  // Programming pulse.
  always @(posedge clk) begin
    if (prog_en) begin
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++)
          if (wl[r] && col_sel[c]) begin
            if (prog_dev == DEV_BL) dev_bl[r][c]  <= prog_set ? LRS : HRS;
            else                    dev_blb[r][c] <= prog_set ? LRS : HRS;
          end
    end
  end

  // Read: resistances of the selected row onto the bit lines.
  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      r_bl[c]  = HRS;
      r_blb[c] = HRS;
    end
    for (int r = ROWS - 1; r >= 0; r--)
      if (wl[r])
        for (int c = 0; c < COLS; c++) begin
          r_bl[c]  = dev_bl[r][c];
          r_blb[c] = dev_blb[r][c];
        end
  end

  // Test hook: overwrite one device, emulating a programming error.
  task automatic force_dev(input int r, input int c, input dev_e d, input res_t value);
    if (d == DEV_BL) dev_bl[r][c]  = value;
    else             dev_blb[r][c] = value;
  endtask

endmodule
