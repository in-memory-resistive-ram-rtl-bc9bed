// column_decoder: selects one column of the 2T2R array.
// On the read side it multiplexes the COLS sense-amplifier outputs out0..out(COLS-1)
// onto the single "out" pin; on the write side it produces the one-hot select
// of the BL/BLb pair that a programming pulse is applied to. The array drawing
// has one decoder on each side; here both share one address and one module.
// Purely combinational, zero latency. The structure (multiplexer plus
// one-hot select) is this design's choice; only the function is given.
module column_decoder #(
  parameter int unsigned COLS = bnn_pkg::DEF_COLS,
  localparam int unsigned AW  = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic [AW-1:0]   addr,
  input  logic [COLS-1:0] outs,
  output logic            out,
  output logic [COLS-1:0] col_sel
);

  always_comb begin
    col_sel = '0;
    out     = 1'b0;
    if (32'(addr) < COLS) begin
      col_sel[addr] = 1'b1;
      out           = outs[addr];
    end
  end

endmodule
