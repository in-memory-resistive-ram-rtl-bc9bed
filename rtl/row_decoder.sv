// row_decoder: drives one word line of the 2T2R array.
// A binary row address is decoded to a one-hot word-line vector WL0..WL(ROWS-1);
// with en low no word line is driven. Purely combinational, zero latency.
// The array has a row decoder feeding the word and source lines; its insides
// are not given, so this is the plain binary-to-one-hot decoder (source-line
// voltages used for programming are analog and are not modelled here).
module row_decoder #(
  parameter int unsigned ROWS = bnn_pkg::DEF_ROWS,
  localparam int unsigned AW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic            en,
  input  logic [AW-1:0]   addr,
  output logic [ROWS-1:0] wl
);

  always_comb begin
    wl = '0;
    if (en && (32'(addr) < ROWS)) wl[addr] = 1'b1;
  end

endmodule
