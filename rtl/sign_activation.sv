// sign_activation: binary neuron output y = sign(popcount - b).
// The popcounts of the row reads that make up one neuron are summed in an
// accumulator (clear starts a neuron, add adds "count" at the clock edge).
// y is combinational on the accumulator: y = 1 (+1) when acc >= threshold,
// y = 0 (-1) otherwise; sign(0) is taken as +1, an assumption.
// Summing several row reads lets one neuron have more inputs than one array
// row; that extension is this design's choice. Asynchronous active-low reset.
module sign_activation #(
  parameter int unsigned CNT_W = $clog2(bnn_pkg::DEF_COLS + 1),
  parameter int unsigned ACC_W = $clog2(bnn_pkg::DEF_ROWS * bnn_pkg::DEF_COLS + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             add,
  input  logic [CNT_W-1:0] count,
  input  logic [ACC_W-1:0] threshold,
  output logic [ACC_W-1:0] acc,
  output logic             y
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      acc <= '0;
    else if (clear)  acc <= '0;
    else if (add)    acc <= acc + ACC_W'(count);
  end

  always_comb y = (acc >= threshold);

endmodule
