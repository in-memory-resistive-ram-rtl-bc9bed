// popcount: number of 1 bits among N inputs.
// In the binarized layer it counts the XNOR outputs of the N sense amplifiers
// for one row read, which is the binary dot product of weights and inputs.
// Combinational adder over all bits, zero latency; output width clog2(N+1).
// The source design only says that logic is added for the popcount; the simple
// adder form is this design's choice.
module popcount #(
  parameter int unsigned N  = bnn_pkg::DEF_COLS,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic [N-1:0]  bits,
  output logic [CW-1:0] count
);

  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + CW'(bits[i]);
  end

endmodule
