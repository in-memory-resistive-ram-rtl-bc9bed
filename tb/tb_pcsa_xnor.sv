// tb_pcsa_xnor: drives the sense amplifier through precharge/sense phases for
// both weight encodings (BL low/BLb high = +1, the reverse = -1) and both
// inputs, and checks xnor_out = XNOR(w, x), the complementary output, the
// precharge level, and that the decision holds while sen stays high even if
// the bit-line resistances change afterwards.
module tb_pcsa_xnor;
  import bnn_pkg::*;
  logic sen, x, xo, xob;
  res_t r_bl, r_blb;
  int checks = 0, failures = 0;

  pcsa_xnor dut (.sen, .x, .r_bl, .r_blb, .xnor_out(xo), .xnor_out_b(xob));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic sense(input logic w, input logic xi, input res_t lo, input res_t hi);
    logic expected;
    sen = 0;
    r_bl  = w ? lo : hi;
    r_blb = w ? hi : lo;
    x = xi;
    #5;
    checks++;
    if (!(xo && xob)) begin failures++; $display("FAIL precharge %b %b", xo, xob); end
    sen = 1;
    #5;
    expected = !(w ^ xi);
    checks++;
    if (xo !== expected || xob !== !expected) begin
      failures++; $display("FAIL w=%b x=%b out=%b outb=%b", w, xi, xo, xob);
    end
    // Inputs move after the decision: output must hold.
    r_bl = r_blb; r_blb = w ? lo : hi; x = !xi;
    #5;
    checks++;
    if (xo !== expected) begin failures++; $display("FAIL hold w=%b x=%b", w, xi); end
  endtask

  initial begin
    for (int i = 0; i < 4; i++) sense(i[1], i[0], res_t'(R_LRS), res_t'(R_HRS));
    for (int i = 0; i < 200; i++) begin
      res_t a, b;
      a = res_t'($urandom % 255);
      b = res_t'(a + 1 + ($urandom % (255 - int'(a))));
      sense(1'($urandom), 1'($urandom), a, b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
