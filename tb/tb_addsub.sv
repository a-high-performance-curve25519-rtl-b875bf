// tb_addsub: checks the adder-subtractor at both sizes used in the FFAU
// (W = 255 with the Curve25519 prime as bias, W = 193 with the all-ones
// bias) against x + y and x + bias - y on random and corner operands.
// Two instances are driven side by side; the block is combinational, so
// each check samples the output 1 ns after the inputs change. The widths are
// the paper's Add255 / Add193; the bias input is this design's way of
// keeping subtraction results non-negative.
module tb_addsub;
  localparam logic [254:0] P25 = (255'd1 << 255) - 255'd19;
  logic [254:0] x1, y1, b1; logic s1; logic [255:0] o1;
  logic [192:0] x2, y2, b2; logic s2; logic [193:0] o2;
  int checks = 0, failures = 0;

  addsub #(.W(255)) u_255 (.x(x1), .y(y1), .sub(s1), .bias(b1), .out(o1));
  addsub #(.W(193)) u_193 (.x(x2), .y(y2), .sub(s2), .bias(b2), .out(o2));

  function automatic logic [254:0] r255();
    logic [254:0] v;
    for (int i = 0; i < 8; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int n = 0; n < 400; n++) begin
      x1 = r255(); y1 = r255() % P25; s1 = n[0]; b1 = (n[1]) ? '1 : P25;
      x2 = 193'(r255()); y2 = 193'(r255()); s2 = n[0]; b2 = '1;
      if (n == 0) begin x1 = '1; y1 = '1; end
      if (n == 1) begin x1 = '0; y1 = P25; b1 = P25; end
      #1;
      checks++;
      if (o1 != (s1 ? 256'(x1) + 256'(b1) - 256'(y1) : 256'(x1) + 256'(y1))) begin
        failures++; $display("FAIL 255: x=%h y=%h sub=%0d out=%h", x1, y1, s1, o1);
      end
      checks++;
      if (o2 != (s2 ? 194'(x2) + {1'b0, ~y2} : 194'(x2) + 194'(y2))) begin
        failures++; $display("FAIL 193: x=%h y=%h sub=%0d out=%h", x2, y2, s2, o2);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
