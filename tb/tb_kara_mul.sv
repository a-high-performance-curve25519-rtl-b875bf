// tb_kara_mul: checks the 256 x 256 two-level Karatsuba multiplier (Mul256)
// against the plain product on random operands, operands with random
// half-words set to all ones or zero (to exercise the carries of the
// x0 + x1 / y0 + y1 sums) and the all-ones corner case.
module tb_kara_mul;
  logic [255:0] x, y;
  logic [511:0] p;
  int checks = 0, failures = 0;

  kara_mul #(.B(128)) dut (.x(x), .y(y), .product(p));

  function automatic logic [255:0] rnd256();
    logic [255:0] v;
    for (int i = 0; i < 8; i++) begin
      case ($urandom % 4)
        0: v[i*32 +: 32] = '1;
        1: v[i*32 +: 32] = '0;
        default: v[i*32 +: 32] = $urandom;
      endcase
    end
    return v;
  endfunction

  initial begin
    for (int n = 0; n < 1000; n++) begin
      x = rnd256(); y = rnd256();
      if (n == 0) begin x = '1; y = '1; end
      if (n == 1) begin x = '1; y = 256'd1; end
      #1;
      checks++;
      if (p != 512'(x) * 512'(y)) begin
        failures++;
        $display("FAIL: %h * %h = %h", x, y, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
