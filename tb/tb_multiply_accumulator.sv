// tb_multiply_accumulator: checks (a*b + 1) mod 2^64 against 64-bit integer
// arithmetic, including the largest operands 2^32 * 2^32, which wrap to 1.
module tb_multiply_accumulator;
  logic [32:0] a, b;
  logic [63:0] y_out;
  int checks = 0, failures = 0;

  multiply_accumulator #(.W(64)) dut (.*);

  initial begin
    for (int i = 0; i < 300; i++) begin
      longint unsigned av, bv, exp;
      case (i)
        0: begin av = 64'h1_0000_0000; bv = 64'h1_0000_0000; end
        1: begin av = 64'h1; bv = 64'h1; end
        2: begin av = 64'hFFFF_FFFF; bv = 64'h1_0000_0000; end
        default: begin av = 64'($urandom) + 1; bv = 64'($urandom) + 1; end
      endcase
      a = 33'(av); b = 33'(bv);
      #1;
      exp = av * bv + 64'd1;
      checks++;
      if (y_out !== exp) begin failures++; $display("FAIL %h*%h got %h exp %h", av, bv, y_out, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
