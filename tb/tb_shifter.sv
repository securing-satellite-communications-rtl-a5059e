// tb_shifter: checks the rotation by y % 64 against a bit-by-bit rotation,
// for every shift amount 0..63 and for random words.
module tb_shifter;
  import chaos_ref_pkg::*;
  logic [63:0] y_in, y_out;
  int checks = 0, failures = 0;

  shifter #(.W(64)) dut (.*);

  initial begin
    for (int i = 0; i < 400; i++) begin
      longint unsigned y;
      y = {$urandom, $urandom};
      if (i < 64) y = {y[63:6], 6'(i)};
      y_in = y;
      #1;
      checks++;
      if (y_out !== ref_rot(y)) begin failures++; $display("FAIL %h got %h exp %h", y, y_out, ref_rot(y)); end
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
