// tb_select_accumulator: checks y[63:32]+1 and y[31:0]+1, with the all-ones
// halves (whose sum is 2^32) among random operands.
module tb_select_accumulator;
  logic [63:0] y_in;
  logic [32:0] hi_p1, lo_p1;
  int checks = 0, failures = 0;

  select_accumulator #(.W(64)) dut (.*);

  initial begin
    for (int i = 0; i < 300; i++) begin
      longint unsigned y;
      case (i)
        0: y = 64'hFFFF_FFFF_FFFF_FFFF;
        1: y = 64'h0;
        2: y = 64'hFFFF_FFFF_0000_0000;
        default: y = {$urandom, $urandom};
      endcase
      y_in = y;
      #1;
      checks++;
      if (64'(hi_p1) != (y / 64'h1_0000_0000) + 1) begin failures++; $display("FAIL hi %h", y); end
      checks++;
      if (64'(lo_p1) != (y % 64'h1_0000_0000) + 1) begin failures++; $display("FAIL lo %h", y); end
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
