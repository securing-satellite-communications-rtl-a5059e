// tb_branch_selector: checks the branch rule of both maps for both parities
// (odd k rotates under the first map and multiplies under the second) and that
// only the chosen branch receives the operand, the other one zero.
module tb_branch_selector;
  import chaos_pkg::*;

  logic [63:0] y_prev, y_b1, y_b2;
  logic        k_odd;
  map_e        map_sel;
  branch_e     branch;
  int checks = 0, failures = 0;

  branch_selector #(.W(64)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int i = 0; i < 200; i++) begin
      bit exp_shift;
      y_prev  = {$urandom, $urandom};
      k_odd   = 1'($urandom);
      map_sel = map_e'($urandom & 1);
      #1;
      exp_shift = (map_sel == MAP_EQ2) ? k_odd : !k_odd;
      check(branch == (exp_shift ? BR_SHIFT : BR_MULT), "branch choice");
      check(y_b1 == (exp_shift ? 64'd0 : y_prev), "branch 1 operand");
      check(y_b2 == (exp_shift ? y_prev : 64'd0), "branch 2 operand");
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
