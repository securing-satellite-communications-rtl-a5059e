// tb_chaos_map: checks the map datapath against the published test vectors of
// both maps and against the reference model.
//
// Published vectors: the first map started from the timestamp 0x67c94eb3 must
// give rows 1..5 of its table; the later consecutive runs of each table are
// replayed by loading a row with an index of the right parity. Then both maps
// run 300 random-length stretches from random seeds against the reference.
// Timing: one iteration per step cycle, it_done high in exactly the cycle
// after a step, and k counting the iterations.
module tb_chaos_map;
  import chaos_pkg::*;
  import chaos_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  map_e        map_sel;
  logic        load, step;
  logic [63:0] y_init, y;
  logic [31:0] k_init, k;
  logic        it_done;
  int checks = 0, failures = 0;

  chaos_map #(.W(64), .K_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic do_load(input map_e mp, input longint unsigned v, input int unsigned kk);
    @(negedge clk);
    map_sel = mp; load = 1; y_init = v; k_init = kk; step = 0;
    @(negedge clk);
    load = 0;
    check(y == v && k == kk, "load");
  endtask

  task automatic do_step();
    step = 1;
    @(negedge clk);
    step = 0;
    check(it_done == 1'b1, "it_done after step");
  endtask

  task automatic run_tv(input map_e mp, input int first, input int last, input int k0);
    longint unsigned tv [10];
    tv = (mp == MAP_EQ2) ? TV_EQ2 : TV_EQ3;
    do_load(mp, tv[first], k0);
    for (int r = first + 1; r <= last; r++) begin
      do_step();
      check(y == tv[r], $sformatf("map %0d row %0d: got %h exp %h", mp, r + 1, y, tv[r]));
    end
  endtask

  initial begin
    load = 0; step = 0; map_sel = MAP_EQ2; y_init = 0; k_init = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // first map from its timestamp: y_1 .. y_5 are rows 1..5
    do_load(MAP_EQ2, TV_Y0, 0);
    for (int r = 0; r < 5; r++) begin
      do_step();
      check(y == TV_EQ2[r], $sformatf("map (2) from y0, row %0d: got %h", r + 1, y));
      check(k == r + 1, "index k");
    end
    run_tv(MAP_EQ2, 5, 9, 6);   // rows 6..10: row 6 -> 7 rotates (odd k)
    run_tv(MAP_EQ3, 0, 3, 1);   // rows 1..4: row 1 -> 2 rotates (even k)
    run_tv(MAP_EQ3, 4, 7, 5);   // rows 5..8
    run_tv(MAP_EQ3, 8, 9, 9);   // rows 9..10
    // it_done stays low without a step
    @(negedge clk);
    check(it_done == 1'b0, "it_done idle");
    // random runs against the reference model
    for (int run = 0; run < 300; run++) begin
      longint unsigned yr;
      int unsigned kr;
      map_e mp;
      mp = map_e'(run & 1);
      yr = {$urandom, $urandom};
      kr = $urandom & 32'hFF;
      do_load(mp, yr, kr);
      for (int i = 0; i < 8; i++) begin
        yr = ref_step(yr, kr + 1, mp == MAP_EQ3);
        kr++;
        if ($urandom % 3 == 0) begin
          @(negedge clk);
          check(it_done == 1'b0, "it_done low on a gap");
        end
        do_step();
        check(y == yr && k == kr, $sformatf("random map %0d k %0d got %h exp %h", mp, kr, y, yr));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
