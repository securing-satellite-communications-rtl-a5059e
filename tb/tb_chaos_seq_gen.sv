// tb_chaos_seq_gen: checks the generation loop end to end at the stream port.
//
// A 8 x 4 frame from the published timestamp must give 4 words: the timestamp
// itself and the first three published outputs of the first map, one per cycle,
// with last on the fourth and done one cycle later. Then random frame sizes,
// seeds and maps run with random back-pressure against the reference model,
// plus a size that is not a multiple of 8 bytes and one below 8 bytes.
module tb_chaos_seq_gen;
  import chaos_pkg::*;
  import chaos_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        start;
  logic [31:0] m, n, it_count;
  logic [63:0] t;
  map_e        map_sel;
  logic        busy, done;
  int checks = 0, failures = 0;

  word_stream_if #(.W(64)) s (.clk(clk), .rst_n(rst_n));

  chaos_seq_gen #(.DIM_W(32), .W(64)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .m(m), .n(n), .t(t), .map_sel(map_sel),
    .busy(busy), .done(done), .it_count(it_count), .out(s)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // returns the number of cycles from start to done
  task automatic run(input int unsigned mm, input int unsigned nn, input longint unsigned tt,
                     input map_e mp, input int ready_pct, output int cycles);
    longint unsigned yref;
    int unsigned nw, got;
    bit finished;
    nw = (mm * nn) / 8;
    @(negedge clk);
    m = mm; n = nn; t = tt; map_sel = mp; start = 1;
    @(negedge clk);
    start = 0;
    yref = tt; got = 0; cycles = 1; finished = 0;
    check(busy, "busy after start");
    while (!finished && cycles < 100000) begin
      s.ready = ($urandom % 100) < ready_pct;
      #1;
      if (done) begin
        finished = 1;
      end else if (s.valid && s.ready) begin
        check(s.data == yref, $sformatf("word %0d: got %h exp %h", got, s.data, yref));
        check(s.last == (got == nw - 1), $sformatf("last at word %0d", got));
        got++;
        yref = ref_step(yref, got, mp == MAP_EQ3);
      end
      @(negedge clk);
      cycles++;
    end
    cycles--;   // the cycle in which done was seen
    check(finished, "done seen");
    check(got == nw, $sformatf("word count %0d exp %0d", got, nw));
    check(it_count == nw, $sformatf("it_count %0d exp %0d", it_count, nw));
    #1;
    check(!busy && !done, "idle after done");
  endtask

  initial begin
    int cyc;
    start = 0; m = 0; n = 0; t = 0; map_sel = MAP_EQ2; s.ready = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // published vectors, full rate: y_0 = t, then rows 1..3
    @(negedge clk);
    m = 8; n = 4; t = TV_Y0; map_sel = MAP_EQ2; start = 1; s.ready = 1;
    @(negedge clk);
    start = 0;
    for (int i = 0; i < 4; i++) begin
      #1;
      check(s.valid, "valid every cycle at full rate");
      check(s.data == ((i == 0) ? TV_Y0 : TV_EQ2[i-1]), $sformatf("published word %0d got %h", i, s.data));
      check(s.last == (i == 3), "last on word 4");
      @(negedge clk);
    end
    #1;
    check(done && !s.valid, "done one cycle after the last word");
    @(negedge clk);
    // random sizes and back-pressure
    for (int r = 0; r < 40; r++) begin
      run(1 + $urandom % 40, 8 * (1 + $urandom % 10), {$urandom, $urandom}, map_e'(r & 1),
          (r < 4) ? 100 : 30 + $urandom % 70, cyc);
    end
    // throughput: N words take N+1 cycles from start to done with no back-pressure
    run(36, 64, 64'h1234_5678_9abc_def0, MAP_EQ3, 100, cyc);
    check(cyc == 36 * 64 / 8 + 1, $sformatf("full-rate cycles %0d exp %0d", cyc, 36 * 64 / 8 + 1));
    run(3, 5, 64'h5, MAP_EQ2, 50, cyc);    // 15 bytes: one word
    run(1, 7, 64'h7, MAP_EQ3, 50, cyc);    // 7 bytes: no word
    check(cyc == 1, "empty job finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
