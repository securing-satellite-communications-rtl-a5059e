// tb_gmem_writer: checks the AXI4 write master against the memory model.
//
// A counting word source with random gaps feeds the writer; the memory model
// stalls at random and reports every beat. Every word must arrive once, in
// order, at base + 8*i; the model must see no AXI rule broken (in particular
// no burst over a 4 KB boundary); the number of bursts must equal the count
// worked out here from the base address, the length and the 16-beat limit; an
// injected SLVERR must set resp_err; and with no stalls N words in B bursts
// must take N + 2*B + 1 cycles from start to done.
module tb_gmem_writer;
  import chaos_pkg::*;

  localparam int MAXB = 16;

  logic        clk = 0, rst_n = 0;
  logic        start;
  logic [31:0] base_addr, n_words;
  logic        busy, done, resp_err;
  logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr;
  logic [7:0]  awlen;
  logic [2:0]  awsize;
  logic [1:0]  awburst, bresp;
  logic [63:0] wdata;
  logic [7:0]  wstrb;
  logic        beat_valid;
  logic [31:0] beat_addr;
  logic [63:0] beat_data;
  int          bursts, proto_errors, stall_pct, err_burst;
  int checks = 0, failures = 0;
  int unsigned src_idx, beat_idx;
  int          gap_pct;

  word_stream_if #(.W(64)) s (.clk(clk), .rst_n(rst_n));

  gmem_writer #(.ADDR_W(32), .DATA_W(64), .MAX_BURST(MAXB)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .base_addr(base_addr), .n_words(n_words),
    .busy(busy), .done(done), .resp_err(resp_err), .s(s),
    .m_axi_awvalid(awvalid), .m_axi_awready(awready), .m_axi_awaddr(awaddr),
    .m_axi_awlen(awlen), .m_axi_awsize(awsize), .m_axi_awburst(awburst),
    .m_axi_wvalid(wvalid), .m_axi_wready(wready), .m_axi_wdata(wdata), .m_axi_wstrb(wstrb),
    .m_axi_wlast(wlast), .m_axi_bvalid(bvalid), .m_axi_bready(bready), .m_axi_bresp(bresp)
  );

  axi_mem_model #(.ADDR_W(32), .DATA_W(64)) mem (
    .clk(clk), .rst_n(rst_n), .stall_pct(stall_pct), .err_burst(err_burst),
    .awvalid(awvalid), .awready(awready), .awaddr(awaddr), .awlen(awlen), .awsize(awsize),
    .awburst(awburst), .wvalid(wvalid), .wready(wready), .wdata(wdata), .wstrb(wstrb),
    .wlast(wlast), .bvalid(bvalid), .bready(bready), .bresp(bresp),
    .beat_valid(beat_valid), .beat_addr(beat_addr), .beat_data(beat_data),
    .bursts(bursts), .proto_errors(proto_errors)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic longint unsigned pattern(input int unsigned i);
    return {i ^ 32'hA5A5_0000, ~i};
  endfunction

  // word source: holds each word until taken, random idle cycles between words
  always @(posedge clk) begin
    if (start) begin
      src_idx <= 0;
      s.valid <= 1'b0;
    end else if (!s.valid || s.ready) begin
      int unsigned nxt;
      nxt = src_idx + ((s.valid && s.ready) ? 1 : 0);
      src_idx <= nxt;
      s.valid <= (nxt < n_words) && (($urandom % 100) >= gap_pct);
    end
  end
  assign s.data = pattern(src_idx);
  assign s.last = (src_idx == n_words - 1);

  // beat checker
  always @(posedge clk) begin
    if (beat_valid) begin
      check(beat_addr == base_addr + 8 * beat_idx, $sformatf("beat %0d address %h", beat_idx, beat_addr));
      check(beat_data == pattern(beat_idx), $sformatf("beat %0d data %h", beat_idx, beat_data));
      beat_idx <= beat_idx + 1;
    end
  end

  function automatic int exp_bursts(input logic [31:0] base, input int unsigned nw);
    int b = 0;
    longint unsigned a = 64'(base);
    int unsigned left = nw;
    while (left > 0) begin
      int unsigned len = MAXB;
      int unsigned room = (4096 - int'(a % 4096)) / 8;
      if (left < len) len = left;
      if (room < len) len = room;
      a += 8 * len; left -= len; b++;
    end
    return b;
  endfunction

  task automatic run(input logic [31:0] base, input int unsigned nw, input int stall, input int gap,
                     input int errb, output int cycles);
    int b0;
    b0 = bursts;
    @(negedge clk);
    stall_pct = stall; gap_pct = gap; err_burst = (errb < 0) ? -1 : b0 + errb;
    base_addr = base; n_words = nw; beat_idx = 0; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done && cycles < 200000) begin @(negedge clk); cycles++; end
    @(negedge clk);
    check(beat_idx == nw, $sformatf("beats %0d exp %0d", beat_idx, nw));
    check(bursts - b0 == exp_bursts(base, nw), $sformatf("bursts %0d exp %0d", bursts - b0, exp_bursts(base, nw)));
    check(proto_errors == 0, "no AXI rule broken");
    check(resp_err == (errb >= 0), "resp_err");
    check(!busy, "idle after done");
  endtask

  initial begin
    int cyc;
    start = 0; base_addr = 0; n_words = 0; stall_pct = 0; gap_pct = 0; err_burst = -1;
    beat_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // full rate, aligned: 64 words = 4 bursts of 16
    run(32'h1000_0000, 64, 0, 0, -1, cyc);
    check(cyc == 64 + 2 * 4 + 1, $sformatf("full-rate cycles %0d exp %0d", cyc, 64 + 2 * 4 + 1));
    // 4 KB boundary inside a burst, short last burst
    run(32'h0000_0FC8, 50, 0, 0, -1, cyc);
    // random stalls and gaps
    for (int r = 0; r < 30; r++)
      run({$urandom} & 32'hFFFF_FFF8, 1 + $urandom % 300, $urandom % 60, $urandom % 60, -1, cyc);
    // error response on the second burst
    run(32'h2000_0000, 40, 20, 10, 1, cyc);
    // zero words
    run(32'h3000_0000, 0, 0, 0, -1, cyc);
    check(cyc == 1, "zero words finish at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
