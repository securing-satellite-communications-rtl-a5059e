// tb_generate_chaos_sequence: end-to-end test of the sequence-generator core.
//
// A host model programs the core through s_axi_control, starts it, waits for
// the interrupt and acknowledges it; the memory model stalls at random and
// reports each stored word, which is checked against the reference map run
// from the same timestamp. Jobs: the published 8 x 4 case (words y_0 = t and
// the first three published outputs), both maps on random sizes, an array that
// starts just below a 4 KB boundary, a job below 8 bytes, and a start written
// while a job is running. Each mechanism is counted and must occur: full
// 16-beat bursts, shorter bursts, bursts cut at a 4 KB boundary, address- and
// data-channel stalls, back-pressure into the generator, both maps, the
// interrupt, done cleared by reading, an empty job and a queued start.
module tb_generate_chaos_sequence;
  import chaos_pkg::*;
  import chaos_ref_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        c_awvalid, c_awready, c_wvalid, c_wready, c_bvalid, c_bready;
  logic        c_arvalid, c_arready, c_rvalid, c_rready;
  logic [5:0]  c_awaddr, c_araddr;
  logic [31:0] c_wdata, c_rdata;
  logic [3:0]  c_wstrb;
  logic [1:0]  c_bresp, c_rresp;
  logic        awvalid, awready, wvalid, wready, wlast, bvalid, bready;
  logic [31:0] awaddr;
  logic [7:0]  awlen;
  logic [2:0]  awsize;
  logic [1:0]  awburst, bresp;
  logic [63:0] wdata;
  logic [7:0]  wstrb;
  logic        interrupt;
  logic        beat_valid;
  logic [31:0] beat_addr;
  logic [63:0] beat_data;
  int          bursts, proto_errors, stall_pct, err_burst;
  int checks = 0, failures = 0;

  // expectation of the running job
  longint unsigned exp_y;
  int unsigned     exp_idx, exp_words, job_words;
  longint unsigned job_t;
  logic [31:0]     exp_base;
  bit              exp_map;
  bit              use_tv;

  // mechanism counters
  int n_full_burst = 0, n_short_burst = 0, n_page_cut = 0, n_aw_stall = 0, n_w_stall = 0;
  int n_gen_stall = 0, n_map2 = 0, n_map3 = 0, n_irq = 0, n_done_clear = 0, n_empty = 0;
  int n_queued = 0;

  generate_chaos_sequence dut (
    .ap_clk(clk), .ap_rst_n(rst_n),
    .s_axi_control_awvalid(c_awvalid), .s_axi_control_awready(c_awready),
    .s_axi_control_awaddr(c_awaddr), .s_axi_control_wvalid(c_wvalid),
    .s_axi_control_wready(c_wready), .s_axi_control_wdata(c_wdata),
    .s_axi_control_wstrb(c_wstrb), .s_axi_control_bvalid(c_bvalid),
    .s_axi_control_bready(c_bready), .s_axi_control_bresp(c_bresp),
    .s_axi_control_arvalid(c_arvalid), .s_axi_control_arready(c_arready),
    .s_axi_control_araddr(c_araddr), .s_axi_control_rvalid(c_rvalid),
    .s_axi_control_rready(c_rready), .s_axi_control_rdata(c_rdata),
    .s_axi_control_rresp(c_rresp),
    .m_axi_gmem_awvalid(awvalid), .m_axi_gmem_awready(awready), .m_axi_gmem_awaddr(awaddr),
    .m_axi_gmem_awlen(awlen), .m_axi_gmem_awsize(awsize), .m_axi_gmem_awburst(awburst),
    .m_axi_gmem_wvalid(wvalid), .m_axi_gmem_wready(wready), .m_axi_gmem_wdata(wdata),
    .m_axi_gmem_wstrb(wstrb), .m_axi_gmem_wlast(wlast), .m_axi_gmem_bvalid(bvalid),
    .m_axi_gmem_bready(bready), .m_axi_gmem_bresp(bresp),
    .interrupt(interrupt)
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

  // stored words against the reference model; a job may be repeated back to
  // back (queued start), so the word index restarts every job_words words
  always @(posedge clk) begin
    if (rst_n && beat_valid) begin
      int unsigned li;
      longint unsigned y;
      li = exp_idx % job_words;
      y  = (li == 0) ? job_t : exp_y;
      check(exp_idx < exp_words, "no word beyond the array");
      check(beat_addr == exp_base + 8 * li, $sformatf("word %0d address %h", li, beat_addr));
      if (use_tv && li > 0 && li < 4)
        check(beat_data == TV_EQ2[li-1], $sformatf("published word %0d: %h", li, beat_data));
      check(beat_data == y, $sformatf("word %0d: got %h exp %h", li, beat_data, y));
      exp_idx <= exp_idx + 1;
      exp_y   <= ref_step(y, li + 1, exp_map);
    end
  end

  // mechanism monitors
  always @(posedge clk) begin
    if (rst_n) begin
      if (awvalid && awready) begin
        if (awlen == 8'd15) n_full_burst++;
        else begin
          n_short_burst++;
          if (((awaddr + 8 * (32'(awlen) + 1)) % 4096) == 0) n_page_cut++;
        end
      end
      if (awvalid && !awready) n_aw_stall++;
      if (wvalid && !wready) n_w_stall++;
      if (dut.seq.valid && !dut.seq.ready) n_gen_stall++;
    end
  end

  task automatic c_write(input logic [5:0] a, input logic [31:0] d);
    int guard = 0;
    @(negedge clk);
    c_awvalid = 1; c_awaddr = a; c_wvalid = 1; c_wdata = d; c_wstrb = 4'hF;
    #1;
    while (!(c_awready && c_wready) && guard < 100) begin @(negedge clk); #1; guard++; end
    @(negedge clk);
    c_awvalid = 0; c_wvalid = 0; c_bready = 1;
    #1;
    while (!c_bvalid && guard < 100) begin @(negedge clk); #1; guard++; end
    @(negedge clk);
    c_bready = 0;
  endtask

  task automatic c_read(input logic [5:0] a, output logic [31:0] d);
    int guard = 0;
    @(negedge clk);
    c_arvalid = 1; c_araddr = a;
    #1;
    while (!c_arready && guard < 100) begin @(negedge clk); #1; guard++; end
    @(negedge clk);
    c_arvalid = 0; c_rready = 1;
    #1;
    while (!c_rvalid && guard < 100) begin @(negedge clk); #1; guard++; end
    d = c_rdata;
    @(negedge clk);
    c_rready = 0;
  endtask

  task automatic set_args(input int unsigned m, input int unsigned n, input longint unsigned t,
                         input logic [31:0] base, input bit mp);
    c_write(REG_M, m);
    c_write(REG_N, n);
    c_write(REG_T_LO, t[31:0]);
    c_write(REG_T_HI, t[63:32]);
    c_write(REG_ARRAY, base);
    c_write(REG_MAP, 32'(mp));
  endtask

  task automatic expect_job(input int unsigned m, input int unsigned n, input longint unsigned t,
                            input logic [31:0] base, input bit mp, input int unsigned times = 1);
    exp_y = t; job_t = t; exp_idx = 0; job_words = (m * n) / 8; exp_words = times * job_words;
    exp_base = base; exp_map = mp;
    if (job_words == 0) job_words = 1;
  endtask

  task automatic wait_irq_and_ack(input int unsigned words);
    int guard = 0;
    logic [31:0] d;
    while (!interrupt && guard < 400000) begin @(negedge clk); guard++; end
    check(interrupt, "interrupt raised");
    if (interrupt) n_irq++;
    check(exp_idx == words, $sformatf("stored %0d words exp %0d", exp_idx, words));
    c_read(REG_AP_CTRL, d);
    check(d[1] == 1'b1, "done flag");
    c_read(REG_AP_CTRL, d);
    if (d[1] == 1'b0) n_done_clear++;
    check(d[1] == 1'b0, "done cleared by read");
    c_write(REG_ISR, 32'h1);
    check(!interrupt, "interrupt acknowledged");
  endtask

  task automatic job(input int unsigned m, input int unsigned n, input longint unsigned t,
                     input logic [31:0] base, input bit mp, input int stall);
    stall_pct = stall;
    set_args(m, n, t, base, mp);
    expect_job(m, n, t, base, mp);
    c_write(REG_AP_CTRL, 32'h1);
    wait_irq_and_ack((m * n) / 8);
    if (mp) n_map3++; else n_map2++;
    if ((m * n) / 8 == 0) n_empty++;
  endtask

  initial begin
    logic [31:0] d;
    c_awvalid = 0; c_wvalid = 0; c_bready = 0; c_arvalid = 0; c_rready = 0;
    c_awaddr = 0; c_araddr = 0; c_wdata = 0; c_wstrb = 0;
    stall_pct = 0; err_burst = -1; use_tv = 0;
    exp_y = 0; exp_idx = 0; exp_words = 0; exp_base = 0; exp_map = 0; job_words = 1; job_t = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c_write(REG_GIE, 1);
    c_write(REG_IER, 1);
    // published case
    use_tv = 1;
    job(8, 4, TV_Y0, 32'h1000_0000, 0, 0);
    use_tv = 0;
    // both maps, random sizes, memory stalls
    for (int r = 0; r < 6; r++)
      job(4 + $urandom % 30, 8 * (1 + $urandom % 12), {$urandom, $urandom},
          32'h2000_0000 + 32'h1_0000 * r, 1'(r), 40);
    // array starting just below a 4 KB boundary
    job(20, 24, 64'h0123_4567_89ab_cdef, 32'h0000_0FA8, 1, 20);
    // job below 8 bytes
    job(1, 6, 64'h42, 32'h3000_0000, 0, 0);
    // start written while a job runs: the second job starts after the first
    stall_pct = 60;
    set_args(30, 64, 64'hdead_beef_0000_0001, 32'h4000_0000, 0);
    expect_job(30, 64, 64'hdead_beef_0000_0001, 32'h4000_0000, 0, 2);
    c_write(REG_AP_CTRL, 32'h1);
    c_write(REG_AP_CTRL, 32'h1);
    c_read(REG_AP_CTRL, d);
    if (d[0] && !d[2]) n_queued++;
    check(d[0] && !d[2], "second start held while busy");
    wait_irq_and_ack(30 * 64 / 8);
    wait_irq_and_ack(2 * 30 * 64 / 8);
    check(proto_errors == 0, "no AXI rule broken");
    // every mechanism must have happened
    check(n_full_burst > 0,  "mechanism: 16-beat burst");
    check(n_short_burst > 0, "mechanism: short burst");
    check(n_page_cut > 0,    "mechanism: burst cut at 4 KB");
    check(n_aw_stall > 0,    "mechanism: address stall");
    check(n_w_stall > 0,     "mechanism: data stall");
    check(n_gen_stall > 0,   "mechanism: generator back-pressure");
    check(n_map2 > 0,        "mechanism: map (2)");
    check(n_map3 > 0,        "mechanism: map (3)");
    check(n_irq > 0,         "mechanism: interrupt");
    check(n_done_clear > 0,  "mechanism: done clear on read");
    check(n_empty > 0,       "mechanism: empty job");
    check(n_queued > 0,      "mechanism: queued start");
    $display("mechanisms: full=%0d short=%0d page_cut=%0d aw_stall=%0d w_stall=%0d gen_stall=%0d map2=%0d map3=%0d irq=%0d done_clear=%0d empty=%0d queued=%0d",
             n_full_burst, n_short_burst, n_page_cut, n_aw_stall, n_w_stall, n_gen_stall,
             n_map2, n_map3, n_irq, n_done_clear, n_empty, n_queued);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
