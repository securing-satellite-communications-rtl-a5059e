// tb_full_size: complete jobs of the core at its default parameters, one for
// every frame size of the evaluated videos: 640x360, 960x540, 1280x720,
// 1920x1080, 1920x1020, 2560x1440 and 3840x2160. A job produces one m*n-byte
// sequence, i.e. m*n/8 words; the 3840x2160 job alone stores 1,036,800 words.
//
// The memory never stalls, so each run also measures the core's peak rate:
// with 16-beat bursts, W words take W/16 bursts of 16 + 2 cycles plus a few
// cycles of start and done. Every word is checked against the reference map
// from the job's timestamp, the maps alternate from job to job, and each job
// must end with the interrupt, which the host model then acknowledges.
module tb_full_size;
  import chaos_pkg::*;
  import chaos_ref_pkg::*;

  localparam int NJOBS = 7;
  localparam int unsigned MS [NJOBS] = '{360, 540, 720, 1080, 1020, 1440, 2160};
  localparam int unsigned NS [NJOBS] = '{640, 960, 1280, 1920, 1920, 2560, 3840};
  int unsigned WORDS;
  bit          job_map;

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
  int          bursts, proto_errors;
  int checks = 0, failures = 0;
  longint unsigned exp_y;
  int unsigned     exp_idx = 0;
  int unsigned     bad = 0;
  localparam logic [31:0] BASE = 32'h1000_0000;
  longint unsigned T0;

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
    .clk(clk), .rst_n(rst_n), .stall_pct(0), .err_burst(-1),
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

  // every word is compared; failures are counted once per word, printed for the first few
  always @(posedge clk) begin
    if (rst_n && beat_valid) begin
      checks++;
      if (beat_addr != BASE + 8 * exp_idx || beat_data != exp_y || exp_idx >= WORDS) begin
        failures++;
        if (bad < 5) $display("FAIL word %0d at %h: got %h exp %h", exp_idx, beat_addr, beat_data, exp_y);
        bad++;
      end
      exp_idx <= exp_idx + 1;
      exp_y   <= ref_step(exp_y, exp_idx + 1, job_map);
    end
  end

  task automatic c_write(input logic [5:0] a, input logic [31:0] d);
    @(negedge clk);
    c_awvalid = 1; c_awaddr = a; c_wvalid = 1; c_wdata = d; c_wstrb = 4'hF;
    #1;
    while (!(c_awready && c_wready)) begin @(negedge clk); #1; end
    @(negedge clk);
    c_awvalid = 0; c_wvalid = 0; c_bready = 1;
    #1;
    while (!c_bvalid) begin @(negedge clk); #1; end
    @(negedge clk);
    c_bready = 0;
  endtask

  initial begin
    int unsigned cycles;
    int b0;
    c_awvalid = 0; c_wvalid = 0; c_bready = 0; c_arvalid = 0; c_rready = 1;
    c_awaddr = 0; c_araddr = 0; c_wdata = 0; c_wstrb = 0;
    WORDS = 1; job_map = 0; T0 = 0; exp_y = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    c_write(REG_GIE, 1);
    c_write(REG_IER, 1);
    for (int j = 0; j < NJOBS; j++) begin
      WORDS   = MS[j] * NS[j] / 8;
      job_map = 1'(j);
      T0      = 64'h0000_0000_67c9_4eb3 + 64'(j);
      exp_y   = T0;
      exp_idx = 0;
      b0      = bursts;
      c_write(REG_M, MS[j]);
      c_write(REG_N, NS[j]);
      c_write(REG_T_LO, T0[31:0]);
      c_write(REG_T_HI, T0[63:32]);
      c_write(REG_ARRAY, BASE);
      c_write(REG_MAP, 32'(job_map));
      c_write(REG_AP_CTRL, 1);
      cycles = 0;
      while (!interrupt && cycles < 2 * WORDS) begin @(negedge clk); cycles++; end
      check(interrupt, "interrupt at the end of the job");
      check(exp_idx == WORDS, $sformatf("stored %0d words exp %0d", exp_idx, WORDS));
      check(bursts - b0 == int'(WORDS / 16), $sformatf("bursts %0d exp %0d", bursts - b0, WORDS / 16));
      check(cycles >= WORDS / 16 * 18 && cycles <= WORDS / 16 * 18 + 8,
            $sformatf("job took %0d cycles, exp %0d + at most 8", cycles, WORDS / 16 * 18));
      $display("%0dx%0d map %0d: %0d words in %0d cycles", NS[j], MS[j], job_map ? 3 : 2, exp_idx, cycles);
      c_write(REG_ISR, 1);
      check(!interrupt, "interrupt acknowledged");
    end
    check(proto_errors == 0, "no AXI rule broken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
