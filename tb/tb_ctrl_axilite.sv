// tb_ctrl_axilite: checks the control port through its AXI4-Lite bus.
//
// Register write and read-back of every argument, a byte-strobed partial
// write, the idle/start/done flags, the single core_start pulse, a start
// request made while the core is busy (held until the core is free), done
// cleared by reading the control word, the interrupt enable chain and the
// toggle-on-write interrupt status.
module tb_ctrl_axilite;
  import chaos_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rvalid, rready;
  logic [5:0]  awaddr, araddr;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;
  logic        interrupt, core_start, core_done;
  logic [31:0] arg_m, arg_n, arg_array;
  logic [63:0] arg_t;
  map_e        arg_map;
  int checks = 0, failures = 0;
  int starts = 0;

  ctrl_axilite #(.ADDR_W(6), .DATA_W(32)) dut (
    .clk(clk), .rst_n(rst_n),
    .s_axi_awvalid(awvalid), .s_axi_awready(awready), .s_axi_awaddr(awaddr),
    .s_axi_wvalid(wvalid), .s_axi_wready(wready), .s_axi_wdata(wdata), .s_axi_wstrb(wstrb),
    .s_axi_bvalid(bvalid), .s_axi_bready(bready), .s_axi_bresp(bresp),
    .s_axi_arvalid(arvalid), .s_axi_arready(arready), .s_axi_araddr(araddr),
    .s_axi_rvalid(rvalid), .s_axi_rready(rready), .s_axi_rdata(rdata), .s_axi_rresp(rresp),
    .interrupt(interrupt), .core_start(core_start), .core_done(core_done),
    .arg_m(arg_m), .arg_n(arg_n), .arg_t(arg_t), .arg_array(arg_array), .arg_map(arg_map)
  );

  always #5 clk = ~clk;
  always @(posedge clk) if (rst_n && core_start) starts <= starts + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic axi_write(input logic [5:0] a, input logic [31:0] d, input logic [3:0] strb = 4'hF);
    int guard = 0;
    @(negedge clk);
    awvalid = 1; awaddr = a; wvalid = 1; wdata = d; wstrb = strb;
    #1;
    while (!(awready && wready) && guard < 100) begin @(negedge clk); #1; guard++; end
    @(negedge clk);
    awvalid = 0; wvalid = 0; bready = 1;
    #1;
    while (!bvalid && guard < 100) begin @(negedge clk); #1; guard++; end
    check(bvalid && bresp == AXI_OKAY, "write response");
    @(negedge clk);
    bready = 0;
  endtask

  task automatic axi_read(input logic [5:0] a, output logic [31:0] d);
    int guard = 0;
    @(negedge clk);
    arvalid = 1; araddr = a;
    #1;
    while (!arready && guard < 100) begin @(negedge clk); #1; guard++; end
    @(negedge clk);
    arvalid = 0; rready = 1;
    #1;
    while (!rvalid && guard < 100) begin @(negedge clk); #1; guard++; end
    check(rvalid && rresp == AXI_OKAY, "read response");
    d = rdata;
    @(negedge clk);
    rready = 0;
  endtask

  task automatic pulse_done();
    @(negedge clk);
    core_done = 1;
    @(negedge clk);
    core_done = 0;
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0; awaddr = 0; araddr = 0;
    wdata = 0; wstrb = 0; core_done = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    axi_read(REG_AP_CTRL, d);
    check(d == 32'h4, $sformatf("idle after reset, ctrl=%h", d));
    // arguments
    axi_write(REG_M, 32'd1080);
    axi_write(REG_N, 32'd1920);
    axi_write(REG_T_LO, 32'h67c9_4eb3);
    axi_write(REG_T_HI, 32'h0000_0001);
    axi_write(REG_ARRAY, 32'h1000_0000);
    axi_write(REG_MAP, 32'h1);
    check(arg_m == 1080 && arg_n == 1920 && arg_t == 64'h1_67c9_4eb3 && arg_array == 32'h1000_0000
          && arg_map == MAP_EQ3, "argument outputs");
    axi_read(REG_M, d);      check(d == 1080, "read m");
    axi_read(REG_N, d);      check(d == 1920, "read n");
    axi_read(REG_T_LO, d);   check(d == 32'h67c9_4eb3, "read t lo");
    axi_read(REG_T_HI, d);   check(d == 1, "read t hi");
    axi_read(REG_ARRAY, d);  check(d == 32'h1000_0000, "read array");
    axi_read(REG_MAP, d);    check(d == 1, "read map");
    axi_write(REG_ARRAY, 32'hAABB_CCDD, 4'b0010);
    check(arg_array == 32'h1000_CC00, $sformatf("strobed write %h", arg_array));
    axi_read(6'h3C, d);      check(d == 0, "unmapped reads zero");
    // interrupts on
    axi_write(REG_GIE, 1);
    axi_write(REG_IER, 1);
    // start
    axi_write(REG_AP_CTRL, 1);
    check(starts == 1, $sformatf("one start pulse, got %0d", starts));
    axi_read(REG_AP_CTRL, d);
    check(d[0] == 0 && d[2] == 0 && d[1] == 0, $sformatf("busy: ctrl=%h", d));
    // start requested while busy is held
    axi_write(REG_AP_CTRL, 1);
    axi_read(REG_AP_CTRL, d);
    check(d[0] == 1 && starts == 1, "start held while busy");
    check(!interrupt, "no interrupt while busy");
    pulse_done();
    @(negedge clk);
    check(starts == 2, "held start issued after done");
    check(interrupt, "interrupt after done");
    axi_read(REG_ISR, d);    check(d == 1, "ISR done bit");
    axi_read(REG_AP_CTRL, d);
    check(d[1] == 1 && d[3] == 1, $sformatf("done and ready set, ctrl=%h", d));
    axi_read(REG_AP_CTRL, d);
    check(d[1] == 0, "done cleared by read");
    axi_write(REG_ISR, 1);
    check(!interrupt, "ISR toggled clear");
    pulse_done();
    axi_read(REG_AP_CTRL, d);
    check(d == 32'h0000_000E, $sformatf("idle+done+ready, ctrl=%h", d));
    check(interrupt, "second interrupt");
    axi_write(REG_GIE, 0);
    check(!interrupt, "GIE masks interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
