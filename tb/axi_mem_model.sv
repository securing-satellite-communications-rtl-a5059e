// axi_mem_model: behavioural model of the memory behind an AXI4 write port.
//
// Not synthesizable; it stands for the DDR memory and its controller. It takes
// one write burst at a time, stalls the address and data channels at random
// (stall_pct percent of cycles), answers every burst with OKAY, or SLVERR for
// burst number err_burst (counting from 0; -1 for never), and reports every
// accepted data beat on beat_valid/beat_addr/beat_data instead of storing it,
// so testbenches can check any size of array without holding it. It counts the
// bursts and every AXI rule it sees broken: a burst crossing a 4 KB boundary,
// a size other than the bus width, a non-incrementing burst, wlast on the wrong
// beat, a partial strobe, data without an address.
module axi_mem_model #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 64
) (
  input  logic                clk,
  input  logic                rst_n,
  input  int                  stall_pct,
  input  int                  err_burst,
  input  logic                awvalid,
  output logic                awready,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                wvalid,
  output logic                wready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  output logic                bvalid,
  input  logic                bready,
  output logic [1:0]          bresp,
  output logic                beat_valid,
  output logic [ADDR_W-1:0]   beat_addr,
  output logic [DATA_W-1:0]   beat_data,
  output int                  bursts,
  output int                  proto_errors
);

  localparam int unsigned BYTES = DATA_W / 8;

  logic              have_aw;
  logic [ADDR_W-1:0] cur_addr;
  int                beats_left;
  logic              rnd_aw, rnd_w;

  assign awready = rst_n && !have_aw && !bvalid && rnd_aw;
  assign wready  = rst_n && have_aw && rnd_w;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_aw      <= 1'b0;
      cur_addr     <= '0;
      beats_left   <= 0;
      bvalid       <= 1'b0;
      bresp        <= 2'b00;
      beat_valid   <= 1'b0;
      beat_addr    <= '0;
      beat_data    <= '0;
      bursts       <= 0;
      proto_errors <= 0;
      rnd_aw       <= 1'b1;
      rnd_w        <= 1'b1;
    end else begin
      rnd_aw     <= ($urandom % 100) >= stall_pct;
      rnd_w      <= ($urandom % 100) >= stall_pct;
      beat_valid <= 1'b0;
      if (bvalid && bready) bvalid <= 1'b0;
      if (awvalid && awready) begin
        have_aw    <= 1'b1;
        cur_addr   <= awaddr;
        beats_left <= int'(awlen) + 1;
        if (awsize != 3'($clog2(BYTES)) || awburst != 2'b01) begin
          proto_errors <= proto_errors + 1;
          $display("axi_mem_model: bad size or burst type");
        end
        if (int'(awaddr % 4096) + (int'(awlen) + 1) * BYTES > 4096) begin
          proto_errors <= proto_errors + 1;
          $display("axi_mem_model: burst at %h crosses a 4 KB boundary", awaddr);
        end
      end
      if (wvalid && wready) begin
        beat_valid <= 1'b1;
        beat_addr  <= cur_addr;
        beat_data  <= wdata;
        cur_addr   <= cur_addr + ADDR_W'(BYTES);
        beats_left <= beats_left - 1;
        if (wlast != (beats_left == 1) || wstrb != '1) begin
          proto_errors <= proto_errors + 1;
          $display("axi_mem_model: wlast or wstrb wrong at %h", cur_addr);
        end
        if (beats_left == 1) begin
          have_aw <= 1'b0;
          bvalid  <= 1'b1;
          bresp   <= (bursts == err_burst) ? 2'b10 : 2'b00;
          bursts  <= bursts + 1;
        end
      end
      if (wvalid && !have_aw) begin
        proto_errors <= proto_errors + 1;
        $display("axi_mem_model: write data without an address");
      end
    end
  end

endmodule
