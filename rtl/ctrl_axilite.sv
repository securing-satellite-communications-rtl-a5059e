// ctrl_axilite: AXI4-Lite control port of the sequence-generator core.
//
// The host writes the arguments (frame height m, frame width n, the 64-bit
// timestamp t used as y_0, the byte address of the output array and the map
// select), then sets bit 0 of the control word. The block turns that into a
// one-cycle core_start pulse as soon as the core is idle, and turns the core's
// core_done pulse into the done flag, the interrupt status and the interrupt.
//
// Register map (byte offsets, see chaos_pkg):
//   0x00 control : bit0 start (write 1; cleared when the core starts),
//                  bit1 done (cleared when this register is read), bit2 idle,
//                  bit3 ready (reads as done: one task at a time)
//   0x04 GIE     : bit0 global interrupt enable
//   0x08 IER     : bit0 done, bit1 ready interrupt enable
//   0x0C ISR     : bit0 done, bit1 ready interrupt status; writing 1 toggles
//   0x10 m, 0x18 n, 0x20/0x24 t low/high, 0x28 array address, 0x30 map select
// interrupt = GIE and (any ISR bit). The layout follows the usual
// high-level-synthesis control port; the paper names the port and the
// interrupt pin only, so the map and the map-select register are this design's.
//
// Timing: a write is accepted when address and data are both valid and no
// response is pending; its response follows one cycle later. A read answers
// one cycle after the address is accepted. Unmapped addresses read as zero
// and ignore writes; all responses are OKAY.
module ctrl_axilite
  import chaos_pkg::*;
#(
  parameter int unsigned ADDR_W = 6,
  parameter int unsigned DATA_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  input  logic [DATA_W-1:0] s_axi_wdata,
  input  logic [DATA_W/8-1:0] s_axi_wstrb,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  output logic [1:0]        s_axi_bresp,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  output logic [DATA_W-1:0] s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              interrupt,
  // core side
  output logic              core_start,
  input  logic              core_done,
  output logic [31:0]       arg_m,
  output logic [31:0]       arg_n,
  output logic [63:0]       arg_t,
  output logic [31:0]       arg_array,
  output map_e              arg_map
);

  logic        ap_start, ap_done, busy;
  logic        gie;
  logic [1:0]  ier, isr;
  logic        wr_fire, rd_fire;
  logic [5:0]  waddr, raddr;
  logic [31:0] wmask;
  logic [31:0] rdata_mux;

  assign wr_fire = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign rd_fire = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_arready = !s_axi_rvalid;
  assign s_axi_bresp   = AXI_OKAY;
  assign s_axi_rresp   = AXI_OKAY;
  assign waddr = 6'(s_axi_awaddr);
  assign raddr = 6'(s_axi_araddr);

  always_comb begin
    for (int i = 0; i < 4; i++) wmask[8*i +: 8] = {8{s_axi_wstrb[i]}};
  end

  function automatic logic [31:0] merge(input logic [31:0] old_v, input logic [31:0] new_v,
                                        input logic [31:0] mask);
    return (old_v & ~mask) | (new_v & mask);
  endfunction

  assign core_start = ap_start && !busy;

  always_comb begin
    case (raddr)
      REG_AP_CTRL: rdata_mux = {28'd0, ap_done, !busy, ap_done, ap_start};
      REG_GIE:     rdata_mux = {31'd0, gie};
      REG_IER:     rdata_mux = {30'd0, ier};
      REG_ISR:     rdata_mux = {30'd0, isr};
      REG_M:       rdata_mux = arg_m;
      REG_N:       rdata_mux = arg_n;
      REG_T_LO:    rdata_mux = arg_t[31:0];
      REG_T_HI:    rdata_mux = arg_t[63:32];
      REG_ARRAY:   rdata_mux = arg_array;
      REG_MAP:     rdata_mux = {31'd0, arg_map};
      default:     rdata_mux = '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ap_start     <= 1'b0;
      ap_done      <= 1'b0;
      busy         <= 1'b0;
      gie          <= 1'b0;
      ier          <= '0;
      isr          <= '0;
      arg_m        <= '0;
      arg_n        <= '0;
      arg_t        <= '0;
      arg_array    <= '0;
      arg_map      <= MAP_EQ2;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      // core handshake
      if (core_start) begin
        ap_start <= 1'b0;
        busy     <= 1'b1;
      end
      if (core_done) begin
        busy    <= 1'b0;
        ap_done <= 1'b1;
      end

      // write channel
      if (s_axi_bvalid && s_axi_bready) s_axi_bvalid <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        case (waddr)
          REG_AP_CTRL: if (s_axi_wstrb[0] && s_axi_wdata[0]) ap_start <= 1'b1;
          REG_GIE:     if (s_axi_wstrb[0]) gie <= s_axi_wdata[0];
          REG_IER:     if (s_axi_wstrb[0]) ier <= s_axi_wdata[1:0];
          REG_M:       arg_m     <= merge(arg_m, s_axi_wdata, wmask);
          REG_N:       arg_n     <= merge(arg_n, s_axi_wdata, wmask);
          REG_T_LO:    arg_t[31:0]  <= merge(arg_t[31:0], s_axi_wdata, wmask);
          REG_T_HI:    arg_t[63:32] <= merge(arg_t[63:32], s_axi_wdata, wmask);
          REG_ARRAY:   arg_array <= merge(arg_array, s_axi_wdata, wmask);
          REG_MAP:     if (s_axi_wstrb[0]) arg_map <= map_e'(s_axi_wdata[0]);
          default: ;
        endcase
      end

      // interrupt status: set by completion, toggled by writing 1
      begin
        logic [1:0] isr_n;
        isr_n = isr;
        if (wr_fire && waddr == REG_ISR && s_axi_wstrb[0]) isr_n = isr_n ^ s_axi_wdata[1:0];
        if (core_done) isr_n = isr_n | ier;
        isr <= isr_n;
      end

      // read channel
      if (s_axi_rvalid && s_axi_rready) s_axi_rvalid <= 1'b0;
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= rdata_mux;
        if (raddr == REG_AP_CTRL && !core_done) ap_done <= 1'b0;
      end
    end
  end

  assign interrupt = gie && (isr != 2'b00);

endmodule
