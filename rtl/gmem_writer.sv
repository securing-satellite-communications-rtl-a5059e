// gmem_writer: AXI4 write master that stores the sequence words in memory.
//
// A start pulse gives the byte address of the output array and the number of
// 64-bit words to store. The writer then issues incrementing bursts on the
// write-address channel, streams the words from its sink port onto the write-
// data channel, and waits for each burst's write response before it issues the
// next. A burst holds at most MAX_BURST beats and never crosses a 4 KB address
// boundary, as AXI4 requires. Every beat writes all eight byte lanes, so word i
// lands at base_addr + 8*i, least significant byte at the lowest address.
//
// Interface and timing: done pulses for one cycle after the last write response
// (or at once for zero words); busy is high in between. resp_err is set by any
// response other than OKAY and cleared by the next start. base_addr must be a
// multiple of 8. With a memory that is always ready, a burst of B beats takes
// B + 2 cycles (address, B data beats, response), and a job of N words in
// B bursts takes N + 2*B + 1 cycles from start to done. The bus name comes from the paper's block design; the whole
// protocol engine (burst size, one burst in flight, write channels only) is
// this design's own.
module gmem_writer
  import chaos_pkg::*;
#(
  parameter int unsigned ADDR_W    = 32,
  parameter int unsigned DATA_W    = 64,
  parameter int unsigned MAX_BURST = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  input  logic [ADDR_W-1:0]   base_addr,
  input  logic [31:0]         n_words,
  output logic                busy,
  output logic                done,
  output logic                resp_err,
  word_stream_if.sink         s,
  // AXI4 write address channel
  output logic                m_axi_awvalid,
  input  logic                m_axi_awready,
  output logic [ADDR_W-1:0]   m_axi_awaddr,
  output logic [7:0]          m_axi_awlen,
  output logic [2:0]          m_axi_awsize,
  output logic [1:0]          m_axi_awburst,
  // AXI4 write data channel
  output logic                m_axi_wvalid,
  input  logic                m_axi_wready,
  output logic [DATA_W-1:0]   m_axi_wdata,
  output logic [DATA_W/8-1:0] m_axi_wstrb,
  output logic                m_axi_wlast,
  // AXI4 write response channel
  input  logic                m_axi_bvalid,
  output logic                m_axi_bready,
  input  logic [1:0]          m_axi_bresp
);

  localparam int unsigned BYTES   = DATA_W / 8;
  localparam int unsigned BSHIFT  = $clog2(BYTES);
  localparam int unsigned PAGE_B  = 4096 / BYTES;   // beats in one 4 KB page

  typedef enum logic [1:0] {S_IDLE, S_ADDR, S_DATA, S_RESP} state_e;

  state_e            state;
  logic [ADDR_W-1:0] addr_q;
  logic [31:0]       remaining;
  logic [8:0]        beats_q;
  logic [8:0]        beat_cnt;
  logic [8:0]        burst;
  logic [12:0]       to_page;
  logic              w_fire;

  // beats left before the next 4 KB boundary, and the burst length
  always_comb begin
    to_page = 13'(PAGE_B) - 13'(addr_q[11:BSHIFT]);
    burst   = 9'(MAX_BURST);
    if (remaining < 32'(burst)) burst = 9'(remaining);
    if (to_page < 13'(burst))   burst = 9'(to_page);
  end

  assign w_fire = m_axi_wvalid && m_axi_wready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      addr_q    <= '0;
      remaining <= '0;
      beats_q   <= '0;
      beat_cnt  <= '0;
      done      <= 1'b0;
      resp_err  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          addr_q    <= base_addr;
          remaining <= n_words;
          resp_err  <= 1'b0;
          if (n_words == '0) done  <= 1'b1;
          else               state <= S_ADDR;
        end
        S_ADDR: if (m_axi_awready) begin
          beats_q  <= burst;
          beat_cnt <= '0;
          state    <= S_DATA;
        end
        S_DATA: if (w_fire) begin
          beat_cnt <= beat_cnt + 9'd1;
          if (m_axi_wlast) state <= S_RESP;
        end
        S_RESP: if (m_axi_bvalid) begin
          if (m_axi_bresp != AXI_OKAY) resp_err <= 1'b1;
          addr_q    <= addr_q + (ADDR_W'(beats_q) << BSHIFT);
          remaining <= remaining - 32'(beats_q);
          if (remaining == 32'(beats_q)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_ADDR;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy          = (state != S_IDLE);
  assign m_axi_awvalid = (state == S_ADDR);
  assign m_axi_awaddr  = addr_q;
  assign m_axi_awlen   = 8'(burst - 9'd1);
  assign m_axi_awsize  = 3'(BSHIFT);
  assign m_axi_awburst = 2'b01;                    // INCR
  assign m_axi_wvalid  = (state == S_DATA) && s.valid;
  assign s.ready       = (state == S_DATA) && m_axi_wready;
  assign m_axi_wdata   = s.data;
  assign m_axi_wstrb   = '1;
  assign m_axi_wlast   = (beat_cnt == beats_q - 9'd1);
  assign m_axi_bready  = (state == S_RESP);

  // AXI rule: a valid address stays valid and unchanged until it is accepted
  a_aw_hold : assert property (@(posedge clk) disable iff (!rst_n)
      (m_axi_awvalid && !m_axi_awready) |=>
      (m_axi_awvalid && $stable(m_axi_awaddr) && $stable(m_axi_awlen)))
    else $error("gmem_writer: write address changed before it was accepted");
  // AXI rule: likewise for write data
  a_w_hold : assert property (@(posedge clk) disable iff (!rst_n)
      (m_axi_wvalid && !m_axi_wready) |=>
      (m_axi_wvalid && $stable(m_axi_wdata) && $stable(m_axi_wlast)))
    else $error("gmem_writer: write data changed before it was accepted");
  // the array must be 8-byte aligned
  a_align : assert property (@(posedge clk) disable iff (!rst_n)
      (start && state == S_IDLE) |-> (base_addr[BSHIFT-1:0] == '0))
    else $error("gmem_writer: base address not aligned to the bus width");

endmodule
