// generate_chaos_sequence: programmable-logic core that fills memory with the
// pseudo-random sequence of the chaotic video-encryption scheme.
//
// The host writes m, n, the timestamp t, the output address and the map select
// through s_axi_control and starts the core. The core iterates the chosen 64-bit
// chaotic map m*n/8 times from y_0 = t, and stores every state through m_axi_gmem
// as eight sequence bytes, so that the array holds the m*n bytes of one
// pseudo-random sequence. When the last write is acknowledged the done flag is
// set and, if enabled, interrupt rises. Running it once per map and XOR-ing the
// two arrays gives the keystream that the encryption applies to every frame.
//
// Structure: ctrl_axilite (register file and start/done handshake) ->
// chaos_seq_gen (loop control around chaos_map, the map datapath) ->
// word_stream_if -> gmem_writer (AXI4 write bursts). The port names ap_clk,
// ap_rst_n, s_axi_control, m_axi_gmem and interrupt are those of the paper's
// block design; everything inside the ports is rebuilt from the map equations
// and the generation loop. Only the write half of m_axi_gmem exists, since the
// core never reads memory.
//
// Throughput: one 64-bit word per cycle inside the core; the bus adds two
// cycles per burst of MAX_BURST beats, i.e. 16 words in 18 cycles, and a job
// of W words takes 18*W/16 + 1 cycles when W is a multiple of 16.
//
// ap_rst_n is an asynchronous reset for every register. The handshake
// assertions in gmem_writer and word_stream_if also sample it on the clock, in
// their disable-iff terms; lint reports that as a net used both ways, but the
// assertions build no logic, so the warning stands.
module generate_chaos_sequence
  import chaos_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic        ap_clk,
  input  logic        ap_rst_n,
  // s_axi_control (AXI4-Lite)
  input  logic        s_axi_control_awvalid,
  output logic        s_axi_control_awready,
  input  logic [5:0]  s_axi_control_awaddr,
  input  logic        s_axi_control_wvalid,
  output logic        s_axi_control_wready,
  input  logic [31:0] s_axi_control_wdata,
  input  logic [3:0]  s_axi_control_wstrb,
  output logic        s_axi_control_bvalid,
  input  logic        s_axi_control_bready,
  output logic [1:0]  s_axi_control_bresp,
  input  logic        s_axi_control_arvalid,
  output logic        s_axi_control_arready,
  input  logic [5:0]  s_axi_control_araddr,
  output logic        s_axi_control_rvalid,
  input  logic        s_axi_control_rready,
  output logic [31:0] s_axi_control_rdata,
  output logic [1:0]  s_axi_control_rresp,
  // m_axi_gmem (AXI4, write channels)
  output logic        m_axi_gmem_awvalid,
  input  logic        m_axi_gmem_awready,
  output logic [31:0] m_axi_gmem_awaddr,
  output logic [7:0]  m_axi_gmem_awlen,
  output logic [2:0]  m_axi_gmem_awsize,
  output logic [1:0]  m_axi_gmem_awburst,
  output logic        m_axi_gmem_wvalid,
  input  logic        m_axi_gmem_wready,
  output logic [63:0] m_axi_gmem_wdata,
  output logic [7:0]  m_axi_gmem_wstrb,
  output logic        m_axi_gmem_wlast,
  input  logic        m_axi_gmem_bvalid,
  output logic        m_axi_gmem_bready,
  input  logic [1:0]  m_axi_gmem_bresp,
  output logic        interrupt
);

  logic        core_start, core_done;
  logic [31:0] arg_m, arg_n, arg_array;
  logic [63:0] arg_t;
  map_e        arg_map;
  logic [63:0] n_bytes;

  word_stream_if #(.W(64)) seq (.clk(ap_clk), .rst_n(ap_rst_n));

  ctrl_axilite #(.ADDR_W(6), .DATA_W(32)) u_ctrl (
    .clk          (ap_clk),
    .rst_n        (ap_rst_n),
    .s_axi_awvalid(s_axi_control_awvalid),
    .s_axi_awready(s_axi_control_awready),
    .s_axi_awaddr (s_axi_control_awaddr),
    .s_axi_wvalid (s_axi_control_wvalid),
    .s_axi_wready (s_axi_control_wready),
    .s_axi_wdata  (s_axi_control_wdata),
    .s_axi_wstrb  (s_axi_control_wstrb),
    .s_axi_bvalid (s_axi_control_bvalid),
    .s_axi_bready (s_axi_control_bready),
    .s_axi_bresp  (s_axi_control_bresp),
    .s_axi_arvalid(s_axi_control_arvalid),
    .s_axi_arready(s_axi_control_arready),
    .s_axi_araddr (s_axi_control_araddr),
    .s_axi_rvalid (s_axi_control_rvalid),
    .s_axi_rready (s_axi_control_rready),
    .s_axi_rdata  (s_axi_control_rdata),
    .s_axi_rresp  (s_axi_control_rresp),
    .interrupt    (interrupt),
    .core_start   (core_start),
    .core_done    (core_done),
    .arg_m        (arg_m),
    .arg_n        (arg_n),
    .arg_t        (arg_t),
    .arg_array    (arg_array),
    .arg_map      (arg_map)
  );

  chaos_seq_gen #(.DIM_W(32), .W(64)) u_gen (
    .clk     (ap_clk),
    .rst_n   (ap_rst_n),
    .start   (core_start),
    .m       (arg_m),
    .n       (arg_n),
    .t       (arg_t),
    .map_sel (arg_map),
    .busy    (),
    .done    (),
    .it_count(),
    .out     (seq)
  );

  assign n_bytes = 64'(arg_m) * 64'(arg_n);

  gmem_writer #(.ADDR_W(32), .DATA_W(64), .MAX_BURST(MAX_BURST)) u_writer (
    .clk          (ap_clk),
    .rst_n        (ap_rst_n),
    .start        (core_start),
    .base_addr    (arg_array),
    .n_words      (32'(n_bytes >> 3)),
    .busy         (),
    .done         (core_done),
    .resp_err     (),
    .s            (seq),
    .m_axi_awvalid(m_axi_gmem_awvalid),
    .m_axi_awready(m_axi_gmem_awready),
    .m_axi_awaddr (m_axi_gmem_awaddr),
    .m_axi_awlen  (m_axi_gmem_awlen),
    .m_axi_awsize (m_axi_gmem_awsize),
    .m_axi_awburst(m_axi_gmem_awburst),
    .m_axi_wvalid (m_axi_gmem_wvalid),
    .m_axi_wready (m_axi_gmem_wready),
    .m_axi_wdata  (m_axi_gmem_wdata),
    .m_axi_wstrb  (m_axi_gmem_wstrb),
    .m_axi_wlast  (m_axi_gmem_wlast),
    .m_axi_bvalid (m_axi_gmem_bvalid),
    .m_axi_bready (m_axi_gmem_bready),
    .m_axi_bresp  (m_axi_gmem_bresp)
  );

endmodule
