// chaos_seq_gen: pseudo-random sequence generation for one video size.
//
// Implements the sequence-generation loop of the scheme: starting from the
// timestamp t as y_0, it iterates one chaotic map m*n/8 times and emits each
// 64-bit state as one stream word, y_0 first. Each word holds eight 8-bit
// elements of the sequence, element h in bits 8h+7:8h, so a little-endian store
// of the words lays the m*n sequence bytes out in order. The loop, its length
// and the byte order follow the paper; the stream handshake is this design's.
//
// Interface and timing: a start pulse while idle latches m, n, t and map_sel
// and loads the map. From the next cycle on out.valid stays high and one word
// leaves per cycle whenever out.ready is high; accepting a word steps the map,
// so the next word is ready one cycle later. out.last marks word m*n/8 - 1,
// and done pulses in the cycle after it is accepted. m*n/8 is rounded down; a
// size below 8 bytes finishes at once with no word. it_count counts the map's
// it_done pulses of the current run.
module chaos_seq_gen
  import chaos_pkg::*;
#(
  parameter int unsigned DIM_W = 32,
  parameter int unsigned W     = 64
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] m,
  input  logic [DIM_W-1:0] n,
  input  logic [W-1:0]     t,
  input  map_e             map_sel,
  output logic             busy,
  output logic             done,
  output logic [31:0]      it_count,
  word_stream_if.source    out
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;

  state_e            state;
  map_e              map_q;
  logic [31:0]       n_words;
  logic [31:0]       idx;
  logic [2*DIM_W-1:0] bytes;
  logic              fire;
  logic              load;
  logic [W-1:0]      y;
  logic [31:0]       k_unused;
  logic              it_done;

  assign bytes = (2*DIM_W)'(m) * (2*DIM_W)'(n);
  assign fire  = out.valid && out.ready;
  assign load  = start && (state == S_IDLE);

  chaos_map #(.W(W), .K_W(32)) u_map (
    .clk    (clk),
    .rst_n  (rst_n),
    .map_sel(map_q),
    .load   (load),
    .y_init (t),
    .k_init ('0),
    .step   (fire),
    .y      (y),
    .k      (k_unused),
    .it_done(it_done)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      map_q    <= MAP_EQ2;
      n_words  <= '0;
      idx      <= '0;
      it_count <= '0;
    end else begin
      if (it_done) it_count <= it_count + 32'd1;
      case (state)
        S_IDLE: if (start) begin
          map_q    <= map_sel;
          n_words  <= 32'(bytes >> 3);
          idx      <= '0;
          it_count <= '0;
          state    <= ((bytes >> 3) == '0) ? S_DONE : S_RUN;
        end
        S_RUN: if (fire) begin
          idx <= idx + 32'd1;
          if (out.last) state <= S_DONE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign done      = (state == S_DONE);
  assign out.valid = (state == S_RUN);
  assign out.data  = y;
  assign out.last  = (idx == n_words - 32'd1);

endmodule
