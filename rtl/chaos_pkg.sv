// chaos_pkg: types and constants shared by the chaotic-sequence generator core.
//
// The core iterates one of two 64-bit one-dimensional chaotic maps that alternate
// between a "multiply" step, y' = (y[63:32]+1)*(y[31:0]+1)+1 mod 2^64, and a
// "rotate" step, y' = rotl(y, y[5:0]). The two maps differ only in which step
// falls on odd and which on even iteration indices:
//   MAP_EQ2 : odd k rotates, even k multiplies   (the first map of the scheme)
//   MAP_EQ3 : odd k multiplies, even k rotates   (the second map of the scheme)
// The control-register offsets follow the usual layout of a high-level-synthesis
// control port (control word, interrupt enables, then the arguments); that
// layout and the map-select register are this design's own choices.
package chaos_pkg;

  typedef enum logic {
    MAP_EQ2 = 1'b0,
    MAP_EQ3 = 1'b1
  } map_e;

  typedef enum logic {
    BR_MULT  = 1'b0,   // Branch 1: select accumulator + multiply accumulator
    BR_SHIFT = 1'b1    // Branch 2: shifter
  } branch_e;

  // AXI4-Lite control register byte offsets
  localparam logic [5:0] REG_AP_CTRL = 6'h00;  // bit0 start, bit1 done (clear on read), bit2 idle, bit3 ready
  localparam logic [5:0] REG_GIE     = 6'h04;  // bit0 global interrupt enable
  localparam logic [5:0] REG_IER     = 6'h08;  // bit0 done, bit1 ready interrupt enable
  localparam logic [5:0] REG_ISR     = 6'h0C;  // bit0 done, bit1 ready status, write 1 toggles
  localparam logic [5:0] REG_M       = 6'h10;  // frame height m
  localparam logic [5:0] REG_N       = 6'h18;  // frame width n
  localparam logic [5:0] REG_T_LO    = 6'h20;  // timestamp / initial value y_0, bits 31:0
  localparam logic [5:0] REG_T_HI    = 6'h24;  // timestamp / initial value y_0, bits 63:32
  localparam logic [5:0] REG_ARRAY   = 6'h28;  // byte address of the output array
  localparam logic [5:0] REG_MAP     = 6'h30;  // bit0 map select (map_e)

  // AXI response codes
  localparam logic [1:0] AXI_OKAY   = 2'b00;
  localparam logic [1:0] AXI_SLVERR = 2'b10;

endpackage
