// chaos_ref_pkg: reference model of the two chaotic maps for the testbenches.
//
// Written the way the software version of the scheme computes the maps, with
// 64-bit unsigned integers: the multiply step is ((y >> 32) + 1) * ((y & mask) + 1) + 1
// with natural 64-bit wrap-around, and the rotate step moves the word left one
// bit at a time, s = y % 64 times, which shares no structure with the RTL's
// barrel rotator. Also holds the test vectors published for both maps: ten
// successive outputs of each map from an FPGA and a Raspberry Pi run, and the
// initial value (a Unix timestamp) that produces the first map's first output.
package chaos_ref_pkg;

  function automatic longint unsigned ref_mult(input longint unsigned y);
    longint unsigned hi, lo;
    hi = (y >> 32) + 64'd1;
    lo = (y & 64'h0000_0000_FFFF_FFFF) + 64'd1;
    return hi * lo + 64'd1;
  endfunction

  function automatic longint unsigned ref_rot(input longint unsigned y);
    longint unsigned r;
    int s;
    r = y;
    s = int'(y % 64);
    for (int i = 0; i < s; i++) r = {r[62:0], r[63]};
    return r;
  endfunction

  // y_k from y_{k-1}; map 0 rotates on odd k, map 1 multiplies on odd k
  function automatic longint unsigned ref_step(input longint unsigned y, input int unsigned k,
                                               input bit map);
    bit rot;
    rot = ((k % 2) == 1) ? !map : map;
    return rot ? ref_rot(y) : ref_mult(y);
  endfunction

  // published values, rows 1..10; not every row follows from the previous one
  localparam longint unsigned TV_EQ2 [10] = '{
    64'h7598000000033e4a, 64'h00017d65438b3e4c, 64'h17d65438b3e4c000, 64'h10c029a7b4c5143a,
    64'he84300a69ed31450, 64'h0902c716f3b85529, 64'h70aa5212058e2de7, 64'h0271e647f051b839,
    64'h7204e3cc8fe0a370, 64'h4014c8524794147e};
  localparam longint unsigned TV_EQ3 [10] = '{
    64'h0844581288ce6a18, 64'h1288ce6a18084458, 64'h01bd6c9343bc2f34, 64'hf3401bd6c9343bc2,
    64'h02baa010501ffd89, 64'h754020a03ffb1205, 64'h1d4dc628dea715c7, 64'ha6e3146f538ae38e,
    64'h3c0832623be29e20, 64'h3be29e203c083262};
  // y_0 for which the first map gives TV_EQ2[0] as y_1
  localparam longint unsigned TV_Y0 = 64'h0000_0000_67c9_4eb3;

endpackage
