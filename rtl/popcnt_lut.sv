// popcnt_lut: one 8-bit popcount lookup table (LT) of the NN executor.
//
// A 256-entry table maps an 8-bit slice of the XNOR result to the number of
// ones in it. Each layer block holds n/8 of these tables side by side, so a
// 256-bit XNOR result is counted by 32 tables in parallel (second pipeline
// stage of a block). The table size and its use follow the paper; the table
// contents are computed at elaboration by a function rather than loaded from
// a file, which is this design's choice.
//
// Interface: addr (8 bits) in, count (4 bits, 0..8) out. Purely
// combinational: a ROM read with no clock; the register after it belongs to
// the enclosing block.
module popcnt_lut
  import n3ic_pkg::*;
(
  input  logic [LT_W-1:0]  addr,
  output logic [LT_CW-1:0] count
);

  typedef logic [LT_CW-1:0] lut_t [2**LT_W];

  // Entry i holds the number of set bits of i.
  function automatic lut_t build_lut();
    lut_t t;
    for (int i = 0; i < 2**LT_W; i++) begin
      int c;
      c = 0;
      for (int b = 0; b < LT_W; b++) c += (i >> b) & 1;
      t[i] = LT_CW'(c);
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  assign count = LUT[addr];

endmodule
