// ts_lod: two-step leading-one detection of one INT12 operand.
//
// The operand is split into its sign and an 11-bit magnitude (-2048 is
// clipped to 2047). The first step finds the leading one of the magnitude;
// the second clears that bit and finds the next one, so the value is
// approximated by two powers of two instead of one (the eager prediction
// engine's improvement over plain leading-one detection). Positions are
// counted from the MSB of the magnitude (position 0 = weight 2^10), as in the
// paper's log-domain arithmetic example. A missing one clears its valid bit.
// Purely combinational.
module ts_lod
  import exion_pkg::*;
(
  input  data_t   x,
  output ts_lod_t y
);
  logic [MAG_W-1:0] mag, rest;
  logic [DW-1:0]    absx;

  always_comb begin
    absx = x[DW-1] ? DW'(-x) : DW'(x);
    mag  = absx[DW-1] ? '1 : absx[MAG_W-1:0];
    y    = '0;
    y.sign = x[DW-1];
    rest = mag;
    for (int i = 0; i < MAG_W; i++) begin
      if (!y.v1 && mag[MAG_W-1-i]) begin
        y.v1 = 1'b1;
        y.p1 = POS_W'(i);
        rest[MAG_W-1-i] = 1'b0;
      end
    end
    for (int i = 0; i < MAG_W; i++) begin
      if (!y.v2 && rest[MAG_W-1-i]) begin
        y.v2 = 1'b1;
        y.p2 = POS_W'(i);
      end
    end
  end
endmodule
