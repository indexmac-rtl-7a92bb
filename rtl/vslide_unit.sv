// vslide_unit: cross-lane slide towards element 0.
//
// The sparse kernels step through the non-zero values and column indices of a
// row of A by sliding both vectors by one element after each use, so that the
// next pair sits in element 0 (drawn as a slide "to the right" in the
// kernels' pseudo-code). Two RVV forms are provided:
//   one_x = 0 (vslidedown.vi): res[i] = vs2[i+off] if i+off < LANES, else 0
//   one_x = 1 (vslide1down.vx): res[i] = vs2[i+1] for i < vl-1,
//                               res[vl-1] = xs
// Elements at or beyond vl are masked off by the register-file write, so
// their value here does not matter. Combinational; one vector per cycle.
module vslide_unit #(
  parameter int unsigned VLEN = 512,
  parameter int unsigned ELEN = 32,
  localparam int unsigned LANES = VLEN / ELEN,
  localparam int unsigned VLW   = $clog2(LANES + 1)
) (
  input  logic              one_x,   // 1: vslide1down.vx, 0: vslidedown.vi
  input  logic [4:0]        off,     // uimm5 of vslidedown.vi
  input  logic [ELEN-1:0]   xs,      // value inserted by vslide1down
  input  logic [VLW-1:0]    vl,
  input  logic [VLEN-1:0]   vs2,
  output logic [VLEN-1:0]   res
);

  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      int unsigned src;
      src = one_x ? i + 1 : i + int'(off);
      if (one_x && i == int'(vl) - 1)
        res[i*ELEN +: ELEN] = xs;
      else if (src < LANES)
        res[i*ELEN +: ELEN] = vs2[src*ELEN +: ELEN];
      else
        res[i*ELEN +: ELEN] = '0;
    end
  end

endmodule
