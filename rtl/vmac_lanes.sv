// vmac_lanes: the arithmetic lanes of the vector engine.
//
// LANES identical 32-bit lanes (16 x 32 bit = 512 bit by default) each
// compute, in one combinational pass, either a multiply-accumulate
//     res[i] = vc[i] + a_i * b_i
// or an add
//     res[i] = b_i + a_i
// The operands follow the RVV semantics of the instruction source:
//   SRC_VV  (vmacc.vv, vadd.vv): a_i = va[i] (port 0 = vs1), b_i = vb[i] (vs2)
//   SRC_VX  (vmacc.vx, vadd.vx): a_i = xs (scalar from the core), b_i = vb[i]
//   SRC_VI  (vadd.vi):           a_i = sign-extended imm5, b_i = vb[i]
//   SRC_IDX (vindexmac.vx):      a_i = va[i], the register addressed by rs[4:0]
//                                through port 0, b_i = vb[0], element 0 of vs2
//                                broadcast to every lane
// vindexmac therefore uses the same multiplier and adder as vmacc.vx; only
// the broadcast value comes from vs2[0] instead of the scalar register and
// the vector operand comes from the indirectly read register. Elements are
// treated as 32-bit integers and results wrap modulo 2^32 (the low half of
// the product, as vmacc does); the element type is this design's choice.
// Masking of elements beyond vl is left to the register-file write mask.
module vmac_lanes
  import indexmac_pkg::*;
#(
  parameter int unsigned VLEN = 512,
  parameter int unsigned ELEN = 32,
  localparam int unsigned LANES = VLEN / ELEN
) (
  input  lane_op_e          op,
  input  src_e              src,
  input  logic [VLEN-1:0]   va,    // port 0: vs1 or vrf[rs[4:0]]
  input  logic [VLEN-1:0]   vb,    // port 1: vs2
  input  logic [VLEN-1:0]   vc,    // port 2: vd (accumulator)
  input  logic [ELEN-1:0]   xs,    // scalar operand from the scalar core
  input  logic [4:0]        imm5,
  output logic [VLEN-1:0]   res
);

  logic [ELEN-1:0] bcast;   // value broadcast to every lane

  always_comb begin
    unique case (src)
      SRC_VX:  bcast = xs;
      SRC_VI:  bcast = ELEN'(signed'(imm5));
      SRC_IDX: bcast = vb[ELEN-1:0];
      default: bcast = '0;
    endcase
  end

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic [ELEN-1:0] a, b, c, prod, sum;
    always_comb begin
      c = vc[i*ELEN +: ELEN];
      unique case (src)
        SRC_VV:  begin a = va[i*ELEN +: ELEN]; b = vb[i*ELEN +: ELEN]; end
        SRC_IDX: begin a = va[i*ELEN +: ELEN]; b = bcast;              end
        default: begin a = bcast;              b = vb[i*ELEN +: ELEN]; end
      endcase
      prod = a * b;
      sum  = (op == LANE_MAC) ? c + prod : b + a;
    end
    assign res[i*ELEN +: ELEN] = sum;
  end

endmodule
