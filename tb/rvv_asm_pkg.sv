// rvv_asm_pkg: instruction encoders used by the testbenches to build the
// vector instructions the scalar core would send to the engine. They follow
// the RVV 1.0 layouts; vindexmac.vx uses funct6 = 101100 in the OPMVX format,
// as the engine's decoder does.
package rvv_asm_pkg;

  function automatic logic [31:0] op_v(logic [5:0] f6, logic [4:0] vs2, logic [4:0] f,
                                       logic [2:0] f3, logic [4:0] vd);
    return {f6, 1'b1, vs2, f, f3, vd, 7'b1010111};
  endfunction

  function automatic logic [31:0] vsetvli(logic [4:0] rd, logic [4:0] rs1, logic [10:0] vtypei);
    return {1'b0, vtypei, rs1, 3'b111, rd, 7'b1010111};
  endfunction
  // vtypei for e32, m1, tail/mask undisturbed
  localparam logic [10:0] E32M1 = 11'b000_0001_0000;

  function automatic logic [31:0] vle32(logic [4:0] vd, logic [4:0] rs1);
    return {6'b000000, 1'b1, 5'b00000, rs1, 3'b110, vd, 7'b0000111};
  endfunction
  function automatic logic [31:0] vse32(logic [4:0] vs3, logic [4:0] rs1);
    return {6'b000000, 1'b1, 5'b00000, rs1, 3'b110, vs3, 7'b0100111};
  endfunction

  function automatic logic [31:0] vadd_vv(logic [4:0] vd, logic [4:0] vs2, logic [4:0] vs1);
    return op_v(6'b000000, vs2, vs1, 3'b000, vd);
  endfunction
  function automatic logic [31:0] vadd_vx(logic [4:0] vd, logic [4:0] vs2, logic [4:0] rs1);
    return op_v(6'b000000, vs2, rs1, 3'b100, vd);
  endfunction
  function automatic logic [31:0] vadd_vi(logic [4:0] vd, logic [4:0] vs2, logic [4:0] imm);
    return op_v(6'b000000, vs2, imm, 3'b011, vd);
  endfunction
  function automatic logic [31:0] vmacc_vv(logic [4:0] vd, logic [4:0] vs1, logic [4:0] vs2);
    return op_v(6'b101101, vs2, vs1, 3'b010, vd);
  endfunction
  function automatic logic [31:0] vmacc_vx(logic [4:0] vd, logic [4:0] rs1, logic [4:0] vs2);
    return op_v(6'b101101, vs2, rs1, 3'b110, vd);
  endfunction
  // vindexmac.vx vd, vs2, rs
  function automatic logic [31:0] vindexmac_vx(logic [4:0] vd, logic [4:0] vs2, logic [4:0] rs);
    return op_v(6'b101100, vs2, rs, 3'b110, vd);
  endfunction
  function automatic logic [31:0] vslidedown_vi(logic [4:0] vd, logic [4:0] vs2, logic [4:0] imm);
    return op_v(6'b001111, vs2, imm, 3'b011, vd);
  endfunction
  function automatic logic [31:0] vslide1down_vx(logic [4:0] vd, logic [4:0] vs2, logic [4:0] rs1);
    return op_v(6'b001111, vs2, rs1, 3'b110, vd);
  endfunction
  function automatic logic [31:0] vmv_x_s(logic [4:0] rd, logic [4:0] vs2);
    return op_v(6'b010000, vs2, 5'd0, 3'b010, rd);
  endfunction

endpackage
