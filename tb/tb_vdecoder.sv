// tb_vdecoder: encodes every supported instruction with random register
// fields and checks the decoded operation, operand source and fields; then
// checks that masked forms, strided loads, other element widths and unknown
// funct6 codes are not legal.
module tb_vdecoder;
  import indexmac_pkg::*;
  import rvv_asm_pkg::*;
  logic [31:0] insn;
  vdec_t       dec;
  int checks = 0, failures = 0;

  vdecoder dut (.insn(insn), .dec(dec));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_dec(string what, vop_e op, src_e src, logic [4:0] vd, logic [4:0] vs2,
                            logic [4:0] f, logic chk_src, logic chk_vs2);
    #1;
    checks++;
    if (!dec.legal || dec.op != op || (chk_src && dec.src != src) || dec.vd != vd ||
        (chk_vs2 && dec.vs2 != vs2) || dec.vs1 != f || dec.rs1 != f || dec.imm5 != f) begin
      failures++;
      $display("FAIL %s: legal=%0d op=%s src=%s vd=%0d vs2=%0d f=%0d", what, dec.legal,
               dec.op.name(), dec.src.name(), dec.vd, dec.vs2, dec.vs1);
    end
  endtask

  task automatic expect_illegal(string what);
    #1;
    checks++;
    if (dec.legal) begin
      failures++;
      $display("FAIL %s decoded as legal (%s)", what, dec.op.name());
    end
  endtask

  initial begin
    for (int t = 0; t < 200; t++) begin
      logic [4:0] a, b, c;
      a = 5'($urandom); b = 5'($urandom); c = 5'($urandom);
      insn = vindexmac_vx(a, b, c);   expect_dec("vindexmac", VOP_VINDEXMAC, SRC_IDX, a, b, c, 1, 1);
      insn = vmacc_vx(a, c, b);       expect_dec("vmacc.vx", VOP_VMACC, SRC_VX, a, b, c, 1, 1);
      insn = vmacc_vv(a, c, b);       expect_dec("vmacc.vv", VOP_VMACC, SRC_VV, a, b, c, 1, 1);
      insn = vadd_vv(a, b, c);        expect_dec("vadd.vv", VOP_VADD, SRC_VV, a, b, c, 1, 1);
      insn = vadd_vx(a, b, c);        expect_dec("vadd.vx", VOP_VADD, SRC_VX, a, b, c, 1, 1);
      insn = vadd_vi(a, b, c);        expect_dec("vadd.vi", VOP_VADD, SRC_VI, a, b, c, 1, 1);
      insn = vslidedown_vi(a, b, c);  expect_dec("vslidedown", VOP_VSLIDEDOWN, SRC_VI, a, b, c, 0, 1);
      insn = vslide1down_vx(a, b, c); expect_dec("vslide1down", VOP_VSLIDE1DOWN, SRC_VX, a, b, c, 0, 1);
      insn = vle32(a, c);             expect_dec("vle32", VOP_VLE, SRC_VV, a, 0, c, 0, 0);
      insn = vse32(a, c);             expect_dec("vse32", VOP_VSE, SRC_VV, a, 0, c, 0, 0);
      insn = vmv_x_s(a, b);           expect_dec("vmv.x.s", VOP_VMV_X_S, SRC_VV, a, b, 0, 0, 1);
      insn = vsetvli(a, c, E32M1);    expect_dec("vsetvli", VOP_VSETVLI, SRC_VV, a, 0, c, 0, 0);
      checks++;
      if (dec.vtypei != E32M1 || dec.rd != a) begin
        failures++;
        $display("FAIL vsetvli fields");
      end
      // masked forms are not supported
      insn = vindexmac_vx(a, b, c); insn[25] = 1'b0; expect_illegal("masked vindexmac");
      insn = vmacc_vx(a, c, b);     insn[25] = 1'b0; expect_illegal("masked vmacc");
      // strided load (mop = 10), 8-bit elements, unused funct6
      insn = vle32(a, c); insn[27:26] = 2'b10;     expect_illegal("strided vle");
      insn = vle32(a, c); insn[14:12] = 3'b000;    expect_illegal("vle8");
      insn = vindexmac_vx(a, b, c); insn[31:26] = 6'b101110; expect_illegal("funct6 101110");
      insn = vindexmac_vx(a, b, c); insn[14:12] = 3'b100;    expect_illegal("funct6 101100 in OPIVX");
      insn = vmv_x_s(a, b); insn[19:15] = 5'd1;    expect_illegal("vwxunary0 vs1=1");
      insn = {$urandom} & 32'hFFFF_FF80 | 32'h33;  expect_illegal("scalar OP");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
