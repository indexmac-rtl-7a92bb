// tb_vmac_lanes: random operands through every (operation, source) pair the
// engine uses, compared with a per-element reference computed here:
//   MAC/VV  vc + va*vb        MAC/VX  vc + xs*vb
//   MAC/IDX vc + vb[0]*va     ADD/VV  vb + va
//   ADD/VX  vb + xs           ADD/VI  vb + sext(imm5)
// It also checks the vindexmac example drawn in the paper's figure 3 (vs2 =
// v8, indexed register v7, vd = v5) with concrete numbers.
module tb_vmac_lanes;
  import indexmac_pkg::*;
  localparam int VLEN = 512, ELEN = 32, LANES = VLEN / ELEN;
  lane_op_e op;
  src_e     src;
  logic [VLEN-1:0] va, vb, vc, res;
  logic [ELEN-1:0] xs;
  logic [4:0]      imm5;
  int checks = 0, failures = 0;
  int unsigned sel;

  vmac_lanes dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VLEN-1:0] rnd_vec(int narrow);
    logic [VLEN-1:0] v;
    for (int i = 0; i < LANES; i++) v[32*i +: 32] = narrow ? $urandom_range(20) : $urandom;
    return v;
  endfunction

  function automatic logic [31:0] expect_elem(int i);
    logic [31:0] a = va[32*i +: 32], b = vb[32*i +: 32], c = vc[32*i +: 32];
    logic [31:0] b0 = vb[31:0], ie = {{27{imm5[4]}}, imm5};
    if (op == LANE_MAC) begin
      unique case (src)
        SRC_VV:  return c + a * b;
        SRC_VX:  return c + xs * b;
        SRC_IDX: return c + b0 * a;
        default: return c + ie * b;
      endcase
    end else begin
      unique case (src)
        SRC_VV:  return b + a;
        SRC_VX:  return b + xs;
        SRC_VI:  return b + ie;
        default: return b + a;
      endcase
    end
  endfunction

  initial begin
    // Figure 3 example: vindexmac.vx v5, v8, x5 with x5 = 7
    op = LANE_MAC; src = SRC_IDX; xs = 32'd7; imm5 = 0;
    for (int i = 0; i < LANES; i++) begin
      va[32*i +: 32] = 32'(i + 1);        // v7 = 1, 2, 3, ...
      vb[32*i +: 32] = 32'(3 + 100 * i);  // v8[0] = 3
      vc[32*i +: 32] = 32'(1000 * i);     // v5
    end
    #1;
    for (int i = 0; i < LANES; i++) begin
      checks++;
      if (res[32*i +: 32] !== 32'(1000 * i + 3 * (i + 1))) begin
        failures++;
        $display("FAIL fig3 lane %0d: %0d", i, res[32*i +: 32]);
      end
    end
    for (int t = 0; t < 2000; t++) begin
      op   = ($urandom_range(1) == 1) ? LANE_MAC : LANE_ADD;
      sel = $urandom_range(3);
      case (sel)
        0: src = SRC_VV;
        1: src = SRC_VX;
        2: src = SRC_VI;
        default: src = SRC_IDX;
      endcase
      if (op == LANE_MAC && src == SRC_VI) src = SRC_IDX;
      if (op == LANE_ADD && src == SRC_IDX) src = SRC_VV;
      va = rnd_vec(t < 500); vb = rnd_vec(t < 500); vc = rnd_vec(0);
      xs = $urandom; imm5 = 5'($urandom);
      #1;
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (res[32*i +: 32] !== expect_elem(i)) begin
          failures++;
          if (failures < 10)
            $display("FAIL op=%s src=%s lane %0d got %h exp %h", op.name(), src.name(), i,
                     res[32*i +: 32], expect_elem(i));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
