// vdecoder: combinational decoder for the RISC-V vector instructions the
// engine executes.
//
// It recognises the RVV 1.0 encodings needed by the row-wise sparse x dense
// kernels (with and without vindexmac): vsetvli, vle32.v, vse32.v (unit
// stride), vadd.vv/.vx/.vi, vmacc.vv/.vx, vslidedown.vi, vslide1down.vx,
// vmv.x.s and the new vindexmac.vx. vindexmac uses the ordinary .vx layout
// (funct6 | vm | vs2 | rs1 | 110 | vd | 1010111), as the scalar-vector
// instructions do; its funct6 value 101100 is this design's choice, because
// no code is given for it. Masked forms (vm = 0), segment or strided memory
// accesses and other element widths are reported as not legal.
//
// Interface: insn in, vdec_t out, no clock; the result is valid in the same
// cycle.
module vdecoder
  import indexmac_pkg::*;
(
  input  logic [31:0] insn,
  output vdec_t       dec
);

  logic [6:0] opcode;
  logic [2:0] funct3;
  logic [5:0] funct6;
  logic       vm;

  assign opcode = insn[6:0];
  assign funct3 = insn[14:12];
  assign funct6 = insn[31:26];
  assign vm     = insn[25];

  always_comb begin
    dec        = '0;
    dec.op     = VOP_NONE;
    dec.src    = SRC_VV;
    dec.vd     = insn[11:7];
    dec.rd     = insn[11:7];
    dec.vs2    = insn[24:20];
    dec.vs1    = insn[19:15];
    dec.rs1    = insn[19:15];
    dec.imm5   = insn[19:15];
    dec.vtypei = insn[30:20];

    unique case (opcode)
      OPC_LOAD_FP, OPC_STORE_FP: begin
        // nf = 0, mew = 0, mop = unit stride, lumop/sumop = 0, unmasked, e32
        if (insn[31:26] == 6'b000000 && vm && insn[24:20] == 5'd0 && funct3 == W_E32) begin
          dec.legal = 1'b1;
          dec.op    = (opcode == OPC_LOAD_FP) ? VOP_VLE : VOP_VSE;
        end
      end
      OPC_OP_V: begin
        if (funct3 == F3_OPCFG) begin
          if (!insn[31]) begin
            dec.legal = 1'b1;
            dec.op    = VOP_VSETVLI;
          end
        end else if (vm) begin
          unique case (funct3)
            F3_OPIVV, F3_OPIVX, F3_OPIVI: begin
              if (funct6 == F6_VADD) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VADD;
                dec.src   = (funct3 == F3_OPIVV) ? SRC_VV :
                            (funct3 == F3_OPIVX) ? SRC_VX : SRC_VI;
              end else if (funct6 == F6_VSLIDEDOWN && funct3 == F3_OPIVI) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VSLIDEDOWN;
                dec.src   = SRC_VI;
              end
            end
            F3_OPMVV: begin
              if (funct6 == F6_VMACC) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VMACC;
                dec.src   = SRC_VV;
              end else if (funct6 == F6_VWXUNARY0 && insn[19:15] == 5'd0) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VMV_X_S;
              end
            end
            F3_OPMVX: begin
              if (funct6 == F6_VMACC) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VMACC;
                dec.src   = SRC_VX;
              end else if (funct6 == F6_VINDEXMAC) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VINDEXMAC;
                dec.src   = SRC_IDX;
              end else if (funct6 == F6_VSLIDEDOWN) begin
                dec.legal = 1'b1;
                dec.op    = VOP_VSLIDE1DOWN;
                dec.src   = SRC_VX;
              end
            end
            default: ;
          endcase
        end
      end
      default: ;
    endcase
  end

endmodule
