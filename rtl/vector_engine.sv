// vector_engine: decoupled RISC-V vector engine with the vindexmac.vx
// instruction (top level).
//
// The scalar core fetches the program and sends each vector instruction,
// together with the value of its scalar source register rs1, over a
// valid/ready channel (insn, insn_rs1). The engine executes one instruction at
// a time, in order:
//   * arithmetic (vadd, vmacc, vindexmac) and slides take one cycle: the three
//     register-file read ports are read combinationally, the lanes or the
//     slide unit compute, and the result is written at the clock edge that
//     retires the instruction, so a new instruction is accepted every cycle;
//   * vle32.v / vse32.v start the load/store unit and retire when the memory
//     responds; insn_ready stays low meanwhile (the scalar core stalls);
//   * vsetvli and vmv.x.s retire in one cycle and return a scalar value
//     (res_valid, res_rd, res_data) in that cycle; the scalar core is assumed
//     to always accept it.
// vindexmac.vx vd, vs2, rs computes vd[i] += vs2[0] * vrf[rs[4:0]][i] for
// i < vl. It reuses the read ports and the lanes of vmacc.vx; the only extra
// hardware is vrf_read_addr_mux, which addresses read port 0 with rs[4:0]
// instead of vs1. This is how the paper builds it. The single-instruction,
// one-cycle sequencing, the memory port and the reset values (vl = VLMAX =
// VLEN/ELEN, all registers zero) are this design's own choices, because the
// engine the paper extends is not described.
//
// Only SEW = 32 and LMUL = 1 are supported. A vsetvli that asks for anything
// else sets vl = 0. An unsupported or masked instruction is dropped and flagged
// by a one-cycle pulse on `illegal`, in the cycle after it is accepted.
module vector_engine
  import indexmac_pkg::*;
#(
  parameter int unsigned VLEN = 512,
  parameter int unsigned ELEN = 32,
  parameter int unsigned XLEN = 64,
  localparam int unsigned LANES = VLEN / ELEN,
  localparam int unsigned VLW   = $clog2(LANES + 1),
  localparam int unsigned NBE   = VLEN / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // instruction channel from the scalar core
  input  logic              insn_valid,
  output logic              insn_ready,
  input  logic [31:0]       insn,
  input  logic [XLEN-1:0]   insn_rs1,
  // scalar results back to the scalar core
  output logic              res_valid,
  output logic [4:0]        res_rd,
  output logic [XLEN-1:0]   res_data,
  output logic              illegal,
  output logic              busy,
  // memory port towards the L2 cache
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [XLEN-1:0]   mem_req_addr,
  output logic              mem_req_we,
  output logic [VLEN-1:0]   mem_req_wdata,
  output logic [NBE-1:0]    mem_req_be,
  input  logic              mem_resp_valid,
  input  logic [VLEN-1:0]   mem_resp_rdata
);

  // ---------------------------------------------------------------- issue
  vdec_t           dec_in, cur;
  logic            cur_valid;
  logic [XLEN-1:0] cur_rs1;
  logic [VLW-1:0]  vl;
  logic            complete, accept, is_mem, lsu_started;

  vdecoder u_dec (.insn(insn), .dec(dec_in));

  assign is_mem     = (cur.op == VOP_VLE) || (cur.op == VOP_VSE);
  assign insn_ready = !cur_valid || complete;
  assign accept     = insn_valid && insn_ready;
  assign busy       = cur_valid;

  // ---------------------------------------------------------------- register file
  logic [4:0]      raddr [3];
  logic [VLEN-1:0] rdata [3];
  logic            vrf_we;
  logic [VLEN-1:0] vrf_wdata;
  logic [LANES-1:0] vl_mask;

  vrf_read_addr_mux #(.XLEN(XLEN), .AW(5)) u_amux (
    .sel_rs (cur.op == VOP_VINDEXMAC),
    .vs1    (cur.vs1),
    .rs     (cur_rs1),
    .raddr  (raddr[0])
  );
  assign raddr[1] = cur.vs2;
  assign raddr[2] = cur.vd;

  always_comb begin
    for (int e = 0; e < LANES; e++) vl_mask[e] = e < int'(vl);
  end

  vrf #(.NREG(NVREG), .VLEN(VLEN), .ELEN(ELEN), .NRD(3)) u_vrf (
    .clk   (clk),
    .rst_n (rst_n),
    .raddr (raddr),
    .rdata (rdata),
    .we    (vrf_we),
    .waddr (cur.vd),
    .wdata (vrf_wdata),
    .wmask (vl_mask)
  );

  // ---------------------------------------------------------------- execution units
  logic [VLEN-1:0] lane_res, slide_res, ld_data;
  logic            lsu_busy, lsu_done;

  vmac_lanes #(.VLEN(VLEN), .ELEN(ELEN)) u_lanes (
    .op   ((cur.op == VOP_VADD) ? LANE_ADD : LANE_MAC),
    .src  (cur.src),
    .va   (rdata[0]),
    .vb   (rdata[1]),
    .vc   (rdata[2]),
    .xs   (cur_rs1[ELEN-1:0]),
    .imm5 (cur.imm5),
    .res  (lane_res)
  );

  vslide_unit #(.VLEN(VLEN), .ELEN(ELEN)) u_slide (
    .one_x (cur.op == VOP_VSLIDE1DOWN),
    .off   (cur.imm5),
    .xs    (cur_rs1[ELEN-1:0]),
    .vl    (vl),
    .vs2   (rdata[1]),
    .res   (slide_res)
  );

  vlsu #(.VLEN(VLEN), .ELEN(ELEN), .AW(XLEN)) u_lsu (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (cur_valid && is_mem && !lsu_started && !lsu_busy),
    .is_store       (cur.op == VOP_VSE),
    .addr           (cur_rs1),
    .vl             (vl),
    .st_data        (rdata[2]),
    .busy           (lsu_busy),
    .done           (lsu_done),
    .ld_data        (ld_data),
    .mem_req_valid  (mem_req_valid),
    .mem_req_ready  (mem_req_ready),
    .mem_req_addr   (mem_req_addr),
    .mem_req_we     (mem_req_we),
    .mem_req_wdata  (mem_req_wdata),
    .mem_req_be     (mem_req_be),
    .mem_resp_valid (mem_resp_valid),
    .mem_resp_rdata (mem_resp_rdata)
  );

  assign complete = cur_valid && (is_mem ? lsu_done : 1'b1);

  // ---------------------------------------------------------------- write-back
  always_comb begin
    vrf_we    = 1'b0;
    vrf_wdata = lane_res;
    if (cur_valid) begin
      unique case (cur.op)
        VOP_VADD, VOP_VMACC, VOP_VINDEXMAC: begin
          vrf_we = 1'b1;
        end
        VOP_VSLIDEDOWN, VOP_VSLIDE1DOWN: begin
          vrf_we    = 1'b1;
          vrf_wdata = slide_res;
        end
        VOP_VLE: begin
          vrf_we    = lsu_done;
          vrf_wdata = ld_data;
        end
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- vsetvli
  logic            vtype_ok;
  logic [XLEN-1:0] avl;
  logic [VLW-1:0]  new_vl;
  logic            keep_vl;

  always_comb begin
    vtype_ok = (cur.vtypei[5:3] == VSEW_E32) && (cur.vtypei[2:0] == VLMUL_M1) &&
               (cur.vtypei[10:8] == 3'b000);
    keep_vl  = (cur.rs1 == 5'd0) && (cur.rd == 5'd0);
    avl      = (cur.rs1 != 5'd0) ? cur_rs1 : '1;
    if (!vtype_ok)             new_vl = '0;
    else if (keep_vl)          new_vl = vl;
    else if (avl >= XLEN'(LANES)) new_vl = VLW'(LANES);
    else                       new_vl = VLW'(avl);
  end

  assign res_valid = cur_valid && ((cur.op == VOP_VSETVLI) || (cur.op == VOP_VMV_X_S));
  assign res_rd    = cur.rd;
  assign res_data  = (cur.op == VOP_VSETVLI) ? XLEN'(new_vl)
                                            : XLEN'(signed'(rdata[1][ELEN-1:0]));

  // ---------------------------------------------------------------- state
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cur_valid   <= 1'b0;
      cur         <= '0;
      cur_rs1     <= '0;
      vl          <= VLW'(LANES);
      lsu_started <= 1'b0;
      illegal     <= 1'b0;
    end else begin
      illegal <= accept && !dec_in.legal;
      if (cur_valid && cur.op == VOP_VSETVLI) vl <= new_vl;
      if (cur_valid && is_mem && !lsu_started) lsu_started <= 1'b1;
      if (complete) lsu_started <= 1'b0;
      if (accept) begin
        cur_valid <= dec_in.legal;
        cur       <= dec_in;
        cur_rs1   <= insn_rs1;
      end else if (complete) begin
        cur_valid <= 1'b0;
      end
    end
  end

  // The scalar core keeps an offered instruction and its operand stable.
  a_insn_stable: assert property (@(posedge clk) disable iff (!rst_n)
    insn_valid && !insn_ready |=> insn_valid && $stable(insn) && $stable(insn_rs1));

  // vindexmac reads its vector operand through port 0 at address rs[4:0].
  a_indexed_read: assert property (@(posedge clk) disable iff (!rst_n)
    cur_valid && cur.op == VOP_VINDEXMAC |-> raddr[0] == cur_rs1[4:0]);

endmodule
