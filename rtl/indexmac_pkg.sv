// indexmac_pkg: types and constants shared by the vector engine that executes
// the vindexmac.vx instruction (vd[i] += vs2[0] * vrf[rs[4:0]][i]).
//
// It holds the RISC-V vector (RVV 1.0) encoding constants of the instructions
// the engine understands, the decoded-instruction structure the decoder hands
// to the sequencer, and the enums that steer the lanes and the slide unit.
// The register file has 32 architectural registers, as RVV fixes and as the
// 5-bit register address of vindexmac implies. VLEN, ELEN and XLEN are module
// parameters (defaults 512, 32 and 64); only the register-number width is
// fixed here.
//
// The funct6 code of vindexmac is this design's own choice: the instruction
// uses the OPMVX (.vx, funct3 = 110) format like vmacc.vx, and takes funct6 =
// 101100, a code that RVV 1.0 leaves unused in the OPMVX space.
package indexmac_pkg;

  localparam int unsigned VREG_AW = 5;   // 32 vector registers
  localparam int unsigned NVREG   = 32;

  // Major opcodes
  localparam logic [6:0] OPC_OP_V    = 7'b1010111;
  localparam logic [6:0] OPC_LOAD_FP = 7'b0000111;
  localparam logic [6:0] OPC_STORE_FP= 7'b0100111;

  // OP-V funct3 categories
  localparam logic [2:0] F3_OPIVV = 3'b000;
  localparam logic [2:0] F3_OPMVV = 3'b010;
  localparam logic [2:0] F3_OPIVI = 3'b011;
  localparam logic [2:0] F3_OPIVX = 3'b100;
  localparam logic [2:0] F3_OPMVX = 3'b110;
  localparam logic [2:0] F3_OPCFG = 3'b111;

  // Load/store width field for 32-bit elements
  localparam logic [2:0] W_E32 = 3'b110;

  // funct6 codes
  localparam logic [5:0] F6_VADD       = 6'b000000;  // OPIVV/OPIVX/OPIVI
  localparam logic [5:0] F6_VSLIDEDOWN = 6'b001111;  // OPIVI: vslidedown.vi, OPMVX: vslide1down.vx
  localparam logic [5:0] F6_VWXUNARY0  = 6'b010000;  // OPMVV, vs1 = 0: vmv.x.s
  localparam logic [5:0] F6_VMACC      = 6'b101101;  // OPMVV/OPMVX
  localparam logic [5:0] F6_VINDEXMAC  = 6'b101100;  // OPMVX (this design's choice)

  // vtype: only SEW = 32 (vsew = 010) and LMUL = 1 (vlmul = 000) are supported
  localparam logic [2:0] VSEW_E32 = 3'b010;
  localparam logic [2:0] VLMUL_M1 = 3'b000;

  typedef enum logic [3:0] {
    VOP_NONE,
    VOP_VSETVLI,
    VOP_VLE,
    VOP_VSE,
    VOP_VADD,
    VOP_VMACC,
    VOP_VINDEXMAC,
    VOP_VSLIDEDOWN,
    VOP_VSLIDE1DOWN,
    VOP_VMV_X_S
  } vop_e;

  // Where the non-accumulator operand of the lanes comes from
  typedef enum logic [1:0] {
    SRC_VV,    // element-wise vector (port 0 = vs1)
    SRC_VX,    // scalar from the scalar core, broadcast
    SRC_VI,    // 5-bit sign-extended immediate, broadcast
    SRC_IDX    // vindexmac: vector from port 0 (vrf[rs[4:0]]), multiplier vs2[0]
  } src_e;

  typedef enum logic {
    LANE_ADD,
    LANE_MAC
  } lane_op_e;

  typedef struct packed {
    logic                 legal;      // recognised and supported
    vop_e                 op;
    src_e                 src;
    logic [VREG_AW-1:0]   vd;         // also vs3 of a store
    logic [VREG_AW-1:0]   vs1;
    logic [VREG_AW-1:0]   vs2;
    logic [4:0]           rd;         // scalar destination (vsetvli, vmv.x.s)
    logic [4:0]           rs1;        // scalar source number (avl rule of vsetvli)
    logic [4:0]           imm5;       // simm5 / uimm5
    logic [10:0]          vtypei;     // vsetvli immediate
  } vdec_t;

endpackage
