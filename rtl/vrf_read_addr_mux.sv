// vrf_read_addr_mux: the one piece of hardware that vindexmac adds to a
// vector engine.
//
// A scalar-vector multiply-add already reads three vector registers: the
// vector operand through the read port normally addressed by vs1, vs2, and
// the accumulator vd. For vindexmac the first port is instead addressed by the
// five least significant bits of the scalar operand rs, which the scalar core
// delivers with the instruction. This module is that 5-bit 2-to-1
// multiplexer, as the paper describes it; the port count of the register file
// does not change.
//
// Interface: sel_rs selects rs[AW-1:0] (vindexmac) over vs1. Combinational.
// The upper XLEN-AW bits of rs are unused on purpose: only the register
// number matters, so a larger value simply wraps modulo 32.
module vrf_read_addr_mux #(
  parameter int unsigned XLEN = 64,
  parameter int unsigned AW   = 5
) (
  input  logic            sel_rs,
  input  logic [AW-1:0]   vs1,
  input  logic [XLEN-1:0] rs,
  output logic [AW-1:0]   raddr
);

  assign raddr = sel_rs ? rs[AW-1:0] : vs1;

endmodule
