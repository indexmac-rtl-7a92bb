// vrf: vector register file with three read ports and one write port.
//
// NREG registers of VLEN bits, split into VLEN/ELEN elements. Port 0 carries
// the vs1 operand, or the indirectly addressed register of vindexmac; port 1
// carries vs2; port 2 carries the accumulator vd (or the store data vs3).
// These three ports are the ones a scalar-vector multiply-add needs, which is
// why vindexmac needs no extra port. Reads are combinational. The write
// happens at the rising clock edge and updates only the elements whose bit in
// wmask is set, which gives the tail-undisturbed behaviour for elements at or
// beyond vl. A synchronous active-low reset clears every register; that is
// this design's choice. The array is written as flip-flops so that the three
// reads are available in the same cycle; a real implementation would use a
// banked multi-port memory.
module vrf #(
  parameter int unsigned NREG = 32,
  parameter int unsigned VLEN = 512,
  parameter int unsigned ELEN = 32,
  parameter int unsigned NRD  = 3,
  localparam int unsigned AW    = $clog2(NREG),
  localparam int unsigned LANES = VLEN / ELEN
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [AW-1:0]       raddr [NRD],
  output logic [VLEN-1:0]     rdata [NRD],
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic [VLEN-1:0]     wdata,
  input  logic [LANES-1:0]    wmask
);

  logic [VLEN-1:0] regs [NREG];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int r = 0; r < NREG; r++) regs[r] <= '0;
    end else if (we) begin
      for (int e = 0; e < LANES; e++) begin
        if (wmask[e]) regs[waddr][e*ELEN +: ELEN] <= wdata[e*ELEN +: ELEN];
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NRD; p++) rdata[p] = regs[raddr[p]];
  end

endmodule
