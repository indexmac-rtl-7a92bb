// vlsu: unit-stride vector load/store unit.
//
// Executes vle32.v and vse32.v: one vector of vl 32-bit elements at
// consecutive addresses starting at the base address taken from the scalar
// register rs1. Each access is a single request on a vector-wide memory port
// (the engine's path towards the shared L2 cache): element i travels in bits
// [32i +: 32] of the data bus and lives at address base + 4i. Byte enables
// cover the first vl elements only, so a store leaves the bytes of the tail in
// memory untouched. The port follows a valid/ready request handshake and a
// response (load data, or a store acknowledge) marked by mem_resp_valid; one
// access is outstanding at a time.
//
// Sequence: start (one cycle, unit idle) -> request held until mem_req_ready
// -> wait for mem_resp_valid; done is high in the response cycle, and ld_data
// is valid then. The split of an access that crosses a cache line and the
// separate per-lane load and store queues of the engine the paper evaluates
// are not modelled: the memory side is assumed to accept any element-aligned
// address.
module vlsu #(
  parameter int unsigned VLEN = 512,
  parameter int unsigned ELEN = 32,
  parameter int unsigned AW   = 64,
  localparam int unsigned LANES = VLEN / ELEN,
  localparam int unsigned VLW   = $clog2(LANES + 1),
  localparam int unsigned NBE   = VLEN / 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the sequencer
  input  logic              start,
  input  logic              is_store,
  input  logic [AW-1:0]     addr,
  input  logic [VLW-1:0]    vl,
  input  logic [VLEN-1:0]   st_data,
  output logic              busy,
  output logic              done,
  output logic [VLEN-1:0]   ld_data,
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic [AW-1:0]     mem_req_addr,
  output logic              mem_req_we,
  output logic [VLEN-1:0]   mem_req_wdata,
  output logic [NBE-1:0]    mem_req_be,
  input  logic              mem_resp_valid,
  input  logic [VLEN-1:0]   mem_resp_rdata
);

  typedef enum logic [1:0] {L_IDLE, L_REQ, L_WAIT} lstate_e;
  lstate_e state;

  logic [AW-1:0]   a_q;
  logic            we_q;
  logic [VLEN-1:0] d_q;
  logic [NBE-1:0]  be_q;
  logic [NBE-1:0]  be_d;

  always_comb begin
    for (int b = 0; b < NBE; b++) be_d[b] = (b / (ELEN / 8)) < int'(vl);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= L_IDLE;
      a_q   <= '0;
      we_q  <= 1'b0;
      d_q   <= '0;
      be_q  <= '0;
    end else begin
      unique case (state)
        L_IDLE: if (start) begin
          a_q   <= addr;
          we_q  <= is_store;
          d_q   <= st_data;
          be_q  <= be_d;
          state <= L_REQ;
        end
        L_REQ:  if (mem_req_ready) state <= L_WAIT;
        L_WAIT: if (mem_resp_valid) state <= L_IDLE;
        default: state <= L_IDLE;
      endcase
    end
  end

  assign busy          = (state != L_IDLE);
  assign done          = (state == L_WAIT) && mem_resp_valid;
  assign ld_data       = mem_resp_rdata;
  assign mem_req_valid = (state == L_REQ);
  assign mem_req_addr  = a_q;
  assign mem_req_we    = we_q;
  assign mem_req_wdata = d_q;
  assign mem_req_be    = be_q;

  // A request, once raised, stays up with stable contents until accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we));
  // start is only given to an idle unit
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
