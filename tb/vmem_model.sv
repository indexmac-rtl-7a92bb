// vmem_model: behavioural stand-in for the cache/memory behind the vector
// engine's memory port (not synthesizable; testbench only).
//
// A word-addressed array of 32-bit words (address bits [1:0] ignored). A
// request is accepted when mem_req_ready is high; ready is withheld at random
// with probability STALL_PCT percent, to exercise back-pressure. The response
// (load data or store acknowledge) comes LATENCY cycles after acceptance.
// Loads return the vector of LANES words starting at the request address;
// stores write the words whose four byte enables are all set.
module vmem_model #(
  parameter int unsigned VLEN      = 512,
  parameter int unsigned AW        = 64,
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned LATENCY   = 8,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  logic [AW-1:0]     mem_req_addr,
  input  logic              mem_req_we,
  input  logic [VLEN-1:0]   mem_req_wdata,
  input  logic [VLEN/8-1:0] mem_req_be,
  output logic              mem_resp_valid,
  output logic [VLEN-1:0]   mem_resp_rdata
);
  localparam int unsigned LANES = VLEN / 32;

  logic [31:0] mem [WORDS];
  int unsigned countdown;
  int unsigned n_req, n_load, n_store, n_stall;
  logic [VLEN-1:0] rdata_q;

  initial begin
    for (int i = 0; i < WORDS; i++) mem[i] = '0;
    n_req = 0; n_load = 0; n_store = 0; n_stall = 0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mem_req_ready  <= 1'b0;
      mem_resp_valid <= 1'b0;
      countdown      <= 0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (mem_req_valid && mem_req_ready) begin
        int unsigned w;
        w = int'(mem_req_addr >> 2);
        n_req <= n_req + 1;
        if (mem_req_we) begin
          n_store <= n_store + 1;
          for (int i = 0; i < LANES; i++)
            if (&mem_req_be[4*i +: 4]) mem[(w + i) % WORDS] <= mem_req_wdata[32*i +: 32];
        end else begin
          n_load <= n_load + 1;
          for (int i = 0; i < LANES; i++) rdata_q[32*i +: 32] <= mem[(w + i) % WORDS];
        end
        countdown     <= LATENCY;
        mem_req_ready <= 1'b0;
      end else if (countdown > 1) begin
        countdown <= countdown - 1;
      end else if (countdown == 1) begin
        countdown      <= 0;
        mem_resp_valid <= 1'b1;
      end else begin
        mem_req_ready <= ($urandom_range(99) >= STALL_PCT);
        if (mem_req_valid && !mem_req_ready) n_stall <= n_stall + 1;
      end
    end
  end

  assign mem_resp_rdata = rdata_q;
endmodule
