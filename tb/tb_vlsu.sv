// tb_vlsu: the load/store unit against the behavioural memory. Stores random
// vectors with random vl to random word addresses, reads memory back through
// loads, and checks loaded data, that a store leaves the tail words of memory
// untouched, and that every access takes exactly the memory latency plus the
// cycles the request waited for ready plus two (start and request cycles).
module tb_vlsu;
  localparam int VLEN = 512, LANES = 16, LAT = 8;
  logic clk = 0, rst_n = 0;
  logic start, is_store, busy, done;
  logic [63:0] addr;
  logic [4:0]  vl;
  logic [VLEN-1:0] st_data, ld_data;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0] mem_req_addr;
  logic [VLEN-1:0] mem_req_wdata, mem_resp_rdata;
  logic [VLEN/8-1:0] mem_req_be;
  logic [31:0] shadow [4096];
  int checks = 0, failures = 0, stall_cycles = 0;

  vlsu dut (.*);
  vmem_model #(.LATENCY(LAT), .STALL_PCT(30)) u_mem (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (mem_req_valid && !mem_req_ready) stall_cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(logic st, logic [63:0] a, logic [4:0] n, logic [VLEN-1:0] d,
                        output logic [VLEN-1:0] q);
    int cycles, s0;
    @(negedge clk);
    start = 1; is_store = st; addr = a; vl = n; st_data = d;
    s0 = stall_cycles; cycles = 0;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    q = ld_data;
    checks++;
    if (cycles != LAT + 2 + (stall_cycles - s0)) begin
      failures++;
      $display("FAIL latency %0d, stalls %0d", cycles, stall_cycles - s0);
    end
    @(negedge clk);
  endtask

  initial begin
    logic [VLEN-1:0] d, q;
    start = 0; is_store = 0; addr = 0; vl = 0; st_data = 0;
    for (int i = 0; i < 4096; i++) shadow[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      int w, n;
      w = $urandom_range(4000);
      n = $urandom_range(1, LANES);
      for (int i = 0; i < LANES; i++) d[32*i +: 32] = $urandom;
      access(1, 64'(4 * w), 5'(n), d, q);
      for (int i = 0; i < n; i++) shadow[w + i] = d[32*i +: 32];
      // read back a full vector from a nearby address
      w = (w >= 5) ? w - $urandom_range(5) : w;
      access(0, 64'(4 * w), 5'(LANES), '0, q);
      for (int i = 0; i < LANES; i++) begin
        checks++;
        if (q[32*i +: 32] !== shadow[(w + i) % 4096]) begin
          failures++;
          if (failures < 10) $display("FAIL load word %0d got %h exp %h", w + i, q[32*i +: 32],
                                      shadow[(w + i) % 4096]);
        end
      end
    end
    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("FAIL memory back-pressure never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
