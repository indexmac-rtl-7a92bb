// tb_workload_gemm: a small convolution layer, lowered to a structured-sparse
// x dense GEMM (A = pruned weights, B = input features), run on the vector
// engine at its default size with the vindexmac kernel, for 1:4 and 2:4
// sparsity.
//
// Shape: A is 8 x 32 (8 output channels, reduction length 32), B is 32 x 32
// (32 output pixels). The product is computed tile by tile, as the kernel
// requires: for each 16-column slice of B and each 16-row tile of B along the
// reduction, the tile is loaded into v16..v31 and every row of A is applied
// to it; rows of C are reloaded and stored between tiles, so partial sums
// accumulate in memory. Rows of A are processed four at a time with the
// vindexmac instructions of the four rows interleaved (the four-way unrolling
// used in the evaluation), which occupies v1..v13 besides the tile.
// The result is compared with a reference product computed here; the run
// must use both reduction tiles and all 16 tile registers.
module tb_workload_gemm;
  import rvv_asm_pkg::*;
  localparam int VLEN = 512, LANES = 16, WORDS = 16384;
  localparam int MR = 8, K = 32, NC = 32, L = 16, M = 4;
  localparam int B_W = 'h0000, VAL_W = 'h1000, IDX_W = 'h1400, C_W = 'h2000, OFF_W = 'h3000;

  logic clk = 0, rst_n = 0;
  logic insn_valid, insn_ready, res_valid, illegal, busy;
  logic [31:0] insn;
  logic [63:0] insn_rs1, res_data;
  logic [4:0]  res_rd;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [63:0] mem_req_addr;
  logic [VLEN-1:0] mem_req_wdata, mem_resp_rdata;
  logic [VLEN/8-1:0] mem_req_be;

  vector_engine dut (.*);
  vmem_model #(.WORDS(WORDS), .LATENCY(8), .STALL_PCT(10)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_res = 0, n_vindexmac = 0, n_creload = 0;
  longint cycle = 0;
  logic [63:0] last_res;
  int unsigned Aw [MR][K];
  int unsigned Bw [K][NC];
  logic [31:0] regs_used;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (res_valid) begin last_res <= res_data; n_res <= n_res + 1; end
    if (dut.cur_valid && dut.cur.op == indexmac_pkg::VOP_VINDEXMAC) regs_used[dut.raddr[0]] <= 1'b1;
    if (illegal) failures++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(logic [31:0] i, logic [63:0] rs1 = 0);
    insn_valid = 1; insn = i; insn_rs1 = rs1;
    while (!insn_ready) @(negedge clk);
    @(negedge clk);
    insn_valid = 0;
    if (i[6:0] == 7'b1010111 && i[14:12] == 3'b110 && i[31:26] == 6'b101100) n_vindexmac++;
  endtask

  task automatic issue_get(logic [31:0] i, logic [63:0] rs1, output logic [63:0] r);
    int n0 = n_res;
    issue(i, rs1);
    while (n_res == n0) @(negedge clk);
    r = last_res;
  endtask

  task automatic setvl(int avl);
    logic [63:0] r;
    issue_get(vsetvli(5'd10, 5'd11, E32M1), 64'(avl), r);
  endtask

  task automatic run_layer(int N);
    int nnz = (L / M) * N;
    logic [63:0] s0;
    longint t0;
    int a0;
    // data: weights pruned to N:M, features dense
    for (int r = 0; r < MR; r++)
      for (int kt = 0; kt < K / L; kt++) begin
        int e = 0;
        for (int b = 0; b < L / M; b++) begin
          int p0 = $urandom_range(M - 1);
          int p1 = (p0 + 1 + $urandom_range(M - 2)) % M;
          if (p1 < p0) begin int t = p0; p0 = p1; p1 = t; end
          for (int c = 0; c < M; c++) Aw[r][kt * L + b * M + c] = 0;
          for (int q = 0; q < N; q++) begin
            int c = (N == 1) ? p0 : ((q == 0) ? p0 : p1);
            int unsigned v = $urandom_range(1, 200);
            Aw[r][kt * L + b * M + c] = v;
            u_mem.mem[VAL_W + 32 * r + 16 * kt + e] = v;
            u_mem.mem[IDX_W + 32 * r + 16 * kt + e] = 32'(c);
            e++;
          end
        end
      end
    for (int k = 0; k < K; k++)
      for (int n = 0; n < NC; n++) begin
        Bw[k][n] = $urandom_range(255);
        u_mem.mem[B_W + NC * k + n] = Bw[k][n];
      end
    for (int r = 0; r < MR; r++)
      for (int n = 0; n < NC; n++) u_mem.mem[C_W + NC * r + n] = 0;
    for (int j = 0; j < LANES; j++) u_mem.mem[OFF_W + j] = 32'(16 + (j / N) * M);

    t0 = cycle;
    a0 = int'(u_mem.n_req);
    setvl(LANES);
    issue(vle32(5'd13, 5'd1), 64'(4 * OFF_W));
    for (int nt = 0; nt < NC / LANES; nt++)
      for (int kt = 0; kt < K / L; kt++) begin
        setvl(LANES);
        for (int k = 0; k < L; k++)
          issue(vle32(5'(16 + k), 5'd1), 64'(4 * (B_W + NC * (kt * L + k) + LANES * nt)));
        for (int g = 0; g < MR; g += 4) begin
          setvl(nnz);
          for (int u = 0; u < 4; u++) begin
            issue(vle32(5'(1 + u), 5'd1), 64'(4 * (VAL_W + 32 * (g + u) + 16 * kt)));
            issue(vle32(5'(5 + u), 5'd1), 64'(4 * (IDX_W + 32 * (g + u) + 16 * kt)));
            issue(vadd_vv(5'(5 + u), 5'(5 + u), 5'd13));
          end
          setvl(LANES);
          for (int u = 0; u < 4; u++) begin
            issue(vle32(5'(9 + u), 5'd1), 64'(4 * (C_W + NC * (g + u) + LANES * nt)));
            if (kt > 0) n_creload++;
          end
          for (int j = 0; j < nnz; j++) begin
            for (int u = 0; u < 4; u++) begin
              issue_get(vmv_x_s(5'd12, 5'(5 + u)), 0, s0);
              issue(vindexmac_vx(5'(9 + u), 5'(1 + u), 5'd12), s0);
            end
            for (int u = 0; u < 4; u++) begin
              issue(vslidedown_vi(5'(1 + u), 5'(1 + u), 5'd1));
              issue(vslide1down_vx(5'(5 + u), 5'(5 + u), 5'd0), 64'd0);
            end
          end
          for (int u = 0; u < 4; u++)
            issue(vse32(5'(9 + u), 5'd1), 64'(4 * (C_W + NC * (g + u) + LANES * nt)));
        end
      end
    @(negedge clk);
    while (busy) @(negedge clk);
    $display("%0d:4 layer %0dx%0d * %0dx%0d: %0d cycles, %0d memory accesses, %0d vindexmac",
             N, MR, K, K, NC, cycle - t0, int'(u_mem.n_req) - a0, n_vindexmac);
    for (int r = 0; r < MR; r++)
      for (int n = 0; n < NC; n++) begin
        int unsigned e = 0;
        for (int k = 0; k < K; k++) e += Aw[r][k] * Bw[k][n];
        checks++;
        if (u_mem.mem[C_W + NC * r + n] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL %0d:4 C[%0d][%0d] got %0d exp %0d", N, r, n,
                                      u_mem.mem[C_W + NC * r + n], e);
        end
      end
  endtask

  initial begin
    insn_valid = 0; insn = 0; insn_rs1 = 0; regs_used = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run_layer(1);
    run_layer(2);
    checks++;
    if (n_creload == 0) begin failures++; $display("FAIL C never reloaded across tiles"); end
    checks++;
    if (regs_used[31:16] != 16'hFFFF || regs_used[15:0] != 16'h0) begin
      failures++;
      $display("FAIL indexed registers used: %h", regs_used);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
