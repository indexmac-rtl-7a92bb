// tb_vector_engine: end-to-end test of the vector engine at its default size
// (VLEN = 512, 16 lanes of 32 bits, 32 registers). The testbench plays the
// scalar core: it sends each vector instruction with its rs1 value, waits for
// scalar results (vsetvli, vmv.x.s) and uses them in later instructions, as
// the kernels require. A behavioural memory with latency 8 and random
// back-pressure stands in for the cache.
//
// Programs run:
//   1. The vindexmac example of the paper's figure 3: vindexmac.vx v5,v8,x5
//      with x5 = 7, so v5[i] += v8[0] * v7[i].
//   2. The 3x3 by 3x4 row-wise product of figure 2 (C row 0 = 50 57 20 20),
//      run with vl = 4 and vindexmac.
//   3. A B-stationary tile (L = 16 rows of B, 16 columns) multiplied by R
//      rows of a structured-sparse A, for 1:4 and 2:4 sparsity, once with the
//      vindexmac kernel and once with the baseline kernel that loads each
//      needed row of B from memory and uses vmacc.vx. A is stored as values
//      and block-relative column indices (0..M-1), as in figure 1; a constant
//      vector of per-element offsets (base register + block * M) turns the
//      indices into register numbers, or the baseline's byte offsets into
//      addresses. Both results are compared with a reference product
//      computed here, and the memory accesses and cycles of the two kernels
//      are reported.
//   4. A burst of vindexmac instructions, checked to retire one per cycle.
//   5. A masked vindexmac (not supported: must raise `illegal` and change
//      nothing) and a vsetvli with SEW = 8 (unsupported: vl becomes 0, so a
//      following vindexmac must change nothing).
// Every mechanism (vindexmac, vmacc, vadd, both slides, vmv.x.s, vsetvli,
// loads, stores, tail-undisturbed writes with vl < 16, memory back-pressure,
// instruction stalls, illegal instruction, vl = 0) is counted and must occur.
module tb_vector_engine;
  import rvv_asm_pkg::*;
  localparam int VLEN = 512, LANES = 16, LAT = 8, WORDS = 16384;
  localparam int R = 8;       // rows of A per sparsity
  localparam int L = 16;      // rows of the B tile kept in registers (paper: L = 16)
  localparam int M = 4;       // block size of the N:M sparsity

  // word addresses of the data regions
  localparam int B_W    = 'h0000;  // B tile, L rows of 16 words
  localparam int VAL_W  = 'h0400;  // values of A, one 16-word row per row of A
  localparam int IDX_W  = 'h0800;  // col_idx of A (0..M-1)
  localparam int OFF_W  = 'h0C00;  // per-element offset vectors
  localparam int CP_W   = 'h1000;  // C, vindexmac kernel
  localparam int CB_W   = 'h1400;  // C, baseline kernel
  localparam int MISC_W = 'h2000;

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
  vmem_model #(.WORDS(WORDS), .LATENCY(LAT), .STALL_PCT(25)) u_mem (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  int n_res = 0;
  logic [63:0] last_res;
  // mechanism counters
  int c_vindexmac, c_vmacc, c_vadd, c_slidei, c_slide1, c_vmv, c_vsetvli, c_load, c_store;
  int c_tail, c_memstall, c_insnstall, c_illegal, c_vl0;
  int unsigned A_val [R][L];       // dense A rows (reference)
  int unsigned Bm [L][LANES];
  int unsigned C0 [R][LANES];

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (res_valid) begin
      last_res <= res_data;
      n_res    <= n_res + 1;
    end
    if (mem_req_valid && !mem_req_ready) c_memstall++;
    if (insn_valid && !insn_ready) c_insnstall++;
    if (illegal) c_illegal++;
    if (dut.vrf_we && dut.vl < 5'(LANES)) c_tail++;
    if (dut.cur_valid && dut.vl == 0 && dut.cur.op == indexmac_pkg::VOP_VINDEXMAC) c_vl0++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ scalar-core model
  longint t_acc;   // cycle of the last acceptance
  // All tasks start and end just after a falling clock edge, so back-to-back
  // calls offer one instruction per cycle.
  task automatic issue(logic [31:0] i, logic [63:0] rs1 = 0);
    insn_valid = 1; insn = i; insn_rs1 = rs1;
    while (!insn_ready) @(negedge clk);
    t_acc = cycle;
    @(negedge clk);
    insn_valid = 0; insn = $urandom; insn_rs1 = {$urandom, $urandom};
    unique case (i[6:0])
      7'b0000111: c_load++;
      7'b0100111: c_store++;
      default: begin
        if (i[14:12] == 3'b111) c_vsetvli++;
        else unique case (i[31:26])
          6'b101100: c_vindexmac++;
          6'b101101: c_vmacc++;
          6'b000000: c_vadd++;
          6'b001111: if (i[14:12] == 3'b011) c_slidei++; else c_slide1++;
          6'b010000: c_vmv++;
          default: ;
        endcase
      end
    endcase
  endtask

  // issue an instruction that returns a scalar value and wait for it
  task automatic issue_get(logic [31:0] i, logic [63:0] rs1, output logic [63:0] r);
    int n0 = n_res;
    issue(i, rs1);
    while (n_res == n0) @(negedge clk);
    r = last_res;
  endtask

  task automatic setvl(int avl, output int vl);
    logic [63:0] r;
    issue_get(vsetvli(5'd10, 5'd11, E32M1), 64'(avl), r);
    vl = int'(r);
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (busy) @(negedge clk);
  endtask

  function automatic int unsigned rd_mem(int w);
    return u_mem.mem[w];
  endfunction

  task automatic expect_word(string what, int w, int unsigned e);
    checks++;
    if (rd_mem(w) !== e) begin
      failures++;
      if (failures < 20) $display("FAIL %s word %0h: got %0d exp %0d", what, w, rd_mem(w), e);
    end
  endtask

  // ------------------------------------------------------------ tests
  task automatic test_fig3();
    int vl;
    for (int i = 0; i < LANES; i++) begin
      u_mem.mem[MISC_W + i]      = 32'(i + 1);          // v7
      u_mem.mem[MISC_W + 16 + i] = 32'(3 + 10 * i);     // v8, v8[0] = 3
      u_mem.mem[MISC_W + 32 + i] = 32'(100 * i);        // v5
    end
    setvl(16, vl);
    issue(vle32(5'd7, 5'd1), 64'(4 * MISC_W));
    issue(vle32(5'd8, 5'd1), 64'(4 * (MISC_W + 16)));
    issue(vle32(5'd5, 5'd1), 64'(4 * (MISC_W + 32)));
    issue(vindexmac_vx(5'd5, 5'd8, 5'd5), 64'd7);       // vindexmac.vx v5, v8, x5 (x5 = 7)
    issue(vse32(5'd5, 5'd1), 64'(4 * (MISC_W + 48)));
    wait_idle();
    for (int i = 0; i < LANES; i++) expect_word("fig3", MISC_W + 48 + i, 32'(100 * i + 3 * (i + 1)));
  endtask

  task automatic test_fig2();
    // A = [5 0 2; 0 0 6; 0 7 0], B = [8 9 0 2; 4 3 1 0; 5 6 10 5]
    int unsigned Bf [3][4] = '{'{8, 9, 0, 2}, '{4, 3, 1, 0}, '{5, 6, 10, 5}};
    int unsigned Cf [3][4] = '{'{50, 57, 20, 20}, '{30, 36, 60, 30}, '{28, 21, 7, 0}};
    int nnz [3] = '{2, 1, 1};
    int unsigned vals [3][2] = '{'{5, 2}, '{6, 0}, '{7, 0}};
    int unsigned cols [3][2] = '{'{0, 2}, '{2, 0}, '{1, 0}};
    int vl;
    logic [63:0] s0;
    for (int k = 0; k < 3; k++)
      for (int j = 0; j < 4; j++) u_mem.mem[MISC_W + 64 + 16 * k + j] = Bf[k][j];
    setvl(4, vl);
    checks++;
    if (vl != 4) begin failures++; $display("FAIL vsetvli avl=4 gave %0d", vl); end
    for (int k = 0; k < 3; k++) issue(vle32(5'(20 + k), 5'd1), 64'(4 * (MISC_W + 64 + 16 * k)));
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < LANES; j++) begin
        u_mem.mem[MISC_W + 128 + 16 * i + j] = 32'hDEAD_0000 + 32'(j);   // tail must survive
        u_mem.mem[MISC_W + 192 + j] = (j < 2) ? vals[i][j] : 0;
        u_mem.mem[MISC_W + 208 + j] = (j < 2) ? cols[i][j] : 0;
        u_mem.mem[MISC_W + 224 + j] = 0;
      end
      issue(vle32(5'd1, 5'd1), 64'(4 * (MISC_W + 192)));
      issue(vle32(5'd2, 5'd1), 64'(4 * (MISC_W + 208)));
      issue(vadd_vi(5'd2, 5'd2, 5'd10));                  // column -> register v20 + column
      issue(vadd_vi(5'd2, 5'd2, 5'd10));
      issue(vle32(5'd3, 5'd1), 64'(4 * (MISC_W + 224)));  // C row (zero) from memory
      for (int j = 0; j < nnz[i]; j++) begin
        issue_get(vmv_x_s(5'd12, 5'd2), 0, s0);
        issue(vindexmac_vx(5'd3, 5'd1, 5'd12), s0);
        issue(vslidedown_vi(5'd1, 5'd1, 5'd1));
        issue(vslide1down_vx(5'd2, 5'd2, 5'd0), 64'd0);
      end
      issue(vse32(5'd3, 5'd1), 64'(4 * (MISC_W + 128 + 16 * i)));
      wait_idle();
      for (int j = 0; j < LANES; j++)
        expect_word("fig2", MISC_W + 128 + 16 * i + j, (j < 4) ? Cf[i][j] : 32'hDEAD_0000 + 32'(j));
    end
  endtask

  // Structured-sparse tile test. N non-zeros per block of M = 4.
  task automatic test_tile(int N, output longint cyc_prop, output longint cyc_base,
                           output int acc_prop, output int acc_base);
    int nnz = (L / M) * N;
    int vl, a0;
    logic [63:0] s0, addr;
    longint t0;
    // data
    for (int k = 0; k < L; k++)
      for (int j = 0; j < LANES; j++) begin
        Bm[k][j] = $urandom_range(1000);
        u_mem.mem[B_W + 16 * k + j] = Bm[k][j];
      end
    for (int i = 0; i < R; i++) begin
      int e = 0;
      for (int k = 0; k < L; k++) A_val[i][k] = 0;
      for (int b = 0; b < L / M; b++) begin
        int p0, p1;
        p0 = $urandom_range(M - 1);
        p1 = (p0 + 1 + $urandom_range(M - 2)) % M;
        if (N == 2 && p1 < p0) begin int t = p0; p0 = p1; p1 = t; end
        for (int q = 0; q < N; q++) begin
          int c = (q == 0) ? p0 : p1;
          int unsigned v = $urandom_range(1, 50);
          A_val[i][b * M + c] = v;
          u_mem.mem[VAL_W + 16 * i + e] = v;
          u_mem.mem[IDX_W + 16 * i + e] = 32'(c);
          e++;
        end
      end
      for (int j = e; j < LANES; j++) begin
        u_mem.mem[VAL_W + 16 * i + j] = 32'hBAD0_0000;
        u_mem.mem[IDX_W + 16 * i + j] = 32'hBAD0_0000;
      end
      for (int j = 0; j < LANES; j++) begin
        C0[i][j] = $urandom;
        u_mem.mem[CP_W + 16 * i + j] = C0[i][j];
        u_mem.mem[CB_W + 16 * i + j] = C0[i][j];
      end
    end
    // offset vectors: register base 16 + block*M, and row byte offset (block*M)*64
    for (int j = 0; j < LANES; j++) begin
      u_mem.mem[OFF_W + j]      = 32'(16 + (j / N) * M);
      u_mem.mem[OFF_W + 16 + j] = 32'(4 * 16 * ((j / N) * M));
    end

    // ---- vindexmac kernel (B-stationary, one tile)
    a0 = int'(u_mem.n_req);
    t0 = cycle;
    setvl(L, vl);
    for (int k = 0; k < L; k++) issue(vle32(5'(16 + k), 5'd1), 64'(4 * (B_W + 16 * k)));
    issue(vle32(5'd4, 5'd1), 64'(4 * OFF_W));
    for (int i = 0; i < R; i++) begin
      setvl(nnz, vl);
      issue(vle32(5'd1, 5'd1), 64'(4 * (VAL_W + 16 * i)));
      issue(vle32(5'd2, 5'd1), 64'(4 * (IDX_W + 16 * i)));
      issue(vadd_vv(5'd2, 5'd2, 5'd4));                 // col_idx -> register number
      setvl(LANES, vl);
      issue(vle32(5'd3, 5'd1), 64'(4 * (CP_W + 16 * i)));
      for (int j = 0; j < nnz; j++) begin
        issue_get(vmv_x_s(5'd12, 5'd2), 0, s0);
        issue(vindexmac_vx(5'd3, 5'd1, 5'd12), s0);
        issue(vslidedown_vi(5'd1, 5'd1, 5'd1));
        issue(vslide1down_vx(5'd2, 5'd2, 5'd0), 64'd0);
      end
      issue(vse32(5'd3, 5'd1), 64'(4 * (CP_W + 16 * i)));
    end
    wait_idle();
    cyc_prop = cycle - t0;
    acc_prop = int'(u_mem.n_req) - a0;

    // ---- baseline kernel: load each needed row of B, vmacc.vx
    a0 = int'(u_mem.n_req);
    t0 = cycle;
    setvl(LANES, vl);
    issue(vle32(5'd5, 5'd1), 64'(4 * (OFF_W + 16)));
    for (int i = 0; i < R; i++) begin
      setvl(nnz, vl);
      issue(vle32(5'd1, 5'd1), 64'(4 * (VAL_W + 16 * i)));
      issue(vle32(5'd2, 5'd1), 64'(4 * (IDX_W + 16 * i)));
      for (int s = 0; s < 6; s++) issue(vadd_vv(5'd2, 5'd2, 5'd2));  // col_idx * 64 bytes
      issue(vadd_vv(5'd2, 5'd2, 5'd5));                 // + block offset
      issue(vadd_vx(5'd2, 5'd2, 5'd13), 64'(4 * B_W));  // + B_address
      setvl(LANES, vl);
      issue(vle32(5'd3, 5'd1), 64'(4 * (CB_W + 16 * i)));
      for (int j = 0; j < nnz; j++) begin
        issue_get(vmv_x_s(5'd12, 5'd2), 0, addr);
        issue(vle32(5'd7, 5'd12), addr);
        issue_get(vmv_x_s(5'd14, 5'd1), 0, s0);
        issue(vmacc_vx(5'd3, 5'd14, 5'd7), s0);
        issue(vslidedown_vi(5'd1, 5'd1, 5'd1));
        issue(vslide1down_vx(5'd2, 5'd2, 5'd0), 64'd0);
      end
      issue(vse32(5'd3, 5'd1), 64'(4 * (CB_W + 16 * i)));
    end
    wait_idle();
    cyc_base = cycle - t0;
    acc_base = int'(u_mem.n_req) - a0;

    // ---- compare with the reference product
    for (int i = 0; i < R; i++)
      for (int j = 0; j < LANES; j++) begin
        int unsigned e = C0[i][j];
        for (int k = 0; k < L; k++) e += A_val[i][k] * Bm[k][j];
        expect_word($sformatf("C %0d:4 vindexmac", N), CP_W + 16 * i + j, e);
        expect_word($sformatf("C %0d:4 baseline", N), CB_W + 16 * i + j, e);
      end
  endtask

  task automatic test_burst();
    int vl;
    longint t_first;
    logic [63:0] r;
    int unsigned e [LANES];
    setvl(LANES, vl);
    for (int i = 0; i < LANES; i++) begin
      u_mem.mem[MISC_W + 256 + i] = 32'(i);
      u_mem.mem[MISC_W + 272 + i] = (i == 0) ? 32'd2 : 32'd99;
      e[i] = 0;
    end
    issue(vle32(5'd9, 5'd1), 64'(4 * (MISC_W + 256)));
    issue(vle32(5'd10, 5'd1), 64'(4 * (MISC_W + 272)));
    for (int i = 0; i < LANES; i++) u_mem.mem[MISC_W + 320 + i] = 0;
    issue(vle32(5'd11, 5'd1), 64'(4 * (MISC_W + 320)));  // v11 := 0
    // 8 back-to-back vindexmac v11, v10, rs with rs alternating v9 / v10
    for (int b = 0; b < 8; b++) begin
      issue(vindexmac_vx(5'd11, 5'd10, 5'd1), (b % 2 == 0) ? 64'd9 : 64'd10);
      if (b == 0) t_first = t_acc;
      for (int i = 0; i < LANES; i++) e[i] += 2 * ((b % 2 == 0) ? 32'(i) : ((i == 0) ? 32'd2 : 32'd99));
    end
    checks++;
    if (t_acc - t_first != 7) begin
      failures++;
      $display("FAIL 8 vindexmac took %0d cycles to issue, expected 7", t_acc - t_first);
    end
    issue(vse32(5'd11, 5'd1), 64'(4 * (MISC_W + 288)));
    wait_idle();
    for (int i = 0; i < LANES; i++) expect_word("burst", MISC_W + 288 + i, e[i]);
    // illegal: masked vindexmac must change nothing
    begin
      logic [31:0] bad = vindexmac_vx(5'd11, 5'd10, 5'd1);
      int ill0 = c_illegal;
      bad[25] = 1'b0;
      issue(bad, 64'd9);
      @(negedge clk);
      wait_idle();
      checks++;
      if (c_illegal != ill0 + 1) begin failures++; $display("FAIL illegal not flagged"); end
    end
    // SEW = 8 is not supported: vl = 0, then vindexmac must change nothing
    issue_get(vsetvli(5'd10, 5'd11, 11'b000_0000_0000), 64'd16, r);
    checks++;
    if (r != 0) begin failures++; $display("FAIL unsupported vtype gave vl=%0d", r); end
    issue(vindexmac_vx(5'd11, 5'd10, 5'd1), 64'd9);
    setvl(LANES, vl);
    issue(vse32(5'd11, 5'd1), 64'(4 * (MISC_W + 304)));
    wait_idle();
    for (int i = 0; i < LANES; i++) expect_word("after illegal/vl0", MISC_W + 304 + i, e[i]);
  endtask

  task automatic need(string what, int n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    $display("  %-28s %0d", what, n);
  endtask

  initial begin
    longint cp, cb;
    int ap, ab;
    insn_valid = 0; insn = 0; insn_rs1 = 0;
    {c_vindexmac, c_vmacc, c_vadd, c_slidei, c_slide1, c_vmv, c_vsetvli, c_load, c_store} = '0;
    {c_tail, c_memstall, c_insnstall, c_illegal, c_vl0} = '0;
    repeat (4) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    test_fig3();
    test_fig2();
    for (int n = 1; n <= 2; n++) begin
      test_tile(n, cp, cb, ap, ab);
      $display("%0d:4 tile, %0d rows of A: vindexmac kernel %0d cycles / %0d memory accesses, baseline %0d cycles / %0d accesses (speedup %0.2f, accesses %0.2f)",
               n, R, cp, ap, cb, ab, real'(cb) / real'(cp), real'(ap) / real'(ab));
      checks++;
      if (!(cp < cb && ap < ab)) begin failures++; $display("FAIL vindexmac kernel not faster"); end
    end
    test_burst();
    $display("mechanisms:");
    need("vindexmac", c_vindexmac);
    need("vmacc", c_vmacc);
    need("vadd", c_vadd);
    need("vslidedown.vi", c_slidei);
    need("vslide1down.vx", c_slide1);
    need("vmv.x.s", c_vmv);
    need("vsetvli", c_vsetvli);
    need("vector loads", c_load);
    need("vector stores", c_store);
    need("tail-undisturbed writes", c_tail);
    need("memory back-pressure cycles", c_memstall);
    need("instruction stall cycles", c_insnstall);
    need("illegal instructions", c_illegal);
    need("vindexmac with vl = 0", c_vl0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
