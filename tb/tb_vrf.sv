// tb_vrf: random writes with random element masks and random three-port reads
// of the vector register file, compared with a reference array kept in the
// testbench. Checks reset clearing, masked (tail-undisturbed) writes and that
// all three ports read independent registers in the same cycle.
module tb_vrf;
  localparam int VLEN = 512, ELEN = 32, LANES = VLEN / ELEN;
  logic clk = 0, rst_n = 0;
  logic [4:0]       raddr [3];
  logic [VLEN-1:0]  rdata [3];
  logic             we;
  logic [4:0]       waddr;
  logic [VLEN-1:0]  wdata;
  logic [LANES-1:0] wmask;
  logic [VLEN-1:0]  ref_regs [32];
  int checks = 0, failures = 0;

  vrf dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [VLEN-1:0] rnd_vec();
    logic [VLEN-1:0] v;
    for (int i = 0; i < VLEN / 32; i++) v[32*i +: 32] = $urandom;
    return v;
  endfunction

  task automatic check_reads();
    for (int p = 0; p < 3; p++) begin
      checks++;
      if (rdata[p] !== ref_regs[raddr[p]]) begin
        failures++;
        $display("FAIL port %0d reg %0d", p, raddr[p]);
      end
    end
  endtask

  initial begin
    we = 0; waddr = 0; wdata = '0; wmask = '0;
    for (int p = 0; p < 3; p++) raddr[p] = 5'(p);
    for (int r = 0; r < 32; r++) ref_regs[r] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // after reset every register reads zero
    for (int r = 0; r < 32; r++) begin
      raddr[0] = 5'(r); raddr[1] = 5'(31 - r); raddr[2] = 5'(r ^ 5);
      #1 check_reads();
    end
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      we    = ($urandom_range(3) != 0);
      waddr = 5'($urandom);
      wdata = rnd_vec();
      wmask = (t < 100) ? '1 : LANES'($urandom);
      for (int p = 0; p < 3; p++) raddr[p] = 5'($urandom);
      #1 check_reads();
      @(posedge clk);
      if (we)
        for (int e = 0; e < LANES; e++)
          if (wmask[e]) ref_regs[waddr][e*ELEN +: ELEN] = wdata[e*ELEN +: ELEN];
    end
    @(negedge clk);
    we = 0;
    for (int r = 0; r < 32; r++) begin
      raddr[0] = 5'(r); raddr[1] = 5'((r + 7) % 32); raddr[2] = 5'((r + 19) % 32);
      #1 check_reads();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
