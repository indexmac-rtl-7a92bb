// tb_vrf_read_addr_mux: exhaustive check of the vs1 / rs[4:0] read-address
// multiplexer: for every vs1 and every low five bits of rs (upper bits random)
// the output must be vs1 when sel_rs = 0 and rs[4:0] when sel_rs = 1.
module tb_vrf_read_addr_mux;
  logic        sel_rs;
  logic [4:0]  vs1, raddr;
  logic [63:0] rs;
  int checks = 0, failures = 0;

  vrf_read_addr_mux dut (.sel_rs(sel_rs), .vs1(vs1), .rs(rs), .raddr(raddr));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int a = 0; a < 32; a++)
        for (int b = 0; b < 32; b++) begin
          sel_rs = s[0];
          vs1    = a[4:0];
          rs     = {$urandom, $urandom};
          rs[4:0] = b[4:0];
          #1;
          checks++;
          if (raddr !== (s ? b[4:0] : a[4:0])) begin
            failures++;
            $display("FAIL sel=%0d vs1=%0d rs=%h raddr=%0d", s, a, rs, raddr);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
