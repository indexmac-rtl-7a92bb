// tb_vslide_unit: random vectors through vslidedown.vi (every offset 0..31)
// and vslide1down.vx (every vl 1..16); elements below vl are compared with
// the RVV definition computed here.
module tb_vslide_unit;
  localparam int VLEN = 512, ELEN = 32, LANES = VLEN / ELEN;
  logic             one_x;
  logic [4:0]       off;
  logic [ELEN-1:0]  xs;
  logic [4:0]       vl;
  logic [VLEN-1:0]  vs2, res;
  int checks = 0, failures = 0;

  vslide_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 1000; t++) begin
      for (int i = 0; i < LANES; i++) vs2[32*i +: 32] = $urandom;
      xs    = $urandom;
      one_x = t[0];
      off   = 5'(t % 32);
      vl    = 5'(1 + (t / 2) % LANES);
      #1;
      for (int i = 0; i < int'(vl); i++) begin
        logic [31:0] e;
        if (one_x) e = (i == int'(vl) - 1) ? xs : vs2[32*(i+1) +: 32];
        else       e = (i + int'(off) < LANES) ? vs2[32*(i+int'(off)) +: 32] : 32'd0;
        checks++;
        if (res[32*i +: 32] !== e) begin
          failures++;
          if (failures < 10)
            $display("FAIL one_x=%0d off=%0d vl=%0d elem %0d got %h exp %h", one_x, off, vl, i,
                     res[32*i +: 32], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
