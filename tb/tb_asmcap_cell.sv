// tb_asmcap_cell -- exhaustive check of one ASMCap cell: every stored base,
// every left/co-located/right read base (and an absent neighbour), both
// modes, against O = S ? ~(O_C|O_L|O_R) : ~O_C.
module tb_asmcap_cell;
  logic clk = 0, wl, s;
  logic [0:0][1:0] sl_l, slb_l, sl_c, slb_c, sl_r, slb_r;
  logic [0:0] o;
  int checks = 0, failures = 0;

  asmcap_cell #(.K(1)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl = 0; s = 0;
    sl_l = '0; slb_l = '0; sl_r = '0; slb_r = '0;
    for (int st = 0; st < 4; st++) begin
      // write the base through the co-located pair
      @(negedge clk); wl = 1; sl_c = 2'(st); slb_c = ~2'(st);
      @(negedge clk); wl = 0;
      for (int l = 0; l < 5; l++)
        for (int c = 0; c < 4; c++)
          for (int r = 0; r < 5; r++)
            for (int m = 0; m < 2; m++) begin
              bit ol, oc, orr, e;
              s = m[0];
              // value 4 = absent neighbour (both rails low)
              sl_l  = (l == 4) ? 2'b00 : 2'(l);  slb_l = (l == 4) ? 2'b00 : ~2'(l);
              sl_r  = (r == 4) ? 2'b00 : 2'(r);  slb_r = (r == 4) ? 2'b00 : ~2'(r);
              sl_c  = 2'(c);                     slb_c = ~2'(c);
              #1;
              ol = (l == st); oc = (c == st); orr = (r == st);
              e = m ? !(ol || oc || orr) : !oc;
              checks++;
              if (o[0] !== e) begin
                failures++;
                $display("FAIL st=%0d l=%0d c=%0d r=%0d s=%0d o=%b", st, l, c, r, m, o);
              end
            end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
