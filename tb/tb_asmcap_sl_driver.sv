// tb_asmcap_sl_driver -- SL/SLbar carry the write data or the search data
// for one cycle after the request, and both rails are low when idle.
module tb_asmcap_sl_driver;
  import asmcap_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, wr_en, srch_en;
  base_t [N-1:0] wr_data, srch_data;
  logic [N-1:0][1:0] sl, sl_b, e_sl, e_slb;
  int checks = 0, failures = 0;

  asmcap_sl_driver #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #100000 failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; srch_en = 0; wr_data = '0; srch_data = '0;
    #12 rst_n = 1;
    for (int k = 0; k < 100; k++) begin
      int sel;
      @(negedge clk);
      sel = $urandom_range(0, 2);
      wr_en = (sel == 1); srch_en = (sel == 2);
      wr_data = {$urandom}; srch_data = {$urandom};
      e_sl = (sel == 1) ? wr_data : (sel == 2) ? srch_data : '0;
      e_slb = (sel == 0) ? '0 : ~e_sl;
      @(posedge clk); #1;
      checks++;
      if (sl !== e_sl || sl_b !== e_slb) begin
        failures++;
        $display("FAIL sel=%0d sl=%h slb=%h", sel, sl, sl_b);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
