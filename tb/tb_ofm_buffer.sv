// tb_ofm_buffer: writes distinct values into every entry of both halves
// through the engine port, then reads them back through the engine port
// and the store port at the same time (one-cycle latency), checking that
// the two halves are independent and that both read ports see the data.
module tb_ofm_buffer;
  import slp_pkg::*;
  localparam int TM = 3, TR = 2, TC = 3, NPIX = TR * TC;

  logic clk = 0;
  always #5 clk = ~clk;
  logic e_sel, e_we, s_sel;
  logic [$clog2(NPIX)-1:0] e_raddr, e_waddr, s_raddr;
  acc_t [TM-1:0] e_rdata, e_wdata, s_rdata;
  int checks = 0, failures = 0;

  ofm_buffer #(.TM(TM), .TR(TR), .TC(TC)) dut (.*);

  acc_t ref_m [2][NPIX][TM];

  initial begin
    e_sel = 0; e_we = 0; s_sel = 0; e_raddr = '0; e_waddr = '0; s_raddr = '0; e_wdata = '0;
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < NPIX; a++) begin
        @(negedge clk);
        e_sel = h[0]; e_we = 1; e_waddr = a[$clog2(NPIX)-1:0];
        for (int m = 0; m < TM; m++) begin ref_m[h][a][m] = acc_t'($urandom); e_wdata[m] = ref_m[h][a][m]; end
      end
    @(negedge clk); e_we = 0;
    for (int a = 0; a < NPIX; a++) begin
      @(negedge clk);
      e_sel = 0; s_sel = 1;
      e_raddr = a[$clog2(NPIX)-1:0]; s_raddr = $clog2(NPIX)'(NPIX - 1 - a);
      @(negedge clk);
      for (int m = 0; m < TM; m++) begin
        checks += 2;
        if (e_rdata[m] !== ref_m[0][a][m]) begin failures++; $display("engine port pix %0d m %0d", a, m); end
        if (s_rdata[m] !== ref_m[1][NPIX-1-a][m]) begin failures++; $display("store port pix %0d m %0d", NPIX-1-a, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
