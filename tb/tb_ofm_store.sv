// tb_ofm_store: a behavioural OFM buffer (one-cycle read) holds random
// 32-bit sums, some far outside the 16-bit range. The unit is run twice:
// once with an always-ready sink, where the cycle count from start to done
// must be Tr*Tc*(Tm/OP+1)+2, and once with a randomly stalling sink. Every
// output word is compared with (sum >>> frac) saturated to 16 bits, in
// pixel-major, channel-innermost order.
module tb_ofm_store;
  import slp_pkg::*;
  localparam int TM = 8, TR = 2, TC = 3, OP = 4, NPIX = TR * TC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, sel, busy, done, ob_sel, out_valid, out_ready;
  logic [4:0] frac;
  logic [$clog2(NPIX)-1:0] ob_raddr;
  acc_t [TM-1:0] ob_rdata;
  data_t [OP-1:0] out_data;
  int checks = 0, failures = 0;

  ofm_store #(.TM(TM), .TR(TR), .TC(TC), .OP(OP)) dut (.*);

  acc_t mem [2][NPIX][TM];
  always_ff @(posedge clk)
    for (int m = 0; m < TM; m++) ob_rdata[m] <= mem[ob_sel][ob_raddr][m];

  function automatic data_t expect_w(acc_t v, int sh);
    acc_t s = v >>> sh;
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return 16'sh8000;
    return s[15:0];
  endfunction

  int idx;
  bit random_ready;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      for (int j = 0; j < OP; j++) begin
        int pix, m;
        pix = (idx * OP + j) / TM; m = (idx * OP + j) % TM;
        checks++;
        if (out_data[j] !== expect_w(mem[sel][pix][m], int'(frac))) begin
          failures++;
          $display("pix %0d m %0d got %h expected %h", pix, m, out_data[j], expect_w(mem[sel][pix][m], int'(frac)));
        end
      end
      idx++;
    end
    out_ready <= random_ready ? ($urandom_range(0, 2) != 0) : 1'b1;
  end

  task automatic run(input bit h, input int sh, input bit rnd, output int cycles);
    idx = 0; random_ready = rnd;
    @(negedge clk); start = 1; sel = h; frac = 5'(sh);
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    checks++;
    if (idx != NPIX * TM / OP) begin failures++; $display("beats %0d", idx); end
  endtask

  int cyc;
  initial begin
    start = 0; sel = 0; frac = 0; out_ready = 1; random_ready = 0;
    for (int h = 0; h < 2; h++)
      for (int p = 0; p < NPIX; p++)
        for (int m = 0; m < TM; m++)
          mem[h][p][m] = (m % 3 == 0) ? acc_t'($urandom) : acc_t'($signed($urandom_range(0, 65535)) - 32768);
    repeat (2) @(negedge clk); rst_n = 1;
    run(1'b0, 4, 1'b0, cyc);
    checks++;
    if (cyc != NPIX * (TM / OP + 1) + 2) begin
      failures++; $display("cycle count %0d, expected %0d", cyc, NPIX * (TM / OP + 1) + 2);
    end
    run(1'b1, 0, 1'b1, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
