// tb_conv_engine: behavioural IFM, weight and OFM buffers (one-cycle read
// latency, banked as in the design) feed a small engine. Three executions
// are run: K=3, S=1 starting a new OFM group; K=3, S=1 accumulating on top
// of it (first=0) with new IFM/weights; K=2, S=2 starting a new group. After
// each, every OFM entry is compared with a direct convolution computed
// here, and the cycle count from start to done must be K*K*Tr*Tc + 3.
module tb_conv_engine;
  import slp_pkg::*;
  localparam int TM = 3, TN = 2, TR = 2, TC = 3, KMAX = 3, SMAX = 2;
  localparam int TRI = (TR - 1) * SMAX + KMAX, TCI = (TC - 1) * SMAX + KMAX;
  localparam int IDEPTH = TRI * TCI, WDEPTH = KMAX * KMAX, NPIX = TR * TC;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, first, busy, done, ob_we;
  logic [3:0] k;
  logic [2:0] stride;
  logic [$clog2(IDEPTH)-1:0] ib_raddr;
  logic [$clog2(WDEPTH)-1:0] wb_raddr;
  logic [$clog2(NPIX)-1:0]   ob_raddr, ob_waddr;
  data_t [TN-1:0]    ib_rdata;
  data_t [TM*TN-1:0] wb_rdata;
  acc_t [TM-1:0]     ob_rdata, ob_wdata;
  int checks = 0, failures = 0;

  conv_engine #(.TM(TM), .TN(TN), .TR(TR), .TC(TC), .KMAX(KMAX), .SMAX(SMAX)) dut (.*);

  data_t ibuf [TN][IDEPTH];
  data_t wbuf [TM*TN][WDEPTH];
  acc_t  obuf [NPIX][TM];
  acc_t  ref_o [NPIX][TM];

  always_ff @(posedge clk) begin
    for (int n = 0; n < TN; n++) ib_rdata[n] <= ibuf[n][ib_raddr];
    for (int b = 0; b < TM*TN; b++) wb_rdata[b] <= wbuf[b][wb_raddr];
    for (int m = 0; m < TM; m++) ob_rdata[m] <= obuf[ob_raddr][m];
    if (ob_we) for (int m = 0; m < TM; m++) obuf[ob_waddr][m] <= ob_wdata[m];
  end

  task automatic exec(input int kk, input int s, input bit f);
    int cyc, tci;
    tci = (TC - 1) * s + kk;
    for (int n = 0; n < TN; n++) for (int a = 0; a < IDEPTH; a++) ibuf[n][a] = data_t'($signed($urandom_range(0, 2000)) - 1000);
    for (int b = 0; b < TM*TN; b++) for (int a = 0; a < WDEPTH; a++) wbuf[b][a] = data_t'($signed($urandom_range(0, 2000)) - 1000);
    for (int r = 0; r < TR; r++) for (int c = 0; c < TC; c++) for (int m = 0; m < TM; m++) begin
      acc_t sum;
      sum = f ? '0 : ref_o[r*TC+c][m];
      for (int n = 0; n < TN; n++) for (int i = 0; i < kk; i++) for (int j = 0; j < kk; j++)
        sum += acc_t'(ibuf[n][(r*s+i)*tci + c*s+j] * wbuf[m*TN+n][i*kk+j]);
      ref_o[r*TC+c][m] = sum;
    end
    @(negedge clk); start = 1; k = 4'(kk); stride = 3'(s); first = f;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
    checks++;
    if (cyc != kk*kk*NPIX + 3) begin failures++; $display("K=%0d: %0d cycles, expected %0d", kk, cyc, kk*kk*NPIX+3); end
    for (int p = 0; p < NPIX; p++) for (int m = 0; m < TM; m++) begin
      checks++;
      if (obuf[p][m] !== ref_o[p][m]) begin
        failures++; $display("K=%0d pix %0d m %0d: got %0d expected %0d", kk, p, m, obuf[p][m], ref_o[p][m]);
      end
    end
  endtask

  initial begin
    start = 0; first = 0; k = 3; stride = 1;
    for (int p = 0; p < NPIX; p++) for (int m = 0; m < TM; m++) begin obuf[p][m] = acc_t'($urandom); ref_o[p][m] = '0; end
    repeat (2) @(negedge clk); rst_n = 1;
    exec(3, 1, 1'b1);
    exec(3, 1, 1'b0);
    exec(2, 2, 1'b1);
    exec(1, 1, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
