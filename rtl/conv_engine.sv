// conv_engine: the on-chip computation engine (Tm x Tn MACs per cycle).
//
// One start pulse runs one "PE execution": the convolution of the IFM tile
// (Tn channels) held in the input buffers with the Tm x Tn x K x K weight tile,
// accumulated into the Tr x Tc x Tm OFM tile. For every output pixel (r, c)
// the engine walks the K x K kernel positions; at each position it reads Tn
// IFM words (one per IFM bank) and Tm*Tn weights (one per weight bank),
// forms Tm sums of Tn products and adds them to Tm accumulators. After the
// last kernel position the accumulators are added to the pixel's old OFM
// value (or to zero when 'first' marks the first IFM-channel tile of the
// group) and written back. Each pixel is written once per execution, so the
// read-modify-write of the OFM buffer has no hazard.
//
// Timing: K*K*Tr*Tc issue cycles plus a 3-cycle drain; 'done' pulses when the
// last OFM write has happened. Stage 0 issues buffer addresses, stage 1 gets
// the buffer words and forms the product sums, stage 2 accumulates, stage 3
// writes the OFM. The Tm x Tn parallel MACs and tComp = K*K*Tr*Tc follow the
// paper; the inner loop order, the pipeline and the 32-bit wrapping
// accumulation are this design's choices.
module conv_engine
  import slp_pkg::*;
#(
  parameter int TM   = 128,
  parameter int TN   = 10,
  parameter int TR   = 7,
  parameter int TC   = 14,
  parameter int KMAX = 11,
  parameter int SMAX = 4,
  parameter int TRI  = (TR - 1) * SMAX + KMAX,
  parameter int TCI  = (TC - 1) * SMAX + KMAX,
  parameter int IDEPTH = TRI * TCI,
  parameter int WDEPTH = KMAX * KMAX,
  parameter int NPIX   = TR * TC
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [3:0]                 k,
  input  logic [2:0]                 stride,
  input  logic                       first,
  output logic                       busy,
  output logic                       done,
  // IFM buffer read port
  output logic [$clog2(IDEPTH)-1:0]  ib_raddr,
  input  data_t [TN-1:0]             ib_rdata,
  // weight buffer read port (bank index = m*TN + n)
  output logic [$clog2(WDEPTH)-1:0]  wb_raddr,
  input  data_t [TM*TN-1:0]          wb_rdata,
  // OFM buffer read-modify-write port
  output logic [$clog2(NPIX)-1:0]    ob_raddr,
  input  acc_t [TM-1:0]              ob_rdata,
  output logic                       ob_we,
  output logic [$clog2(NPIX)-1:0]    ob_waddr,
  output acc_t [TM-1:0]              ob_wdata
);

  localparam int IAW = $clog2(IDEPTH);
  localparam int WAW = $clog2(WDEPTH);
  localparam int OAW = $clog2(NPIX);

  // ---------------- stage 0: loop counters and address issue ----------------
  logic [7:0] r, c;
  logic [3:0] kr, kc;
  logic       run, first_q;
  logic [7:0] tci_rt;     // input tile width for the current K and S

  wire last_kc  = (kc == k - 4'd1);
  wire last_kr  = (kr == k - 4'd1);
  wire last_c   = (c == 8'(TC - 1));
  wire last_r   = (r == 8'(TR - 1));
  wire last_kk  = last_kc && last_kr;
  wire last_all = last_kk && last_c && last_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; r <= '0; c <= '0; kr <= '0; kc <= '0; first_q <= 1'b0; tci_rt <= '0;
    end else if (start && !busy) begin
      run <= 1'b1; r <= '0; c <= '0; kr <= '0; kc <= '0; first_q <= first;
      tci_rt <= 8'(8'(TC - 1) * 8'(stride) + 8'(k));
    end else if (run) begin
      if (!last_kc) kc <= kc + 4'd1;
      else begin
        kc <= '0;
        if (!last_kr) kr <= kr + 4'd1;
        else begin
          kr <= '0;
          if (!last_c) c <= c + 8'd1;
          else begin
            c <= '0;
            if (!last_r) r <= r + 8'd1;
            else run <= 1'b0;
          end
        end
      end
    end
  end

  always_comb begin
    ib_raddr = IAW'((32'(r) * 32'(stride) + 32'(kr)) * 32'(tci_rt) + 32'(c) * 32'(stride) + 32'(kc));
    wb_raddr = WAW'(32'(kr) * 32'(k) + 32'(kc));
    ob_raddr = OAW'(32'(r) * 32'(TC) + 32'(c));
  end

  // ---------------- stage 1: product sums ----------------
  logic           v1, fkk1, lkk1, last1;
  logic [OAW-1:0] pix1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; fkk1 <= 1'b0; lkk1 <= 1'b0; last1 <= 1'b0; pix1 <= '0;
    end else begin
      v1    <= run;
      fkk1  <= (kr == 4'd0) && (kc == 4'd0);
      lkk1  <= last_kk;
      last1 <= last_all;
      pix1  <= ob_raddr;
    end
  end

  acc_t psum [TM];
  always_comb begin
    for (int m = 0; m < TM; m++) begin
      psum[m] = '0;
      for (int n = 0; n < TN; n++)
        psum[m] = psum[m] + ACCW'(ib_rdata[n] * wb_rdata[m*TN + n]);
    end
  end

  // ---------------- stage 2: accumulate over kernel positions ----------------
  acc_t           acc [TM];
  logic           v2, last2;
  logic [OAW-1:0] pix2;
  acc_t           old2 [TM];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; last2 <= 1'b0; pix2 <= '0;
      for (int m = 0; m < TM; m++) begin acc[m] <= '0; old2[m] <= '0; end
    end else begin
      v2 <= v1 && lkk1; last2 <= v1 && last1; pix2 <= pix1;
      if (v1) begin
        for (int m = 0; m < TM; m++) begin
          acc[m]  <= fkk1 ? psum[m] : acc[m] + psum[m];
          old2[m] <= first_q ? '0 : ob_rdata[m];
        end
      end
    end
  end

  // ---------------- stage 3: OFM write ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_we <= 1'b0; ob_waddr <= '0; done <= 1'b0;
      for (int m = 0; m < TM; m++) ob_wdata[m] <= '0;
    end else begin
      ob_we    <= v2;
      ob_waddr <= pix2;
      done     <= last2;
      for (int m = 0; m < TM; m++) ob_wdata[m] <= acc[m] + old2[m];
    end
  end

  // busy covers the issue phase and the drain of the pipeline
  logic drain1, drain2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin drain1 <= 1'b0; drain2 <= 1'b0; end
    else begin drain1 <= v1 && last1; drain2 <= drain1; end
  end
  assign busy = run || v1 || v2 || last2 || drain1 || drain2;

endmodule
