// input_tile_buffer: double-buffered, banked tile buffer for IFM or weights.
//
// The IFM buffer has BANKS = Tn banks and the weight buffer BANKS = Tm*Tn
// banks, so the engine gets one word from every bank per cycle at a common
// address. Tiles arrive as beats of W words. Word i of a tile (i = beat*W+k)
// is stored in bank (i mod BANKS) at address (i div BANKS): the off-chip
// stream is ordered with the banked dimension innermost, so the W words of
// one beat always fall into W distinct banks (W <= BANKS).
//
// Two beat write ports are provided, one for the local memory stream and one
// for the inter-FPGA link, because the XFER loader stores a beat from each in
// the same cycle. Two halves: the loader writes half 'wsel' while the engine
// reads half 'rsel' (double buffering, as in the paper's BRAM count bI/bW).
// Read latency is one cycle. Words past DEPTH (padding of the last beat)
// are dropped.
module input_tile_buffer
  import slp_pkg::*;
#(
  parameter int BANKS = 10,
  parameter int DEPTH = 2205,
  parameter int W     = 4
) (
  input  logic                     clk,
  input  logic                     wsel,
  input  logic [1:0]               wr_en,
  input  logic [1:0][CNTW-1:0]     wr_beat,
  input  data_t [1:0][W-1:0]       wr_data,
  input  logic                     rsel,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output data_t [BANKS-1:0]        rdata
);

  localparam int AW = $clog2(DEPTH);
  localparam int IW = CNTW + $clog2(W) + 1;
  localparam int BW = (BANKS > 1) ? $clog2(BANKS) : 1;

  data_t mem [2][BANKS][DEPTH];

  initial begin
    assert (W <= BANKS) else $error("input_tile_buffer: W must not exceed BANKS");
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (wr_en[p]) begin
        for (int k = 0; k < W; k++) begin
          logic [IW-1:0] idx;
          idx = IW'(wr_beat[p]) * IW'(W) + IW'(k);
          if (idx / IW'(BANKS) < IW'(DEPTH))
            mem[wsel][BW'(idx % IW'(BANKS))][AW'(idx / IW'(BANKS))] <= wr_data[p][k];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int b = 0; b < BANKS; b++)
      rdata[b] <= mem[rsel][b][raddr];
  end

endmodule
