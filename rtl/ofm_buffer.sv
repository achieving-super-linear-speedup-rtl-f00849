// ofm_buffer: double-buffered OFM buffer, Tm banks of Tr*Tc partial sums.
//
// The engine read-modify-writes the half 'e_sel' (read latency one cycle,
// one pixel of all Tm channels per access), while the store unit reads the
// other half 's_sel' one pixel at a time. Entries are 32-bit partial sums;
// rounding to 16 bits happens in the store unit.
module ofm_buffer
  import slp_pkg::*;
#(
  parameter int TM = 128,
  parameter int TR = 7,
  parameter int TC = 14
) (
  input  logic                         clk,
  input  logic                         e_sel,
  input  logic [$clog2(TR*TC)-1:0]     e_raddr,
  output acc_t [TM-1:0]                e_rdata,
  input  logic                         e_we,
  input  logic [$clog2(TR*TC)-1:0]     e_waddr,
  input  acc_t [TM-1:0]                e_wdata,
  input  logic                         s_sel,
  input  logic [$clog2(TR*TC)-1:0]     s_raddr,
  output acc_t [TM-1:0]                s_rdata
);

  localparam int NPIX = TR * TC;

  acc_t mem [2][TM][NPIX];

  always_ff @(posedge clk) begin
    if (e_we)
      for (int m = 0; m < TM; m++) mem[e_sel][m][e_waddr] <= e_wdata[m];
    for (int m = 0; m < TM; m++) begin
      e_rdata[m] <= mem[e_sel][m][e_raddr];
      s_rdata[m] <= mem[s_sel][m][s_raddr];
    end
  end

endmodule
