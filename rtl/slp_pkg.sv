// slp_pkg: types and constants shared by the multi-FPGA CNN accelerator.
//
// Data are 16-bit signed fixed point; partial sums are kept in 32 bits.
// layer_cfg_t is the per-layer configuration the host writes before a
// start pulse: kernel size and stride, this node's loop trip counts, the
// fixed-point shift used on the way out, and the node's place in the
// two rings of the 2D torus (row ring = FPGAs sharing IFM tiles, column
// ring = FPGAs sharing weight tiles). link_hdr_t is the side-band that
// travels with every beat on an inter-FPGA link.
package slp_pkg;

  localparam int DW   = 16;   // data width (16-bit fixed point)
  localparam int ACCW = 32;   // partial-sum width
  localparam int CNTW = 16;   // width of trip counters and beat indices
  localparam int PW   = 3;    // width of ring size / ring position fields

  typedef logic signed [DW-1:0]   data_t;
  typedef logic signed [ACCW-1:0] acc_t;

  typedef struct packed {
    logic [3:0]      k;        // kernel size K (1..KMAX)
    logic [2:0]      stride;   // stride S (1..SMAX)
    logic [CNTW-1:0] n_outer;  // B * ceil(R/Tr) * ceil(C/Tc) of this node
    logic [CNTW-1:0] n_m;      // ceil(M/Tm) of this node
    logic [CNTW-1:0] n_n;      // ceil(N/Tn)
    logic [4:0]      frac;     // right shift applied to sums on output
    logic [PW-1:0]   p_row;    // FPGAs in the row ring (Pm)
    logic [PW-1:0]   row_pos;  // position in the row ring
    logic [PW-1:0]   p_col;    // FPGAs in the column ring (Pb*Pr*Pc)
    logic [PW-1:0]   col_pos;  // position in the column ring
  } layer_cfg_t;

  typedef struct packed {
    logic            tag;      // parity of the tile being loaded
    logic [3:0]      hops;     // links already travelled minus one
    logic [CNTW-1:0] beat;     // beat index inside the tile
  } link_hdr_t;

  localparam int HDRW = $bits(link_hdr_t);

endpackage
