// tb_superlip_full: the node at its default (paper) sizes, Tm=128, Tn=10,
// Tr=7, Tc=14, Ip=4, Wp=8, Op=4, Kmax=11, no parameter overrides. Two nodes
// form a 2 x 1 torus: output rows are split in two (Pr = 2) and the two
// FPGAs share every weight tile over the column ring (XFER), each loading
// half of it from its own memory. One layer with N=20, M=128, R=14, C=28,
// K=3, S=1 is run (four tile executions per node, two input-channel groups
// per output tile). Every OFM word is compared with a direct convolution,
// and weight sharing, load/compute overlap and store/compute overlap must
// each be seen. The cycle count of the layer is checked against the paper's
// latency model.
module tb_superlip_full;
  import slp_pkg::*;
  localparam int TM = 128, TN = 10, TR = 7, TC = 14, KMAX = 11, SMAX = 4, IP = 4, WP = 8, OP = 4;
  localparam int ROWS = 2, COLS = 1;
`define NODE_PARAMS
`include "cluster_body.svh"

  initial begin
    int cyc;
    start = '0; dma_run = 0; ofm_throttle = 1;
    n_row_beats = 0; n_col_beats = 0; n_fwd_beats = 0; n_overlap = 0; n_store_overlap = 0;
    n_stall_cycles = 0; n_tag_hold = 0; n_fifo_full = 0; n_sat = 0;
    for (int q = 0; q < NODES; q++) cfg[q] = '0;
    L_N = TN; L_M = TM * COLS; L_R = TR * ROWS; L_C = TC; L_K = 1; L_S = 1; L_XFER = 0;
    repeat (3) @(negedge clk); rst_n = 1; link_rst_n = 1;
    run_layer(20, 128, 14, 28, 3, 1, 8, 1'b1, 1, 0, cyc);
    $display("full-size layer (K=3, XFER on the column ring): %0d cycles", cyc);
    $display("column beats %0d, load/compute overlap %0d, store/compute overlap %0d, OFM stall %0d",
             n_col_beats, n_overlap, n_store_overlap, n_stall_cycles);
    // latency model of the paper for this node: tComp = K*K*Tr*Tc,
    // tW = weight beats / (Wp * 2 sharers), tI = IFM beats / Ip,
    // tO = Tr*Tc*Tm/Op; Lat1 = max(tComp, tI, tW), Lat2 = max(2*Lat1, tO),
    // Lat = 2*Lat2 + tO + Lat1 (two output tiles). The model counts the store
    // of the last tile twice, so the run must lie between Lat - Lat2 and Lat
    // plus a small control overhead per step.
    begin
      int tcomp, ti, tw, to, lat1, lat2, lat;
      tcomp = 9 * TR * TC; ti = (TN * 9 * 16 + IP - 1) / IP; tw = (TM * TN * 9 / WP) / 2;
      to = TR * TC * TM / OP;
      lat1 = tcomp > ti ? (tcomp > tw ? tcomp : tw) : (ti > tw ? ti : tw);
      lat2 = 2 * lat1 > to ? 2 * lat1 : to;
      lat = 2 * lat2 + to + lat1;
      checks++;
      if (cyc < lat - lat2 || cyc > lat + 200) begin
        failures++; $display("layer took %0d cycles, model %0d..%0d", cyc, lat - lat2, lat + 200);
      end
    end
    checks += 3;
    if (n_col_beats == 0)     begin failures++; $display("no weight sharing on the column ring"); end
    if (n_overlap == 0)       begin failures++; $display("no load/compute overlap"); end
    if (n_store_overlap == 0) begin failures++; $display("no store/compute overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
