// tb_superlip_node: end-to-end test of the node, six of them wired as a
// 2 x 3 torus (two FPGAs share each weight tile, three share each IFM tile,
// so IFM parts are also forwarded along the row ring), at reduced sizes:
// Tm=4, Tn=2, Tr=2, Tc=3, Ip=2, Wp=4, Op=2. Three layers are run:
//  1. K=3, S=1 with XFER on both rings;
//  2. K=5, S=2 with XFER, nodes started 40 cycles apart and one node's IFM
//     source slowed down, so that its neighbour runs a tile ahead and the
//     beats of that next tile must wait (tile-tag hold-back);
//  3. K=1 with XFER off (every node loads whole tiles itself) and a slow OFM
//     sink, so the engine must wait for OFM buffers (ofm_stall).
// Every OFM word of every node is compared with a direct convolution. Each
// mechanism must occur at least once: row-ring and column-ring transfers,
// forwarding of a part by an intermediate FPGA, tile-tag hold-back, a full
// link FIFO, load/compute overlap, store/compute overlap, OFM stall.
module tb_superlip_node;
  import slp_pkg::*;
  localparam int TM = 4, TN = 2, TR = 2, TC = 3, KMAX = 5, SMAX = 2, IP = 2, WP = 4, OP = 2;
  localparam int ROWS = 2, COLS = 3;
`define NODE_PARAMS #(.TM(TM), .TN(TN), .TR(TR), .TC(TC), .KMAX(KMAX), .SMAX(SMAX), .IP(IP), .WP(WP), .OP(OP))
`include "cluster_body.svh"

  initial begin
    int cyc;
    start = '0; dma_run = 0; ofm_throttle = 1;
    n_row_beats = 0; n_col_beats = 0; n_fwd_beats = 0; n_overlap = 0; n_store_overlap = 0;
    n_stall_cycles = 0; n_tag_hold = 0; n_fifo_full = 0; n_sat = 0;
    for (int q = 0; q < NODES; q++) cfg[q] = '0;
    L_N = TN; L_M = TM * COLS; L_R = TR * ROWS; L_C = TC; L_K = 1; L_S = 1; L_XFER = 0;
    repeat (3) @(negedge clk); rst_n = 1; link_rst_n = 1;
    // layer 1: N=6, M=24, R=8, C=6
    run_layer(6, 24, 8, 6, 3, 1, 4, 1'b1, 1, 0, cyc);
    $display("layer 1 (K=3, XFER): %0d cycles", cyc);
    // layer 2: stride 2, 5x5 kernel, skewed starts
    slow_node = 1;
    run_layer(4, 24, 8, 6, 5, 2, 6, 1'b1, 2, 40, cyc);
    slow_node = -1;
    $display("layer 2 (K=5, S=2, XFER, skewed): %0d cycles", cyc);
    // layer 3: no XFER, 1x1 kernel, slow OFM sink
    run_layer(2, 24, 8, 6, 1, 1, 0, 1'b0, 6, 0, cyc);
    $display("layer 3 (K=1, no XFER): %0d cycles", cyc);
    $display("row beats %0d, column beats %0d, forwarded %0d, tag holds %0d, link FIFO full %0d",
             n_row_beats, n_col_beats, n_fwd_beats, n_tag_hold, n_fifo_full);
    $display("load/compute overlap %0d, store/compute overlap %0d, OFM stall %0d, saturated words %0d",
             n_overlap, n_store_overlap, n_stall_cycles, n_sat);
    checks += 8;
    if (n_row_beats == 0)     begin failures++; $display("no IFM sharing on the row ring"); end
    if (n_col_beats == 0)     begin failures++; $display("no weight sharing on the column ring"); end
    if (n_fwd_beats == 0)     begin failures++; $display("no forwarding along a ring"); end
    if (n_tag_hold == 0)      begin failures++; $display("no tile-tag hold-back"); end
    if (n_fifo_full == 0)     begin failures++; $display("link FIFO never full"); end
    if (n_overlap == 0)       begin failures++; $display("no load/compute overlap"); end
    if (n_store_overlap == 0) begin failures++; $display("no store/compute overlap"); end
    if (n_stall_cycles == 0)  begin failures++; $display("no OFM stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
