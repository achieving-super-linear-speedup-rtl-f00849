// Shared body of the cluster testbenches. The including module defines the
// node parameters (TM, TN, TR, TC, KMAX, SMAX, IP, WP, OP), the torus size
// (ROWS x COLS), the macro NODE_PARAMS, and an initial block that resets the nodes and
// calls run_layer for each layer it wants to test.
//
// Node (i, j) sits in torus row i and column j. Output rows of the layer are
// split over the ROWS rows of FPGAs (row partition, Pr = ROWS) and output
// channels over the COLS columns (OFM-channel partition, Pm = COLS). With
// XFER on, the FPGAs of a torus row share IFM tiles over the row ring
// (p_row = COLS, position j) and those of a torus column share weight tiles
// over the column ring (p_col = ROWS, position i). Each node has its own
// behavioural DMA: an IFM source and a weight source that deliver, tile by
// tile in execution order, only the node's own part of each tile, and an
// OFM sink that compares every word with a direct convolution. The links
// are wires between neighbours in the link clock.

  localparam int NODES = ROWS * COLS;

  logic clk = 0, link_clk = 0, rst_n = 0, link_rst_n = 0;
  always #5 clk = ~clk;
  always #7 link_clk = ~link_clk;

  int checks = 0, failures = 0;

  // ---------------- layer under test (set by the scenario) ----------------
  int L_N, L_M, L_R, L_C, L_K, L_S, L_FRAC;
  bit L_XFER;
  int ofm_throttle;                 // sink accepts 1 beat in ofm_throttle cycles
  data_t ifm_a [];                  // [n][row][col] of the whole layer input
  data_t wt_a  [];                  // [m][n][kr][kc]
  int    RI, CI;

  function automatic int rpart(); return L_R / ROWS; endfunction
  function automatic int mpart(); return L_M / COLS; endfunction
  function automatic int n_rt();  return rpart() / TR; endfunction
  function automatic int n_ct();  return L_C / TC; endfunction
  function automatic int n_mt();  return mpart() / TM; endfunction
  function automatic int n_nt();  return L_N / TN; endfunction
  function automatic int tri_rt(); return (TR - 1) * L_S + L_K; endfunction
  function automatic int tci_rt(); return (TC - 1) * L_S + L_K; endfunction
  function automatic int ifm_words(); return TN * tri_rt() * tci_rt(); endfunction
  function automatic int wei_words(); return TM * TN * L_K * L_K; endfunction
  function automatic int n_exec();    return n_rt() * n_ct() * n_mt() * n_nt(); endfunction

  function automatic int part_lo(int nb, int p, int pos);
    int pl; pl = (nb + p - 1) / p;
    return (pl * pos > nb) ? nb : pl * pos;
  endfunction
  function automatic int part_hi(int nb, int p, int pos);
    int pl; pl = (nb + p - 1) / p;
    return (part_lo(nb, p, pos) + pl > nb) ? nb : part_lo(nb, p, pos) + pl;
  endfunction

  // word w of the IFM tile of execution e on node (i, j)
  function automatic data_t ifm_word(int i, int e, int w);
    int nt, o, rt, ct, n, pix, rin, cin, row, col;
    if (w >= ifm_words()) return '0;
    nt = e % n_nt(); o = e / (n_nt() * n_mt());
    rt = o / n_ct(); ct = o % n_ct();
    n = w % TN; pix = w / TN; rin = pix / tci_rt(); cin = pix % tci_rt();
    row = (i * rpart() + rt * TR) * L_S + rin;
    col = ct * TC * L_S + cin;
    if (row >= RI || col >= CI) return '0;
    return ifm_a[((nt * TN + n) * RI + row) * CI + col];
  endfunction

  // word w of the weight tile of execution e on node (i, j)
  function automatic data_t wei_word(int j, int e, int w);
    int nt, mt, kk, b, m, n;
    if (w >= wei_words()) return '0;
    nt = e % n_nt(); mt = (e / n_nt()) % n_mt();
    kk = w / (TM * TN); b = w % (TM * TN); m = b / TN; n = b % TN;
    return wt_a[(((j * mpart() + mt * TM + m) * L_N + nt * TN + n) * L_K + kk / L_K) * L_K + kk % L_K];
  endfunction

  // expected OFM word: group g (= o * n_mt + mt), pixel pix, channel m of node (i, j)
  function automatic data_t ofm_expect(int i, int j, int g, int pix, int m);
    int o, mt, rt, ct, r, c, mo;
    acc_t sum, s;
    o = g / n_mt(); mt = g % n_mt(); rt = o / n_ct(); ct = o % n_ct();
    r = i * rpart() + rt * TR + pix / TC; c = ct * TC + pix % TC; mo = j * mpart() + mt * TM + m;
    sum = '0;
    for (int n = 0; n < L_N; n++)
      for (int kr = 0; kr < L_K; kr++)
        for (int kc = 0; kc < L_K; kc++)
          sum += acc_t'(ifm_a[(n * RI + r * L_S + kr) * CI + c * L_S + kc] *
                        wt_a[((mo * L_N + n) * L_K + kr) * L_K + kc]);
    s = sum >>> L_FRAC;
    if (s > 32767) return 16'sh7fff;
    if (s < -32768) return 16'sh8000;
    return s[15:0];
  endfunction

  // ---------------- nodes and links ----------------
  localparam int RLW = HDRW + IP * DW;
  localparam int CLW = HDRW + WP * DW;

  layer_cfg_t cfg [NODES];
  logic [NODES-1:0] start, busy, done, ofm_stall;
  logic [NODES-1:0] ifm_valid, ifm_ready, wei_valid, wei_ready, ofm_valid, ofm_ready;
  data_t [IP-1:0] ifm_data [NODES];
  data_t [WP-1:0] wei_data [NODES];
  data_t [OP-1:0] ofm_data [NODES];
  logic [NODES-1:0] row_tx_valid, row_tx_ready, row_rx_valid, row_rx_ready;
  logic [NODES-1:0] col_tx_valid, col_tx_ready, col_rx_valid, col_rx_ready;
  logic [RLW-1:0] row_tx_data [NODES], row_rx_data [NODES];
  logic [CLW-1:0] col_tx_data [NODES], col_rx_data [NODES];

  bit dma_run;
  int slow_node = -1;               // this node's IFM source is eight times slower
  int og_cnt [NODES];

  // mechanism counters
  int n_row_beats, n_col_beats, n_fwd_beats, n_overlap, n_store_overlap, n_stall_cycles;
  int n_tag_hold, n_fifo_full, n_sat;

  for (genvar q = 0; q < NODES; q++) begin : g_node
    localparam int I = q / COLS, J = q % COLS;
    localparam int RNEXT = I * COLS + (J + 1) % COLS;       // next node of the row ring
    localparam int CNEXT = ((I + 1) % ROWS) * COLS + J;     // next node of the column ring

    superlip_node `NODE_PARAMS u_node (
      .clk, .rst_n, .link_clk, .link_rst_n, .cfg(cfg[q]), .start(start[q]), .busy(busy[q]),
      .done(done[q]), .ofm_stall(ofm_stall[q]),
      .ifm_valid(ifm_valid[q]), .ifm_ready(ifm_ready[q]), .ifm_data(ifm_data[q]),
      .wei_valid(wei_valid[q]), .wei_ready(wei_ready[q]), .wei_data(wei_data[q]),
      .ofm_valid(ofm_valid[q]), .ofm_ready(ofm_ready[q]), .ofm_data(ofm_data[q]),
      .row_tx_valid(row_tx_valid[q]), .row_tx_ready(row_tx_ready[q]), .row_tx_data(row_tx_data[q]),
      .row_rx_valid(row_rx_valid[q]), .row_rx_ready(row_rx_ready[q]), .row_rx_data(row_rx_data[q]),
      .col_tx_valid(col_tx_valid[q]), .col_tx_ready(col_tx_ready[q]), .col_tx_data(col_tx_data[q]),
      .col_rx_valid(col_rx_valid[q]), .col_rx_ready(col_rx_ready[q]), .col_rx_data(col_rx_data[q]));

    // behavioural links (the serial link IP is a wire here)
    assign row_rx_valid[RNEXT] = row_tx_valid[q];
    assign row_rx_data[RNEXT]  = row_tx_data[q];
    assign row_tx_ready[q]     = row_rx_ready[RNEXT];
    assign col_rx_valid[CNEXT] = col_tx_valid[q];
    assign col_rx_data[CNEXT]  = col_tx_data[q];
    assign col_tx_ready[q]     = col_rx_ready[CNEXT];

    // behavioural DMA: IFM source
    int ie, ib, we, wb, og, ow, ifm_lo, ifm_hi, wei_lo, wei_hi;
    int ifm_nb, wei_nb;
    wire run = dma_run;
    assign og_cnt[q] = og;
    always_comb begin
      ifm_nb = (ifm_words() + IP - 1) / IP;
      wei_nb = (wei_words() + WP - 1) / WP;
      for (int k = 0; k < IP; k++) ifm_data[q][k] = ifm_word(I, ie, ib * IP + k);
      for (int k = 0; k < WP; k++) wei_data[q][k] = wei_word(J, we, wb * WP + k);
    end
    always @(posedge clk) begin
      if (!run) begin
        ifm_valid[q] <= 0; wei_valid[q] <= 0;
        ie <= 0; we <= 0; ib <= ifm_lo; wb <= wei_lo;
      end else begin
        if (ifm_valid[q] && ifm_ready[q]) begin
          if (ib + 1 < ifm_hi) ib <= ib + 1;
          else begin
            ie <= ie + 1;
            ib <= ifm_lo;
          end
        end
        if (wei_valid[q] && wei_ready[q]) begin
          if (wb + 1 < wei_hi) wb <= wb + 1;
          else begin
            we <= we + 1;
            wb <= wei_lo;
          end
        end
        if (!(ifm_valid[q] && !ifm_ready[q]))
          ifm_valid[q] <= (ifm_hi > ifm_lo) && (ie + int'(ifm_valid[q] && ifm_ready[q] && ib + 1 >= ifm_hi) < n_exec())
                          && ((q == slow_node) ? ($urandom_range(0, 7) == 0) : ($urandom_range(0, 3) != 0));
        if (!(wei_valid[q] && !wei_ready[q]))
          wei_valid[q] <= (wei_hi > wei_lo) && (we + int'(wei_valid[q] && wei_ready[q] && wb + 1 >= wei_hi) < n_exec())
                          && ($urandom_range(0, 3) != 0);
      end
    end
    // parts with no beats at all are skipped
    always_comb begin
      ifm_lo = L_XFER ? part_lo(ifm_nb, COLS, J) : 0;
      wei_lo = L_XFER ? part_lo(wei_nb, ROWS, I) : 0;
      ifm_hi = L_XFER ? part_hi(ifm_nb, COLS, J) : ifm_nb;
      wei_hi = L_XFER ? part_hi(wei_nb, ROWS, I) : wei_nb;
    end

    // behavioural DMA: OFM sink with checking
    always @(posedge clk) begin
      if (!run) begin og <= 0; ow <= 0; end
      if (run && ofm_valid[q] && ofm_ready[q]) begin
        for (int k = 0; k < OP; k++) begin
          int wi;
          data_t ex;
          wi = ow * OP + k;
          ex = ofm_expect(I, J, og, wi / TM, wi % TM);
          checks++;
          if (ofm_data[q][k] == 16'sh7fff || ofm_data[q][k] == 16'sh8000) n_sat++;
          if (ofm_data[q][k] !== ex) begin
            failures++;
            if (failures < 10)
              $display("node (%0d,%0d) group %0d pixel %0d m %0d: got %0d expected %0d",
                       I, J, og, wi / TM, wi % TM, ofm_data[q][k], ex);
          end
        end
        if (ow + 1 == TR * TC * TM / OP) begin ow <= 0; og <= og + 1; end
        else ow <= ow + 1;
      end
      ofm_ready[q] <= ($urandom_range(0, ofm_throttle - 1) == 0);
    end

    // mechanism observation
    always @(posedge clk) if (rst_n && run) begin
      if (u_node.eng_busy && (u_node.ifm_busy || u_node.wei_busy)) n_overlap++;
      if (u_node.eng_busy && u_node.st_busy) n_store_overlap++;
      if (ofm_stall[q]) n_stall_cycles++;
      if (u_node.rrx_v && u_node.u_ifm_ld.rx_hdr.tag != u_node.u_ifm_ld.cur_tag) n_tag_hold++;
      if (u_node.crx_v && u_node.u_wei_ld.rx_hdr.tag != u_node.u_wei_ld.cur_tag) n_tag_hold++;
      if (!u_node.rtx_r || !u_node.ctx_r) n_fifo_full++;
    end
    always @(posedge link_clk) if (link_rst_n && run) begin
      if (row_tx_valid[q] && row_tx_ready[q]) begin
        n_row_beats++;
        if (row_tx_data[q][RLW-2 -: 4] != 0) n_fwd_beats++;
      end
      if (col_tx_valid[q] && col_tx_ready[q]) begin
        n_col_beats++;
        if (col_tx_data[q][CLW-2 -: 4] != 0) n_fwd_beats++;
      end
    end
  end

  // ---------------- running one layer ----------------
  task automatic run_layer(input int n, m, r, c, k, s, frac, input bit xfer, input int throttle,
                           input int skew, output int cycles);
    L_N = n; L_M = m; L_R = r; L_C = c; L_K = k; L_S = s; L_FRAC = frac; L_XFER = xfer;
    ofm_throttle = throttle;
    RI = (r - 1) * s + k; CI = (c - 1) * s + k;
    ifm_a = new[n * RI * CI];
    wt_a  = new[m * n * k * k];
    foreach (ifm_a[x]) ifm_a[x] = data_t'($signed($urandom_range(0, 255)) - 128);
    foreach (wt_a[x])  wt_a[x]  = data_t'($signed($urandom_range(0, 255)) - 128);
    for (int q = 0; q < NODES; q++) begin
      cfg[q] = '0;
      cfg[q].k = 4'(k); cfg[q].stride = 3'(s);
      cfg[q].n_outer = CNTW'(n_rt() * n_ct()); cfg[q].n_m = CNTW'(n_mt()); cfg[q].n_n = CNTW'(n_nt());
      cfg[q].frac = 5'(frac);
      cfg[q].p_row = xfer ? PW'(COLS) : PW'(1); cfg[q].row_pos = xfer ? PW'(q % COLS) : '0;
      cfg[q].p_col = xfer ? PW'(ROWS) : PW'(1); cfg[q].col_pos = xfer ? PW'(q / COLS) : '0;
    end
    // let the DMA models settle on the new layer before they run
    repeat (3) @(negedge clk);
    dma_run = 1;
    cycles = 0;
    fork
      begin
        for (int q = 0; q < NODES; q++) begin
          @(negedge clk); start[q] = 1;
          @(negedge clk); start = '0;
          repeat (skew) @(negedge clk);
        end
      end
      begin
        @(negedge clk);
        while (busy != '0 || start != '0 || cycles < 2) begin @(negedge clk); cycles++; end
      end
    join
    check_counts();
    dma_run = 0;
    repeat (2) @(negedge clk);
  endtask

  task automatic check_counts();
    // every node must have delivered all its OFM groups
    for (int q = 0; q < NODES; q++) begin
      checks++;
      if (og_cnt[q] != n_rt() * n_ct() * n_mt()) begin
        failures++; $display("node %0d delivered %0d OFM tiles, expected %0d", q, og_cnt[q], n_rt() * n_ct() * n_mt());
      end
    end
  endtask
