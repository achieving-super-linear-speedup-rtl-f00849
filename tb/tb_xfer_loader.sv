// tb_xfer_loader: three loaders form a ring (i -> i+1 -> i+2 -> i). The links
// are behavioural queues of depth 4 with random acceptance; the memory
// streams deliver each loader's own part with random gaps. Each loader's
// buffer ports write into a model buffer. Checked, for two consecutive
// tiles (the second started at different times on the three loaders, so
// that beats of the next tile wait at a slower neighbour): every loader ends
// with the whole tile; each loader took exactly its part from memory; each
// sent every part except its successor's; beats carry the right tag.
// Then a single loader (p = 1) must load a tile of n beats in n+1 cycles
// from an always-valid stream.
module tb_xfer_loader;
  import slp_pkg::*;
  localparam int W = 2, P = 3, NB = 20, NBMAX = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [P-1:0] start, busy, done, mem_valid, mem_ready, rx_valid, rx_ready, tx_valid, tx_ready;
  logic [P-1:0] tag;
  logic [CNTW-1:0] n_beats;
  logic [PW-1:0] p_cfg;
  data_t [P-1:0][W-1:0] mem_data, rx_data, tx_data;
  link_hdr_t [P-1:0] rx_hdr, tx_hdr;
  logic [P-1:0][1:0] wr_en;
  logic [P-1:0][1:0][CNTW-1:0] wr_beat;
  data_t [P-1:0][1:0][W-1:0] wr_data;

  for (genvar i = 0; i < P; i++) begin : g_ld
    xfer_loader #(.W(W), .PMAX(4)) u (
      .clk, .rst_n, .start(start[i]), .tag(tag[i]), .n_beats, .p(p_cfg), .pos(PW'(i)),
      .busy(busy[i]), .done(done[i]),
      .mem_valid(mem_valid[i]), .mem_ready(mem_ready[i]), .mem_data(mem_data[i]),
      .rx_valid(rx_valid[i]), .rx_ready(rx_ready[i]), .rx_hdr(rx_hdr[i]), .rx_data(rx_data[i]),
      .tx_valid(tx_valid[i]), .tx_ready(tx_ready[i]), .tx_hdr(tx_hdr[i]), .tx_data(tx_data[i]),
      .wr_en(wr_en[i]), .wr_beat(wr_beat[i]), .wr_data(wr_data[i]));
  end

  // tile contents and model buffers
  data_t tile [2][NBMAX*W];
  data_t buff [P][NBMAX*W];
  int    cur [P];          // tile number each loader is on
  int    mptr [P], mend [P], nmem [P], ntx [P];
  bit    mem_on [P];

  // behavioural links: queue q[i] carries beats from loader i to loader i+1
  typedef struct packed { link_hdr_t h; data_t [W-1:0] d; } beat_t;
  beat_t q [P][$];

  always_comb begin
    for (int i = 0; i < P; i++) begin
      int src; src = (i + P - 1) % P;
      rx_valid[i] = (q[src].size() > 0);
      rx_hdr[i]   = rx_valid[i] ? q[src][0].h : '0;
      rx_data[i]  = rx_valid[i] ? q[src][0].d : '0;
      mem_data[i] = (mptr[i] < mend[i]) ? {tile[cur[i]%2][mptr[i]*W+1], tile[cur[i]%2][mptr[i]*W]} : '0;
    end
  end

  always @(posedge clk) begin
    for (int i = 0; i < P; i++) begin
      int src; src = (i + P - 1) % P;
      if (wr_en[i][0]) for (int k = 0; k < W; k++) buff[i][wr_beat[i][0]*W+k] = wr_data[i][0][k];
      if (wr_en[i][1]) for (int k = 0; k < W; k++) buff[i][wr_beat[i][1]*W+k] = wr_data[i][1][k];
      if (rx_valid[i] && rx_ready[i]) void'(q[src].pop_front());
      if (tx_valid[i] && tx_ready[i]) begin
        checks++;
        if (tx_hdr[i].tag !== 1'(cur[i])) begin failures++; $display("loader %0d sent wrong tag", i); end
        q[i].push_back('{h: tx_hdr[i], d: tx_data[i]});
        ntx[i]++;
      end
      if (mem_valid[i] && mem_ready[i]) begin mptr[i]++; nmem[i]++; end
    end
    for (int i = 0; i < P; i++) begin
      tx_ready[i]  <= (q[i].size() < 4) && ($urandom_range(0, 3) != 0);
      // a beat once offered stays offered until taken (stream rule)
      if (!(mem_valid[i] && !mem_ready[i]))
        mem_valid[i] <= mem_on[i] && (mptr[i] < mend[i]) && ($urandom_range(0, 2) != 0);
    end
  end

  function automatic int part_lo(int nb, int pp, int pos);
    int pl; pl = (nb + pp - 1) / pp;
    return (pl * pos > nb) ? nb : pl * pos;
  endfunction
  function automatic int part_hi(int nb, int pp, int pos);
    int pl; pl = (nb + pp - 1) / pp;
    return (part_lo(nb, pp, pos) + pl > nb) ? nb : part_lo(nb, pp, pos) + pl;
  endfunction

  task automatic start_one(int i, int t);
    cur[i] = t; mptr[i] = part_lo(NB, P, i); mend[i] = part_hi(NB, P, i);
    nmem[i] = 0; ntx[i] = 0; mem_on[i] = 1;
    @(negedge clk); start[i] = 1; tag[i] = 1'(t);
    @(negedge clk); start[i] = 0;
  endtask

  task automatic check_tile(int t);
    for (int i = 0; i < P; i++) begin
      int succ; succ = (i + 1) % P;
      for (int w = 0; w < NB*W; w++) begin
        checks++;
        if (buff[i][w] !== tile[t%2][w]) begin failures++; $display("tile %0d loader %0d word %0d wrong", t, i, w); end
      end
      checks += 2;
      if (nmem[i] != part_hi(NB, P, i) - part_lo(NB, P, i)) begin failures++; $display("loader %0d read %0d beats from memory", i, nmem[i]); end
      if (ntx[i] != NB - (part_hi(NB, P, succ) - part_lo(NB, P, succ))) begin failures++; $display("loader %0d sent %0d beats", i, ntx[i]); end
    end
  endtask

  bit fin [P];
  initial begin
    start = '0; tag = '0; n_beats = CNTW'(NB); p_cfg = PW'(P);
    for (int i = 0; i < P; i++) begin cur[i] = 0; mptr[i] = 0; mend[i] = 0; mem_on[i] = 0; end
    for (int t = 0; t < 2; t++) for (int w = 0; w < NBMAX*W; w++) tile[t][w] = data_t'($urandom);
    repeat (2) @(negedge clk); rst_n = 1;
    // tile 0: all start together
    fork
      start_one(0, 0); start_one(1, 0); start_one(2, 0);
    join
    wait (!busy[0] && !busy[1] && !busy[2]);
    check_tile(0);
    // tile 1: loader 0 starts at once, the others later
    fork
      start_one(0, 1);
      begin repeat (15) @(negedge clk); start_one(1, 1); end
      begin repeat (30) @(negedge clk); start_one(2, 1); end
    join
    @(negedge clk);
    wait (!busy[0] && !busy[1] && !busy[2]);
    check_tile(1);
    // single loader, p = 1
    begin
      int cyc;
      for (int i = 0; i < P; i++) mem_on[i] = 0;
      p_cfg = 1;
      for (int w = 0; w < NB*W; w++) tile[0][w] = data_t'($urandom);
      cur[0] = 0; mptr[0] = 0; mend[0] = NB; nmem[0] = 0; ntx[0] = 0;
      force mem_valid[0] = 1'b1;
      @(negedge clk); start[0] = 1; tag[0] = 0;
      @(negedge clk); start[0] = 0; cyc = 1;
      while (!done[0]) begin @(negedge clk); cyc++; end
      release mem_valid[0];
      checks += 2;
      if (cyc != NB + 1) begin failures++; $display("p=1 load took %0d cycles", cyc); end
      if (ntx[0] != 0) begin failures++; $display("p=1 loader used the link"); end
      for (int w = 0; w < NB*W; w++) begin
        checks++;
        if (buff[0][w] !== tile[0][w]) begin failures++; $display("p=1 word %0d wrong", w); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
