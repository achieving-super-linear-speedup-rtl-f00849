// tb_superlip_ctrl: the controller drives behavioural loaders, engine and
// store unit that answer a start pulse with a done pulse after fixed
// latencies tI, tW, tComp and tO. Checked for a compute-bound and an
// OFM-store-bound case:
//  - number of loads, executions and stores (E, E, n_outer*n_m);
//  - the engine reads the input half the previous step loaded, 'first'
//    marks exactly the first IFM-channel tile of each group, a group never
//    starts in an OFM half that is still waiting for or being stored;
//  - loads overlap computation (double buffering) and stores overlap it;
//  - the 'ofm_stall' mechanism shows up only in the store-bound case;
//  - total cycles lie between the paper's Lat = n_outer*n_m*Lat2 + tO + Lat1
//    less one Lat2, and Lat plus 4 cycles per step of hand-over.
module tb_superlip_ctrl;
  import slp_pkg::*;
  localparam int TM = 4, TN = 2, TR = 2, TC = 2, IP = 2, WP = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, ld_start, ld_tag, ld_half, ifm_done, wei_done;
  logic eng_start, eng_first, eng_ihalf, eng_ohalf, eng_done, st_start, st_half, st_done, ofm_stall;
  logic [CNTW-1:0] ifm_beats, wei_beats;
  layer_cfg_t cfg, cfg_q;
  int checks = 0, failures = 0;

  superlip_ctrl #(.TM(TM), .TN(TN), .TR(TR), .TC(TC), .IP(IP), .WP(WP)) dut (.*);

  int tI, tW, tC, tO;
  int cnt_i, cnt_w, cnt_e, cnt_s;
  int n_load, n_eng, n_store, n_stall, n_overlap_load, n_overlap_store;
  int last_load_half, exec_idx, nn;
  bit half_full [2];     // tb view: OFM half holds an unstored group
  bit storing_half;

  always @(posedge clk) begin
    ifm_done <= 0; wei_done <= 0; eng_done <= 0; st_done <= 0;
    if (cnt_i > 0) begin cnt_i--; if (cnt_i == 0) ifm_done <= 1; end
    if (cnt_w > 0) begin cnt_w--; if (cnt_w == 0) wei_done <= 1; end
    if (cnt_e > 0) begin cnt_e--; if (cnt_e == 0) eng_done <= 1; end
    if (cnt_s > 0) begin cnt_s--; if (cnt_s == 0) begin st_done <= 1; half_full[storing_half] = 0; end end
    if (cnt_e > 0 && (cnt_i > 0 || cnt_w > 0)) n_overlap_load++;
    if (cnt_e > 0 && cnt_s > 0) n_overlap_store++;
    if (ofm_stall) n_stall++;
    if (rst_n && ld_start) begin cnt_i = tI; cnt_w = tW; n_load++; last_load_half = int'(ld_half); end
    if (rst_n && eng_start) begin
      cnt_e = tC; n_eng++;
      checks += 3;
      if (eng_ihalf !== 1'(exec_idx)) begin failures++; $display("exec %0d reads input half %0d", exec_idx, eng_ihalf); end
      if (eng_first !== (exec_idx % nn == 0)) begin failures++; $display("exec %0d first=%0d", exec_idx, eng_first); end
      if (eng_first && half_full[eng_ohalf]) begin failures++; $display("exec %0d starts in an OFM half not yet stored", exec_idx); end
      if ((exec_idx % nn) == nn - 1) half_full[eng_ohalf] = 1;
      exec_idx++;
    end
    if (rst_n && st_start) begin cnt_s = tO; n_store++; storing_half = st_half; end
  end

  task automatic run(input int outer, input int nm, input int n_n, input int ti, input int tw,
                     input int tc, input int to, input bit expect_stall);
    int cyc, e, lat1, lat2, lat;
    tI = ti; tW = tw; tC = tc; tO = to; nn = n_n;
    n_load = 0; n_eng = 0; n_store = 0; n_stall = 0; n_overlap_load = 0; n_overlap_store = 0;
    exec_idx = 0; half_full[0] = 0; half_full[1] = 0;
    cfg = '0; cfg.k = 3; cfg.stride = 1; cfg.n_outer = CNTW'(outer); cfg.n_m = CNTW'(nm); cfg.n_n = CNTW'(n_n);
    cfg.p_row = 1; cfg.p_col = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    e = outer * nm * n_n;
    lat1 = (tc > ti) ? tc : ti; lat1 = (lat1 > tw) ? lat1 : tw;
    lat2 = (n_n * lat1 > to) ? n_n * lat1 : to;
    lat = outer * nm * lat2 + to + lat1;
    $display("E=%0d cycles=%0d paper Lat=%0d stalls=%0d", e, cyc, lat, n_stall);
    checks += 8;
    if (n_load != e || n_eng != e || n_store != outer * nm) begin
      failures++; $display("loads %0d execs %0d stores %0d", n_load, n_eng, n_store);
    end
    // the paper's formula counts one OFM store more than the schedule needs
    // when Lat2 is set by tO, so the lower bound is Lat - Lat2
    if (cyc < lat - lat2 || cyc > lat + 4 * (e + 1) + 10) begin failures++; $display("cycle count out of range"); end
    if (n_overlap_load == 0) begin failures++; $display("no load/compute overlap"); end
    if (n_overlap_store == 0) begin failures++; $display("no store/compute overlap"); end
    if (expect_stall && n_stall == 0) begin failures++; $display("expected OFM stalls"); end
    if (!expect_stall && n_stall != 0) begin failures++; $display("unexpected OFM stalls"); end
    if (ifm_beats != CNTW'((TN * ((TR-1)+3) * ((TC-1)+3) + IP - 1) / IP)) begin failures++; $display("ifm_beats %0d", ifm_beats); end
    if (wei_beats != CNTW'((TM * TN * 9 + WP - 1) / WP)) begin failures++; $display("wei_beats %0d", wei_beats); end
  endtask

  initial begin
    start = 0; cfg = '0; cnt_i = 0; cnt_w = 0; cnt_e = 0; cnt_s = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(2, 2, 3, 10, 12, 20, 15, 1'b0);     // compute bound
    run(3, 2, 1, 10, 8, 12, 60, 1'b1);      // bound by storing OFM
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
