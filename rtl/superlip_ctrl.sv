// superlip_ctrl: loop-nest controller with double-buffered scheduling.
//
// A layer is run as E = n_outer * n_m * n_n PE executions, in the loop order
// batch/row/column tiles (outer), OFM-channel tiles, IFM-channel tiles
// (innermost). Step s loads the IFM and weight tiles of execution s into
// input half s%2 while the engine computes execution s-1 from the other
// half, so one step lasts max(tI_mem, tW_mem, tComp) plus a few cycles of
// hand-over (the paper's Lat1). A step starts only when every operation of
// the previous one has ended. The n_n executions of one OFM group
// accumulate into the same OFM half; when the group ends, that half is
// handed to the store unit, which drains it while the engine fills the
// other half (the paper's Lat2). An execution that would start a new group
// in a half that is still waiting to be stored stalls ('ofm_stall').
//
// Interface: 'start' (one cycle, while idle) latches 'cfg'; 'done' pulses
// after the last OFM tile has left. The loaders, engine and store unit are
// started with one-cycle pulses and report completion with one-cycle
// 'done' pulses. The beat counts of the two tiles are derived from cfg:
// ceil(Tn*TRI*TCI/IP) and ceil(Tm*Tn*K*K/WP), with TRI = (Tr-1)*S+K and
// TCI = (Tc-1)*S+K. The step structure follows the paper's performance
// model; the hand-over details are this design's.
module superlip_ctrl
  import slp_pkg::*;
#(
  parameter int TM = 128,
  parameter int TN = 10,
  parameter int TR = 7,
  parameter int TC = 14,
  parameter int IP = 4,
  parameter int WP = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  layer_cfg_t      cfg,
  output logic            busy,
  output logic            done,
  output layer_cfg_t      cfg_q,
  // loaders
  output logic            ld_start,
  output logic            ld_tag,
  output logic            ld_half,
  output logic [CNTW-1:0] ifm_beats,
  output logic [CNTW-1:0] wei_beats,
  input  logic            ifm_done,
  input  logic            wei_done,
  // engine
  output logic            eng_start,
  output logic            eng_first,
  output logic            eng_ihalf,
  output logic            eng_ohalf,
  input  logic            eng_done,
  // store unit
  output logic            st_start,
  output logic            st_half,
  input  logic            st_done,
  // status
  output logic            ofm_stall
);

  typedef enum logic [1:0] {IDLE, ISSUE, WAIT, FINISH} state_t;
  state_t state;

  logic [47:0] n_exec, lj, cj;        // executions, next load, next compute
  logic [CNTW-1:0] nidx;              // IFM-channel index of execution cj
  logic        ohalf;                 // OFM half of the current group
  logic [1:0]  ofm_full;              // half holds a finished group not yet stored
  logic        st_busy, st_next;      // store running, next half to store
  logic        pend_i, pend_w, pend_e, do_comp;

  wire comp_now   = (cj < lj) && (cj < n_exec);
  wire load_now   = (lj < n_exec);
  wire need_free  = comp_now && (nidx == '0);
  wire can_issue  = !(need_free && ofm_full[ohalf]);
  wire last_of_g  = (nidx == cfg_q.n_n - 1'b1);

  assign busy      = (state != IDLE);
  assign ofm_stall = (state == ISSUE) && !can_issue;

  always_comb begin
    logic [CNTW-1:0] tri_rt, tci_rt;
    tri_rt    = CNTW'((TR - 1) * cfg_q.stride + cfg_q.k);
    tci_rt    = CNTW'((TC - 1) * cfg_q.stride + cfg_q.k);
    ifm_beats = CNTW'((32'(TN) * 32'(tri_rt) * 32'(tci_rt) + IP - 1) / IP);
    wei_beats = CNTW'((32'(TM) * 32'(TN) * 32'(cfg_q.k) * 32'(cfg_q.k) + WP - 1) / WP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; cfg_q <= '0; n_exec <= '0; lj <= '0; cj <= '0; nidx <= '0;
      ohalf <= 1'b0; ofm_full <= '0; st_busy <= 1'b0; st_next <= 1'b0;
      pend_i <= 1'b0; pend_w <= 1'b0; pend_e <= 1'b0; do_comp <= 1'b0;
      ld_start <= 1'b0; ld_tag <= 1'b0; ld_half <= 1'b0;
      eng_start <= 1'b0; eng_first <= 1'b0; eng_ihalf <= 1'b0; eng_ohalf <= 1'b0;
      st_start <= 1'b0; st_half <= 1'b0; done <= 1'b0;
    end else begin
      ld_start <= 1'b0; eng_start <= 1'b0; st_start <= 1'b0; done <= 1'b0;

      // ---- store unit: drain finished halves in order ----
      if (st_done) begin
        st_busy <= 1'b0;
        ofm_full[st_next] <= 1'b0;
        st_next <= ~st_next;
      end else if (!st_busy && ofm_full[st_next] && !st_start) begin
        st_start <= 1'b1;
        st_half  <= st_next;
        st_busy  <= 1'b1;
      end

      if (ifm_done) pend_i <= 1'b0;
      if (wei_done) pend_w <= 1'b0;
      if (eng_done) pend_e <= 1'b0;

      case (state)
        IDLE: if (start) begin
          cfg_q  <= cfg;
          n_exec <= 48'(cfg.n_outer) * 48'(cfg.n_m) * 48'(cfg.n_n);
          lj <= '0; cj <= '0; nidx <= '0; ohalf <= 1'b0;
          state <= ISSUE;
        end
        ISSUE: if (can_issue) begin
          if (load_now) begin
            ld_start <= 1'b1; ld_tag <= lj[0]; ld_half <= lj[0];
            pend_i <= 1'b1; pend_w <= 1'b1;
          end
          if (comp_now) begin
            eng_start <= 1'b1; eng_first <= (nidx == '0);
            eng_ihalf <= cj[0]; eng_ohalf <= ohalf;
            pend_e <= 1'b1;
          end
          do_comp <= comp_now;
          state <= WAIT;
        end
        WAIT: if (!pend_i && !pend_w && !pend_e && !ld_start && !eng_start) begin
          if (load_now) lj <= lj + 1'b1;
          if (do_comp) begin
            cj <= cj + 1'b1;
            if (last_of_g) begin
              nidx <= '0;
              ofm_full[ohalf] <= 1'b1;
              ohalf <= ~ohalf;
            end else nidx <= nidx + 1'b1;
          end
          if (do_comp && cj + 1'b1 == n_exec) state <= FINISH;
          else if (n_exec == '0) state <= FINISH;
          else state <= ISSUE;
        end
        FINISH: if (ofm_full == '0 && !st_busy) begin
          done  <= 1'b1;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
