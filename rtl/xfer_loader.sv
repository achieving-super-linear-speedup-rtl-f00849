// xfer_loader: XFER tile loader for one ring of FPGAs.
//
// A tile of n_beats beats (W words each) is shared by the p FPGAs of a ring.
// It is split into p parts of ceil(n_beats/p) beats; the FPGA at position
// 'pos' loads only part 'pos' from its off-chip stream. Every beat it loads
// is written into its own buffer (port 0) and sent to the next FPGA of the
// ring. Every beat that arrives from the previous FPGA is written into the
// buffer (port 1) and, unless it has already travelled p-1 links, forwarded
// to the next FPGA. When all n_beats beats are stored, 'done' rises. For
// p = 2 this is exactly the paper's HLS loop: the first half comes from
// memory and is sent out, the second half comes from the link. For p = 1 it
// is a plain stream loader. With p > 2 the parts circulate around the ring,
// so each outgoing link carries (p-1)/p of the tile.
//
// Link beats carry a header (link_hdr_t): beat index, hop count and the
// parity of the tile. A beat whose tag differs from the current tile belongs
// to the next tile (the neighbour is ahead) and is held back with rx_ready
// low until this FPGA starts that tile. The outgoing link serves forwarded
// beats before local ones; a local beat is only taken from memory in a cycle
// in which it can also be sent. Handshakes are valid/ready: a transfer
// happens when both are high in a cycle. The split into parts and the ring
// forwarding follow the paper; the header and the arbitration are this
// design's own.
module xfer_loader
  import slp_pkg::*;
#(
  parameter int W    = 8,
  parameter int PMAX = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 tag,
  input  logic [CNTW-1:0]      n_beats,
  input  logic [PW-1:0]        p,
  input  logic [PW-1:0]        pos,
  output logic                 busy,
  output logic                 done,
  // off-chip memory stream
  input  logic                 mem_valid,
  output logic                 mem_ready,
  input  data_t [W-1:0]        mem_data,
  // link from the previous FPGA
  input  logic                 rx_valid,
  output logic                 rx_ready,
  input  link_hdr_t            rx_hdr,
  input  data_t [W-1:0]        rx_data,
  // link to the next FPGA
  output logic                 tx_valid,
  input  logic                 tx_ready,
  output link_hdr_t            tx_hdr,
  output data_t [W-1:0]        tx_data,
  // buffer write ports: 0 = local memory beat, 1 = link beat
  output logic [1:0]           wr_en,
  output logic [1:0][CNTW-1:0] wr_beat,
  output data_t [1:0][W-1:0]   wr_data
);

  logic            active, cur_tag, multi;
  logic [CNTW-1:0] hi, mem_ptr, rx_cnt, rx_need;
  logic [PW-1:0]   p_q;

  // part boundaries of this FPGA, computed at start
  logic [CNTW-1:0] part_len, lo_n, hi_n;
  always_comb begin
    part_len = (n_beats + CNTW'(p) - 1'b1) / CNTW'((p == 0) ? 1 : p);
    lo_n     = (CNTW+4)'(part_len) * (CNTW+4)'(pos) >= (CNTW+4)'(n_beats) ? n_beats
             : CNTW'(part_len * CNTW'(pos));
    hi_n     = (CNTW+4)'(lo_n) + (CNTW+4)'(part_len) >= (CNTW+4)'(n_beats) ? n_beats
             : lo_n + part_len;
  end

  wire mem_left = (mem_ptr != hi);
  wire rx_left  = (rx_cnt != rx_need);
  wire rx_mine  = rx_valid && (rx_hdr.tag == cur_tag);
  wire rx_fwd   = (32'(rx_hdr.hops) + 2 < 32'(p_q));

  // forwarded beats have priority on the outgoing link
  wire rx_go    = active && multi && rx_left && rx_mine && (!rx_fwd || tx_ready);
  wire tx_free  = !multi || (tx_ready && !(rx_left && rx_mine && rx_fwd));
  wire mem_go   = active && mem_left && mem_valid && tx_free;

  assign mem_ready = active && mem_left && tx_free;
  assign rx_ready  = rx_go;

  always_comb begin
    tx_valid = 1'b0;
    tx_hdr   = '0;
    tx_data  = mem_data;
    if (active && multi) begin
      if (rx_left && rx_mine && rx_fwd) begin
        tx_valid = 1'b1;
        tx_hdr   = '{tag: cur_tag, hops: rx_hdr.hops + 4'd1, beat: rx_hdr.beat};
        tx_data  = rx_data;
      end else if (mem_left && mem_valid) begin
        tx_valid = 1'b1;
        tx_hdr   = '{tag: cur_tag, hops: 4'd0, beat: mem_ptr};
        tx_data  = mem_data;
      end
    end
  end

  always_comb begin
    wr_en      = {rx_go && rx_valid, mem_go};
    wr_beat[0] = mem_ptr;
    wr_data[0] = mem_data;
    wr_beat[1] = rx_hdr.beat;
    wr_data[1] = rx_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; cur_tag <= 1'b0; multi <= 1'b0; hi <= '0;
      mem_ptr <= '0; rx_cnt <= '0; rx_need <= '0; p_q <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !active) begin
        active  <= 1'b1;
        cur_tag <= tag;
        multi   <= (p > 1);
        p_q     <= p;
        hi      <= hi_n;
        mem_ptr <= lo_n;
        rx_cnt  <= '0;
        rx_need <= (p > 1) ? n_beats - (hi_n - lo_n) : '0;
      end else if (active) begin
        if (mem_go) mem_ptr <= mem_ptr + 1'b1;
        if (rx_go && rx_valid) rx_cnt <= rx_cnt + 1'b1;
        if ((!mem_left || (mem_go && mem_ptr + 1'b1 == hi)) &&
            (!rx_left  || (rx_go && rx_valid && rx_cnt + 1'b1 == rx_need))) begin
          active <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  assign busy = active;

  initial assert (PMAX <= 16) else $error("xfer_loader: the hop count field holds rings of up to 16");

  // a beat sent on the link must stay stable until accepted
  property p_tx_stable;
    @(posedge clk) disable iff (!rst_n)
      tx_valid && !tx_ready && tx_hdr.hops == 4'd0 && mem_valid |=> tx_valid;
  endproperty
  a_tx_stable: assert property (p_tx_stable);

endmodule
