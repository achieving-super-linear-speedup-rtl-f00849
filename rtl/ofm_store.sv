// ofm_store: drains one half of the OFM buffer to the off-chip stream.
//
// After a start pulse the unit reads the OFM half 'sel' pixel by pixel
// (all Tm channels at once, one-cycle read latency) and sends each pixel as
// Tm/OP beats of OP words, channel innermost, so that the whole tile leaves
// in Tm*Tr*Tc/OP beats (the paper's tO_mem). Each 32-bit partial sum is
// shifted right arithmetically by 'frac' and saturated to 16 bits. The next
// pixel is addressed while the current one is sent and latched in one
// extra cycle, so with a stream that is always ready the unit needs
// Tr*Tc*(Tm/OP + 1) + 2 cycles.
// 'done' pulses after the last beat is accepted. The Op-wide output follows
// the paper; the word order and the fixed-point conversion are this
// design's choices.
module ofm_store
  import slp_pkg::*;
#(
  parameter int TM = 128,
  parameter int TR = 7,
  parameter int TC = 14,
  parameter int OP = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      sel,
  input  logic [4:0]                frac,
  output logic                      busy,
  output logic                      done,
  output logic                      ob_sel,
  output logic [$clog2(TR*TC)-1:0]  ob_raddr,
  input  acc_t [TM-1:0]             ob_rdata,
  output logic                      out_valid,
  input  logic                      out_ready,
  output data_t [OP-1:0]            out_data
);

  localparam int NPIX = TR * TC;
  localparam int NG   = TM / OP;          // beats per pixel
  localparam int OAW  = $clog2(NPIX);
  localparam int GW   = (NG > 1) ? $clog2(NG) : 1;

  initial assert (TM % OP == 0) else $error("ofm_store: TM must be a multiple of OP");

  typedef enum logic [1:0] {IDLE, READ, SEND} state_t;
  state_t         state;
  logic [OAW-1:0] pix;
  logic [GW-1:0]  grp;
  logic [4:0]     frac_q;
  acc_t [TM-1:0]  row;
  logic           row_valid;

  function automatic data_t sat16(acc_t v, logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(32767))       return data_t'(16'sh7fff);
    else if (s < acc_t'(-32768)) return data_t'(16'sh8000);
    else                         return data_t'(s[DW-1:0]);
  endfunction

  // while a pixel is being sent, the next one is already addressed
  assign ob_raddr = (state == SEND && row_valid) ? OAW'(pix + 1'b1) : pix;
  assign busy     = (state != IDLE);
  assign out_valid = (state == SEND) && row_valid;

  always_comb begin
    for (int j = 0; j < OP; j++)
      out_data[j] = sat16(row[32'(grp) * OP + j], frac_q);
  end

  wire beat_go   = out_valid && out_ready;
  wire last_grp  = (32'(grp) == NG - 1);
  wire last_pix  = (32'(pix) == NPIX - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; pix <= '0; grp <= '0; frac_q <= '0; row_valid <= 1'b0;
      row <= '0; done <= 1'b0; ob_sel <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (start) begin
          state <= READ; pix <= '0; grp <= '0; frac_q <= frac; ob_sel <= sel; row_valid <= 1'b0;
        end
        READ: begin                      // address 'pix' issued this cycle
          state <= SEND;
        end
        SEND: begin
          if (!row_valid) begin
            row <= ob_rdata; row_valid <= 1'b1;
          end else if (beat_go) begin
            if (!last_grp) grp <= grp + 1'b1;
            else begin
              grp <= '0;
              if (last_pix) begin
                state <= IDLE; done <= 1'b1; row_valid <= 1'b0;
              end else begin
                pix <= pix + 1'b1;
                row_valid <= 1'b0;        // next pixel data arrives next cycle
              end
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

endmodule
