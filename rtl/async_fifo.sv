// async_fifo: dual-clock FIFO between the accelerator clock and the
// inter-FPGA link clock.
//
// 2**AW entries of WIDTH bits. The write side (w_valid/w_ready) and the read
// side (r_valid/r_ready) each use a valid/ready handshake in their own clock.
// Read and write pointers are kept in binary and in Gray code; each Gray
// pointer crosses to the other clock through two flip-flops, so 'full' and
// 'empty' are conservative: a word becomes visible to the reader two or
// three read-clock cycles after it is written. The read data are the entry
// at the read pointer (first-word fall-through). The paper only states that
// asynchronous FIFOs join the two clock domains; the Gray-pointer structure
// and the depth are this design's choices.
module async_fifo #(
  parameter int WIDTH = 149,
  parameter int AW    = 4
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             w_valid,
  output logic             w_ready,
  input  logic [WIDTH-1:0] w_data,
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             r_valid,
  input  logic             r_ready,
  output logic [WIDTH-1:0] r_data
);

  logic [WIDTH-1:0] mem [2**AW];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in the write clock
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in the read clock

  function automatic logic [AW:0] bin2gray(logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write clock ----------------
  wire [AW:0] wbin_nxt = wbin + 1'b1;
  assign w_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  wire w_go = w_valid && w_ready;

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (w_go) begin
        wbin  <= wbin_nxt;
        wgray <= bin2gray(wbin_nxt);
      end
    end
  end

  always_ff @(posedge wclk) begin
    if (w_go) mem[wbin[AW-1:0]] <= w_data;
  end

  // ---------------- read clock ----------------
  wire [AW:0] rbin_nxt = rbin + 1'b1;
  assign r_valid = (rgray != wgray_r2);
  assign r_data  = mem[rbin[AW-1:0]];
  wire r_go = r_valid && r_ready;

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (r_go) begin
        rbin  <= rbin_nxt;
        rgray <= bin2gray(rbin_nxt);
      end
    end
  end

endmodule
