// tb_input_tile_buffer: fills both halves of a small banked buffer through
// its two beat write ports (beats in scrambled order, two per cycle), then
// reads every address of both halves and compares each bank's word with a
// reference built from the rule "word i of the tile -> bank i mod BANKS,
// address i div BANKS". The last beat runs past DEPTH; its extra words
// must be dropped. Read latency one cycle is checked implicitly.
module tb_input_tile_buffer;
  import slp_pkg::*;
  localparam int BANKS = 5, DEPTH = 7, W = 3;
  localparam int NWORDS = BANKS * DEPTH;                 // 35
  localparam int NBEATS = (NWORDS + W - 1) / W;          // 12 (last beat padded)

  logic clk = 0;
  always #5 clk = ~clk;
  logic wsel, rsel;
  logic [1:0] wr_en;
  logic [1:0][CNTW-1:0] wr_beat;
  data_t [1:0][W-1:0] wr_data;
  logic [$clog2(DEPTH)-1:0] raddr;
  data_t [BANKS-1:0] rdata;
  int checks = 0, failures = 0;

  input_tile_buffer #(.BANKS(BANKS), .DEPTH(DEPTH), .W(W)) dut (.*);

  data_t tile [2][NBEATS*W];
  int order [NBEATS];

  initial begin
    wr_en = '0; wr_beat = '0; wr_data = '0; wsel = 0; rsel = 0; raddr = '0;
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < NBEATS*W; i++) tile[h][i] = data_t'($urandom);
    for (int h = 0; h < 2; h++) begin
      // scrambled beat order, two beats per cycle
      for (int i = 0; i < NBEATS; i++) order[i] = i;
      for (int i = NBEATS - 1; i > 0; i--) begin
        int j, t; j = $urandom_range(0, i); t = order[i]; order[i] = order[j]; order[j] = t;
      end
      for (int i = 0; i < NBEATS; i += 2) begin
        @(negedge clk);
        wsel = h[0];
        for (int p = 0; p < 2; p++) begin
          wr_en[p] = (i + p < NBEATS);
          wr_beat[p] = CNTW'(order[(i + p < NBEATS) ? i + p : i]);
          for (int k = 0; k < W; k++) wr_data[p][k] = tile[h][wr_beat[p]*W + k];
        end
      end
      @(negedge clk); wr_en = '0;
    end
    for (int h = 0; h < 2; h++)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk); rsel = h[0]; raddr = a[$clog2(DEPTH)-1:0];
        @(negedge clk);
        for (int b = 0; b < BANKS; b++) begin
          checks++;
          if (rdata[b] !== tile[h][a*BANKS + b]) begin
            failures++;
            $display("half %0d bank %0d addr %0d: got %h expected %h", h, b, a, rdata[b], tile[h][a*BANKS+b]);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
