// tb_async_fifo: checks that words cross from the write clock to an
// unrelated read clock in order and unchanged, that the FIFO reports full
// after 2**AW words when the reader stalls, and that it reports empty when
// drained. Write clock period 10 ns, read clock 8 ns.
module tb_async_fifo;
  localparam int WIDTH = 20;
  localparam int AW    = 3;
  localparam int NW    = 300;

  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic w_valid, w_ready, r_valid, r_ready;
  logic [WIDTH-1:0] w_data, r_data;
  int checks = 0, failures = 0;

  always #5 wclk = ~wclk;
  always #4 rclk = ~rclk;

  async_fifo #(.WIDTH(WIDTH), .AW(AW)) dut (.*);

  logic [WIDTH-1:0] sent [NW];
  int nsent = 0, nrecv = 0;
  bit stall_reader = 1;

  initial begin
    for (int i = 0; i < NW; i++) sent[i] = WIDTH'($urandom);
  end

  // writer
  initial begin
    w_valid = 0; w_data = '0;
    repeat (3) @(posedge wclk);
    wrst_n = 1;
    @(posedge wclk);
    while (nsent < NW) begin
      w_valid <= ($urandom_range(0, 3) != 0);
      w_data  <= sent[nsent];
      @(posedge wclk);
      if (w_valid && w_ready) nsent++;
    end
    w_valid <= 0;
  end

  // reader
  initial begin
    r_ready = 0;
    repeat (3) @(posedge rclk);
    rrst_n = 1;
    // hold the reader until the writer sees a full FIFO
    wait (stall_reader == 0);
    while (nrecv < NW) begin
      @(posedge rclk);
      if (r_valid && r_ready) begin
        checks++;
        if (r_data !== sent[nrecv]) begin
          failures++;
          $display("mismatch at %0d: got %h expected %h", nrecv, r_data, sent[nrecv]);
        end
        nrecv++;
      end
      r_ready <= ($urandom_range(0, 2) != 0);
    end
  end

  // full check
  initial begin
    wait (wrst_n);
    repeat (60) @(posedge wclk);
    checks++;
    if (w_ready !== 1'b0 || nsent != (1 << AW)) begin
      failures++;
      $display("expected full after %0d words, w_ready=%0b nsent=%0d", 1 << AW, w_ready, nsent);
    end
    stall_reader = 0;
  end

  initial begin
    wait (nrecv == NW);
    repeat (10) @(posedge rclk);
    checks++;
    if (r_valid !== 1'b0) begin failures++; $display("not empty at the end"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
