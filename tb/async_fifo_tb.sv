// async_fifo_tb: moves words between two unrelated clocks.
//
// Write clock 10 ns, read clock 3 ns (100 MHz into 333 MHz), then the
// reverse direction of speed by stalling the reader. Random gaps on the
// writer and random stalls on the reader. Every word must arrive once, in
// order; the FIFO must report full at least once (reader stalled) and
// must never accept a word while full.
module async_fifo_tb;
  localparam int W = 32, D = 8, NWORDS = 400;
  logic wclk = 0, rclk = 0, wrst_n = 1, rrst_n = 1;
  initial begin #1 wrst_n = 0; rrst_n = 0; end
  always #5 wclk = ~wclk;
  always #1.5 rclk = ~rclk;
  logic wvalid, wready, rvalid, rready;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  async_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int nsent = 0, nrecv = 0, full_seen = 0, occupancy = 0;
  bit slow_reader = 0;

  initial begin
    #100us;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge wclk) if (wrst_n) begin
    if (wvalid && wready) nsent++;
    if (wvalid && !wready) full_seen++;
  end
  always @(negedge wclk) begin
    wvalid = (nsent < NWORDS) && ($urandom_range(0, 4) != 0);
    wdata  = 32'hA5000000 + nsent;
  end

  always @(posedge rclk) if (rrst_n && rvalid && rready) begin
    checks++;
    if (rdata !== 32'hA5000000 + nrecv) begin
      failures++; $display("word %0d: got %h", nrecv, rdata);
    end
    nrecv++;
  end
  always @(negedge rclk) rready = slow_reader ? ($urandom_range(0, 15) == 0) : ($urandom_range(0, 3) != 0);

  // the writer may never be more than D words ahead of the reader
  always @(posedge wclk) if (wrst_n) begin
    checks++;
    if (nsent - nrecv > D) begin failures++; $display("overfill: %0d words held", nsent - nrecv); end
  end

  initial begin
    wvalid = 0; rready = 0; wdata = '0;
    #33; wrst_n = 1; rrst_n = 1;
    wait (nsent >= NWORDS / 2);
    slow_reader = 1;
    wait (nsent == NWORDS);
    slow_reader = 0;
    wait (nrecv == NWORDS);
    #200;
    checks++;
    if (rvalid) begin failures++; $display("FIFO not empty at end"); end
    checks++;
    if (full_seen == 0) begin failures++; $display("FIFO never filled"); end
    $display("full stalls seen: %0d", full_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
