// local_memory_tb: writes and reads the scratchpad through its two ports.
//
// Runs at the full 48K x 512 size. Writes a pattern derived from the
// address to a spread of addresses (both ends included), reads them back
// with one cycle of latency while other writes go on in the same cycles,
// and checks that a same-cycle read of the address being written returns
// the old contents.
module local_memory_tb;
  localparam int DEPTH = 48 * 1024, W = 512, AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [AW-1:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  int checks = 0, failures = 0;

  local_memory #(.DEPTH(DEPTH), .WIDTH(W)) dut (.*);

  function automatic logic [W-1:0] pat(int a, int gen);
    logic [W-1:0] v;
    for (int k = 0; k < W / 32; k++) v[k*32 +: 32] = 32'(a * 32'h9E3779B1 + k * 7 + gen * 32'h1000_0000);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int addrs [64];
  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    addrs[0] = 0; addrs[1] = DEPTH - 1;
    for (int i = 2; i < 64; i++) addrs[i] = $urandom_range(0, DEPTH - 1);
    @(posedge clk);
    // write generation 0
    for (int i = 0; i < 64; i++) begin
      we <= 1; waddr <= AW'(addrs[i]); wdata <= pat(addrs[i], 0);
      @(posedge clk);
    end
    we <= 0;
    // read back while writing generation 1 to the same address in the same cycle
    for (int i = 0; i < 64; i++) begin
      re <= 1; raddr <= AW'(addrs[i]);
      we <= 1; waddr <= AW'(addrs[i]); wdata <= pat(addrs[i], 1);
      @(posedge clk);
      re <= 0; we <= 0;
      @(negedge clk);
      checks++;
      // the address may repeat later in the list; only the first visit sees gen 0
      begin
        automatic bit seen = 0;
        for (int j = 0; j < i; j++) if (addrs[j] == addrs[i]) seen = 1;
        if (rdata !== pat(addrs[i], seen ? 1 : 0)) begin failures++; $display("read-during-write at %0d wrong", addrs[i]); end
      end
      @(posedge clk);
    end
    // now everything holds generation 1
    for (int i = 0; i < 64; i++) begin
      re <= 1; raddr <= AW'(addrs[i]);
      @(posedge clk);
      re <= 0;
      @(negedge clk);
      checks++;
      if (rdata !== pat(addrs[i], 1)) begin failures++; $display("read at %0d wrong", addrs[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
