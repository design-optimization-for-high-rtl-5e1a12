// width_downsizer_tb: streams wide words through the downsizer.
//
// Sends NW random 512-bit words and checks that they come out as four
// 128-bit words each, low part first. Phase 1 keeps the output always
// ready and checks the rate: 4*NW narrow words in 4*NW cycles. Phase 2
// applies random back-pressure on both sides and checks order and content.
module width_downsizer_tb;
  localparam int IW = 512, OW = 128, R = IW / OW, NW = 32;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IW-1:0] in_data;
  logic [OW-1:0] out_data;
  int checks = 0, failures = 0;

  width_downsizer #(.IN_W(IW), .OUT_W(OW)) dut (.*);

  logic [IW-1:0] words [2*NW];
  int nsent = 0, nrecv = 0, cycle = 0, first_out = -1, last_out = -1;
  bit random_bp = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (out_data !== words[nrecv / R][(nrecv % R) * OW +: OW]) begin
        failures++; $display("beat %0d wrong", nrecv);
      end
      if (nrecv < R * NW) begin
        if (first_out < 0) first_out = cycle;
        last_out = cycle;
      end
      nrecv++;
    end
  end

  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) nsent++;
  end

  always @(negedge clk) begin
    out_ready = random_bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (nsent < (random_bp ? 2 * NW : NW) && !(random_bp && $urandom_range(0, 3) == 0)) begin
      in_valid = 1; in_data = words[nsent];
    end else in_valid = 0;
  end

  initial begin
    for (int w = 0; w < 2 * NW; w++)
      for (int k = 0; k < IW / 32; k++) words[w][k*32 +: 32] = $urandom;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nrecv == R * NW);
    checks++;
    if (last_out - first_out + 1 != R * NW) begin
      failures++; $display("rate: %0d beats took %0d cycles", R * NW, last_out - first_out + 1);
    end
    random_bp = 1;
    wait (nrecv == 2 * R * NW);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
