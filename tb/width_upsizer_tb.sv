// width_upsizer_tb: streams narrow words through the upsizer.
//
// Sends 4*NW random 128-bit words and checks that every four of them come
// out as one 512-bit word with the first in the low bits. Phase 1 keeps
// both sides free-running and checks the rate: NW wide words from 4*NW
// input cycles, one accepted narrow word per cycle. Phase 2 applies random
// back-pressure and gaps.
module width_upsizer_tb;
  localparam int IW = 128, OW = 512, R = OW / IW, NW = 32;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [IW-1:0] in_data;
  logic [OW-1:0] out_data;
  int checks = 0, failures = 0;

  width_upsizer #(.IN_W(IW), .OUT_W(OW)) dut (.*);

  logic [IW-1:0] beats [2*R*NW];
  int nsent = 0, nrecv = 0, cycle = 0, first_in = -1, last_in = -1;
  bit random_bp = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (rst_n && in_valid && in_ready) begin
      if (nsent < R * NW) begin
        if (first_in < 0) first_in = cycle;
        last_in = cycle;
      end
      nsent++;
    end
    if (rst_n && out_valid && out_ready) begin
      for (int k = 0; k < R; k++) begin
        checks++;
        if (out_data[k*IW +: IW] !== beats[nrecv * R + k]) begin
          failures++; $display("word %0d part %0d wrong", nrecv, k);
        end
      end
      nrecv++;
    end
  end

  always @(negedge clk) begin
    out_ready = random_bp ? ($urandom_range(0, 2) != 0) : 1'b1;
    if (nsent < (random_bp ? 2 * R * NW : R * NW) && !(random_bp && $urandom_range(0, 3) == 0)) begin
      in_valid = 1; in_data = beats[nsent];
    end else in_valid = 0;
  end

  initial begin
    for (int b = 0; b < 2 * R * NW; b++)
      for (int k = 0; k < IW / 32; k++) beats[b][k*32 +: 32] = $urandom;
    in_valid = 0; out_ready = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (nrecv == NW);
    checks++;
    if (last_in - first_in + 1 != R * NW) begin
      failures++; $display("rate: %0d beats took %0d cycles", R * NW, last_in - first_in + 1);
    end
    random_bp = 1;
    wait (nrecv == 2 * NW);
    repeat (5) @(posedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
