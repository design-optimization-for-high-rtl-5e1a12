// accumulators_tb: random mix of write, accumulate and read requests.
//
// Runs at the full 20K x 32 x 16-bit size. Issues one random request per
// cycle, confined to a few addresses so that back-to-back accumulations
// into the same address (the forwarding path) happen often, and keeps a
// software copy of the memory with saturating lane-wise addition. Every
// read is checked against that copy one cycle after it was issued.
module accumulators_tb;
  localparam int DEPTH = 20 * 1024, N = 32, DW = 16, W = N * DW, AW = $clog2(DEPTH), NREQ = 3000;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  logic req_valid, req_write, req_acc, rvalid;
  logic [AW-1:0] req_addr;
  logic [W-1:0] req_wdata, rdata;
  int checks = 0, failures = 0;

  accumulators #(.DEPTH(DEPTH), .N(N), .DATA_W(DW)) dut (.*);

  logic [W-1:0] model [8];
  logic [AW-1:0] amap [8];
  int n_fwd = 0, n_sat = 0, n_acc = 0;

  function automatic logic [W-1:0] add_sat(logic [W-1:0] a, logic [W-1:0] b, ref int nsat);
    logic [W-1:0] r;
    for (int l = 0; l < N; l++) begin
      automatic int s = int'($signed(a[l*DW +: DW])) + int'($signed(b[l*DW +: DW]));
      if (s > 32767) begin s = 32767; nsat++; end
      if (s < -32768) begin s = -32768; nsat++; end
      r[l*DW +: DW] = DW'(s);
    end
    return r;
  endfunction

  initial begin
    repeat (NREQ + 1000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic          exp_valid;
  logic [W-1:0]  exp_data;
  int prev_slot = -1;

  initial begin
    amap[0] = 0; amap[1] = AW'(DEPTH - 1);
    for (int i = 2; i < 8; i++) amap[i] = AW'($urandom_range(1, DEPTH - 2));
    req_valid = 0; req_write = 0; req_acc = 0; req_addr = '0; req_wdata = '0; exp_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // initialise all eight slots
    for (int i = 0; i < 8; i++) begin
      @(negedge clk);
      req_valid = 1; req_write = 1; req_acc = 0; req_addr = amap[i];
      for (int k = 0; k < W / 32; k++) req_wdata[k*32 +: 32] = $urandom;
      model[i] = req_wdata;
    end
    for (int n = 0; n < NREQ; n++) begin
      automatic int slot = $urandom_range(0, 7);
      automatic int kind = $urandom_range(0, 9);
      @(negedge clk);
      // check the read issued in the previous cycle
      if (exp_valid) begin
        checks++;
        if (!rvalid || rdata !== exp_data) begin failures++; if (failures < 5) $display("read mismatch at request %0d", n); end
      end
      exp_valid = 0;
      if (kind < 2) slot = (prev_slot < 0) ? slot : prev_slot;  // same address again
      req_valid = ($urandom_range(0, 7) != 0);
      req_addr  = amap[slot];
      for (int k = 0; k < W / 32; k++) req_wdata[k*32 +: 32] = $urandom;
      if (kind < 6) begin req_write = 1; req_acc = 1; end
      else if (kind < 7) begin req_write = 1; req_acc = 0; end
      else begin req_write = 0; req_acc = 0; end
      if (req_valid) begin
        if (req_write && req_acc) begin
          if (slot == prev_slot) n_fwd++;
          n_acc++;
          model[slot] = add_sat(model[slot], req_wdata, n_sat);
        end else if (req_write) model[slot] = req_wdata;
        else begin exp_valid = 1; exp_data = model[slot]; end
        prev_slot = slot;
      end else prev_slot = -1;
    end
    @(negedge clk);
    if (exp_valid) begin
      checks++;
      if (!rvalid || rdata !== exp_data) failures++;
    end
    req_valid = 0;
    // final read of every slot
    for (int i = 0; i < 8; i++) begin
      @(negedge clk); req_valid = 1; req_write = 0; req_addr = amap[i];
      @(negedge clk); req_valid = 0;
      checks++;
      if (!rvalid || rdata !== model[i]) begin failures++; $display("final slot %0d wrong", i); end
    end
    checks++;
    if (n_fwd == 0 || n_sat == 0) begin failures++; $display("forwarding or saturation never exercised"); end
    $display("accumulations %0d, back-to-back same address %0d, saturated lanes %0d", n_acc, n_fwd, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
