// dram_port_bridge_tb: moves vectors through the bridge in both directions.
//
// Accelerator clock 10 ns (100 MHz), processing-system clock 2.5 ns
// (400 MHz, the four-to-one case). A DRAM model sits on the narrow side.
//   1. write NV vectors at a vector address, check the model holds each one
//      as four 128-bit words at byte address x 64, low part first;
//   2. read them back and compare;
//   3. check the rate: with the narrow clock four times faster and no
//      back-pressure, the read stream delivers one vector per accelerator
//      cycle once it is flowing (NV vectors in at most NV + 12 cycles);
//   4. repeat both directions with a DRAM that stalls at random.
module dram_port_bridge_tb;
  localparam int VW = 512, AW_ = 128, NV = 64, BASE = 100;
  logic clk_t = 0, clk_a = 0, rst_t_n = 1, rst_a_n = 1;
  initial begin #1 rst_t_n = 0; rst_a_n = 0; end
  always #5    clk_t = ~clk_t;
  always #1.25 clk_a = ~clk_a;

  logic req_valid, req_ready, wvalid, wready, rvalid, rready;
  tcu_pkg::dram_req_t req;
  logic [VW-1:0] wdata, rdata;
  logic axi_arvalid [2], axi_arready [2], axi_awvalid [2], axi_awready [2];
  logic axi_wvalid [2], axi_wready [2], axi_rvalid [2], axi_rready [2];
  logic [31:0] axi_araddr [2], axi_awaddr [2];
  logic [19:0] axi_arbeats [2], axi_awbeats [2];
  logic [AW_-1:0] axi_wdata [2], axi_rdata [2];
  int checks = 0, failures = 0;
  bit sel = 0;   // 0: fast DRAM, 1: stalling DRAM

  dram_port_bridge #(.VEC_W(VW), .AXI_W(AW_)) dut (
    .clk_t, .rst_t_n, .req_valid, .req_ready, .req, .wvalid, .wready, .wdata,
    .rvalid, .rready, .rdata, .clk_a, .rst_a_n,
    .axi_arvalid(axi_arvalid[0]), .axi_arready(sel ? axi_arready[1] : axi_arready[0]),
    .axi_araddr(axi_araddr[0]), .axi_arbeats(axi_arbeats[0]),
    .axi_awvalid(axi_awvalid[0]), .axi_awready(sel ? axi_awready[1] : axi_awready[0]),
    .axi_awaddr(axi_awaddr[0]), .axi_awbeats(axi_awbeats[0]),
    .axi_wvalid(axi_wvalid[0]), .axi_wready(sel ? axi_wready[1] : axi_wready[0]), .axi_wdata(axi_wdata[0]),
    .axi_rvalid(sel ? axi_rvalid[1] : axi_rvalid[0]), .axi_rready(axi_rready[0]),
    .axi_rdata(sel ? axi_rdata[1] : axi_rdata[0])
  );

  for (genvar m = 0; m < 2; m++) begin : g_mem
    axi_dram_model #(.W(AW_), .WORDS(1024), .STALL(m == 0 ? 0 : 3)) u_mem (
      .clk(clk_a), .rst_n(rst_a_n),
      .arvalid(axi_arvalid[0] && (sel == m)), .arready(axi_arready[m]), .araddr(axi_araddr[0]), .arbeats(axi_arbeats[0]),
      .awvalid(axi_awvalid[0] && (sel == m)), .awready(axi_awready[m]), .awaddr(axi_awaddr[0]), .awbeats(axi_awbeats[0]),
      .wvalid(axi_wvalid[0] && (sel == m)), .wready(axi_wready[m]), .wdata(axi_wdata[0]),
      .rvalid(axi_rvalid[m]), .rready(axi_rready[0] && (sel == m)), .rdata(axi_rdata[m])
    );
  end

  logic [VW-1:0] vecs [NV];

  initial begin
    #200us;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic send_req(bit wr, int addr, int len);
    @(negedge clk_t);
    req_valid = 1; req.write = wr; req.addr = 24'(addr); req.len = 17'(len);
    do @(posedge clk_t); while (!req_ready);
    @(negedge clk_t); req_valid = 0;
  endtask

  task automatic run_pass(int p);
    int first = -1, last = -1, n = 0, cyc = 0;
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < VW / 32; k++) vecs[v][k*32 +: 32] = $urandom;
    // write
    send_req(1, BASE, NV);
    for (int v = 0; v < NV; v++) begin
      @(negedge clk_t); wvalid = 1; wdata = vecs[v];
      do @(posedge clk_t); while (!wready);
    end
    @(negedge clk_t); wvalid = 0;
    // wait for the DRAM to have taken every beat
    repeat (200) @(posedge clk_t);
    for (int v = 0; v < NV; v++)
      for (int k = 0; k < 4; k++) begin
        checks++;
        if ((p == 0 ? g_mem[0].u_mem.mem[(BASE + v) * 4 + k] : g_mem[1].u_mem.mem[(BASE + v) * 4 + k])
            !== vecs[v][k*128 +: 128]) begin
          failures++; if (failures < 5) $display("pass %0d: DRAM word %0d.%0d wrong", p, v, k);
        end
      end
    // read back
    send_req(0, BASE, NV);
    rready = 1;
    while (n < NV) begin
      @(posedge clk_t);
      cyc++;
      if (rvalid) begin
        checks++;
        if (rdata !== vecs[n]) begin failures++; if (failures < 5) $display("pass %0d: read vector %0d wrong", p, n); end
        if (first < 0) first = cyc;
        last = cyc;
        n++;
      end
    end
    @(negedge clk_t); rready = 0;
    if (p == 0) begin
      checks++;
      $display("read stream: %0d vectors in %0d accelerator cycles", NV, last - first + 1);
      if (last - first + 1 > NV + 12) begin failures++; $display("rate too low"); end
    end
  endtask

  initial begin
    req_valid = 0; req = '0; wvalid = 0; wdata = '0; rready = 0;
    #23; rst_t_n = 1; rst_a_n = 1;
    // checks on the narrow-side command translation
    fork
      send_req(0, 3, 5);
      begin
        @(posedge clk_a iff axi_arvalid[0]);
        checks++;
        if (axi_araddr[0] !== 32'd192 || axi_arbeats[0] !== 20'd20) begin
          failures++; $display("AR: addr %0d beats %0d", axi_araddr[0], axi_arbeats[0]);
        end
      end
    join
    rready = 1;
    repeat (50) @(posedge clk_t);   // drain the 5 vectors of that read
    rready = 0;
    run_pass(0);
    sel = 1;
    run_pass(1);
    checks++;
    if (g_mem[1].u_mem.stalls == 0) begin failures++; $display("no DRAM stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
