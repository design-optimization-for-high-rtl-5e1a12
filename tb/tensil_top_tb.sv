// tensil_top_tb: end-to-end run of the accelerator at its full size.
//
// No parameter of the top is changed: 32x32 array, 48K-vector local
// memory, 20K-vector accumulators, 128-bit DRAM ports. The accelerator
// clock is 100 MHz and the processing-system clock 333 MHz. Two DRAM models
// that refuse handshakes at random sit on the DRAM0 and DRAM1 ports; the
// instruction words are pushed in back to back on the 333 MHz side, so the
// instruction FIFO fills and holds the sender back.
//
// The program is two layers in the order load weights, load activations,
// compute, save, with a second accumulating pass and the accumulator to
// local path, as the compiler would schedule them. The end state of both
// DRAMs and of the local memory regions used is compared with the software
// model in tcu_ref_pkg. Each mechanism must have happened at least once:
// instruction back-pressure across the clock crossing, DRAM stalls, reads
// and writes on both DRAM ports, weight loads, overwriting and
// accumulating matrix multiplies, accumulator-to-local moves.
module tensil_top_tb;
  import tcu_pkg::*;
  import tcu_ref_pkg::*;
  localparam int N = ARRAY_SIZE, VW = N * 16, AXW = AXI_W, DD = 1024;
  logic clk = 0, clk_axi = 0, rst_n = 1, rst_axi_n = 1;
  initial begin #1 rst_n = 0; rst_axi_n = 0; end
  always #5   clk = ~clk;
  always #1.5 clk_axi = ~clk_axi;
  int checks = 0, failures = 0;

  logic instr_tvalid, instr_tready;
  logic [63:0] instr_tdata;
  logic axi_arvalid [2], axi_arready [2], axi_awvalid [2], axi_awready [2];
  logic axi_wvalid [2], axi_wready [2], axi_rvalid [2], axi_rready [2];
  logic [31:0] axi_araddr [2], axi_awaddr [2];
  logic [19:0] axi_arbeats [2], axi_awbeats [2];
  logic [AXW-1:0] axi_wdata [2], axi_rdata [2];
  logic busy;
  logic [31:0] instr_count, stall_cycles;

  tensil_top dut (.*);

  for (genvar p = 0; p < 2; p++) begin : g_mem
    axi_dram_model #(.W(AXW), .WORDS(DD * VW / AXW), .STALL(4)) u_mem (
      .clk(clk_axi), .rst_n(rst_axi_n),
      .arvalid(axi_arvalid[p]), .arready(axi_arready[p]), .araddr(axi_araddr[p]), .arbeats(axi_arbeats[p]),
      .awvalid(axi_awvalid[p]), .awready(axi_awready[p]), .awaddr(axi_awaddr[p]), .awbeats(axi_awbeats[p]),
      .wvalid(axi_wvalid[p]), .wready(axi_wready[p]), .wdata(axi_wdata[p]),
      .rvalid(axi_rvalid[p]), .rready(axi_rready[p]), .rdata(axi_rdata[p])
    );
  end

  tcu_model #(N) m;
  logic [63:0] prog [$];
  int instr_backpressure = 0;

  function automatic logic [VW-1:0] pack(tcu_model#(N)::vec_t v);
    logic [VW-1:0] r;
    for (int l = 0; l < N; l++) r[l*16 +: 16] = v[l];
    return r;
  endfunction

  function automatic logic [VW-1:0] dram_vec(int p, int a);
    logic [VW-1:0] r;
    for (int k = 0; k < VW / AXW; k++)
      r[k*AXW +: AXW] = (p == 0) ? g_mem[0].u_mem.mem[a * (VW / AXW) + k] : g_mem[1].u_mem.mem[a * (VW / AXW) + k];
    return r;
  endfunction

  initial begin
    #5ms;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk_axi) if (rst_axi_n && instr_tvalid && !instr_tready) instr_backpressure++;

  // two layers, activations M vectors each; weights of layer L at DRAM0 L*N
  localparam int M = 48;
  initial begin
    m = new(LOCAL_DEPTH, ACC_DEPTH, DD);
    instr_tvalid = 0; instr_tdata = '0;
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < DD; a++) begin
        logic [VW-1:0] v;
        for (int l = 0; l < N; l++) m.dram[p][a][l] = 16'($signed(int'($urandom_range(0, 511)) - 256));
        v = pack(m.dram[p][a]);
        for (int k = 0; k < VW / AXW; k++)
          if (p == 0) g_mem[0].u_mem.mem[a * (VW / AXW) + k] = v[k*AXW +: AXW];
          else        g_mem[1].u_mem.mem[a * (VW / AXW) + k] = v[k*AXW +: AXW];
      end
    // layer 1: input image from DRAM1, weights from DRAM0
    prog.push_back(mk(OP_DATAMOVE, DM_DRAM0_TO_LOCAL, N, 0, 0));          // load weights (consts)
    prog.push_back(mk(OP_DATAMOVE, DM_DRAM1_TO_LOCAL, M, 1000, 0));       // load image (vars)
    prog.push_back(mk(OP_LOADWEIGHTS, 4'h0, N, 0, 0));
    prog.push_back(mk(OP_MATMUL, 4'h0, M, 1000, 0));                      // compute
    prog.push_back(mk(OP_MATMUL, 4'h1, M, 1000, 0));                      // second pass, accumulate
    prog.push_back(mk(OP_DATAMOVE, DM_ACC_TO_LOCAL, M, 2000, 0));         // result stays local
    // layer 2: weights from DRAM0, input is layer 1's output in local memory
    prog.push_back(mk(OP_DATAMOVE, DM_DRAM0_TO_LOCAL, N, 40000, N));
    prog.push_back(mk(OP_LOADWEIGHTS, 4'h0, N, 40000, 0));
    prog.push_back(mk(OP_MATMUL, 4'h0, M, 2000, 20000));
    prog.push_back(mk(OP_DATAMOVE, DM_LOCAL_ADD_ACC, M, 1000, 20000));    // residual add
    prog.push_back(mk(OP_DATAMOVE, DM_ACC_TO_LOCAL, M, 49000, 20000));
    prog.push_back(mk(OP_DATAMOVE, DM_LOCAL_TO_DRAM1, M, 49000, 500));   // save predictions
    prog.push_back(mk(OP_DATAMOVE, DM_LOCAL_TO_DRAM0, M, 2000, 700));    // save layer-1 activations
    for (int i = 0; i < 12; i++) prog.push_back(mk(OP_NOP, 4'h0, 1, 0, 0));
    foreach (prog[i]) m.exec(prog[i]);

    repeat (4) @(posedge clk);
    rst_n = 1; rst_axi_n = 1;
    repeat (4) @(posedge clk);
    // stream the program in on the 333 MHz side
    foreach (prog[i]) begin
      @(negedge clk_axi);
      instr_tvalid = 1; instr_tdata = prog[i];
      do @(posedge clk_axi); while (!instr_tready);
    end
    @(negedge clk_axi); instr_tvalid = 0;
    wait (instr_count == 32'(prog.size()));
    @(posedge clk);
    while (busy) @(posedge clk);
    repeat (300) @(posedge clk);     // let the last DRAM writes drain on the narrow side

    for (int p = 0; p < 2; p++)
      for (int a = 0; a < DD; a++) begin
        checks++;
        if (dram_vec(p, a) !== pack(m.dram[p][a])) begin
          failures++; if (failures < 6) $display("DRAM%0d[%0d] differs", p, a);
        end
      end
    foreach (m.lmem[a])
      if (a < N || (a >= 1000 && a < 1000 + M) || (a >= 2000 && a < 2000 + M) ||
          (a >= 40000 && a < 40000 + N) || (a >= 49000 && a < 49000 + M)) begin
        checks++;
        if (dut.u_local.mem[a] !== pack(m.lmem[a])) begin
          failures++; if (failures < 6) $display("local[%0d] differs", a);
        end
      end

    // every mechanism must have happened
    checks++; if (instr_backpressure == 0) begin failures++; $display("no instruction back-pressure"); end
    checks++; if (stall_cycles == 0) begin failures++; $display("no DRAM stall"); end
    checks++; if (m.n_dram_rd < 2 || m.n_dram_wr < 2) begin failures++; $display("DRAM moves missing"); end
    checks++; if (g_mem[0].u_mem.reads_done == 0 || g_mem[1].u_mem.reads_done == 0 ||
                  g_mem[0].u_mem.writes_done == 0 || g_mem[1].u_mem.writes_done == 0) begin
                failures++; $display("a DRAM port was not used in both directions"); end
    checks++; if (m.n_loadw == 0 || m.n_matmul == 0 || m.n_accumulate < 2 || m.n_acc_local == 0) begin
                failures++; $display("a compute mechanism did not happen"); end
    $display("instruction back-pressure cycles %0d, DRAM stall cycles %0d, DRAM reads %0d writes %0d",
             instr_backpressure, stall_cycles, m.n_dram_rd, m.n_dram_wr);
    $display("weight loads %0d, matmuls %0d, accumulations %0d, acc->local %0d, finished at %0t",
             m.n_loadw, m.n_matmul, m.n_accumulate, m.n_acc_local, $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
