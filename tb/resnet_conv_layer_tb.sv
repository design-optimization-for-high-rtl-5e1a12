// resnet_conv_layer_tb: ResNet20 convolution layers on the full-size top.
//
// Runs two 3x3 convolutions (stride 1, zero padding 1) of ResNet20 on a
// CIFAR-10-sized input, one after the other:
//   stage 1: 32x32 pixels, 16 -> 16 channels (one 32-lane block, half used)
//   stage 3:  8x8 pixels, 64 -> 64 channels (two input and two output
//            blocks of 32 channels)
// Channel block b of pixel (r,c) of the padded input is one vector, stored
// block-major so that the pixels one kernel tap sees for one output row form
// a contiguous run. The weights hold one 32x32 block per (tap, input block,
// output block), with rows = input channel and columns = output channel.
//
// The program is what a compiler would emit when the layer fits on chip.
// It loads the input and weights once. Then, for each output block, tap and
// input block, it issues LOADWEIGHTS and one MATMUL per output row. The first
// MATMUL of an output block overwrites the accumulators and all later ones
// add. At the end the accumulators move to local memory and then to DRAM1.
//
// The reference is computed here directly from the convolution formula,
// in the same order and with the hardware's arithmetic. Every 32-channel
// dot product is shifted right by 8 and saturated, then added with
// saturation. Every output lane is checked, and each layer's cycle count
// is reported and bounded.
module resnet_conv_layer_tb;
  import tcu_pkg::*;
  import tcu_ref_pkg::mk;
  localparam int N = ARRAY_SIZE, VW = N * 16, AXW = AXI_W, R = VW / AXW, DD = 4096;
  localparam int IN_DRAM = 0, W_DRAM = 0, OUT_DRAM = 2000;
  localparam int IN_LOCAL = 0, W_LOCAL = 2000, OUT_LOCAL = 4000;
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
    axi_dram_model #(.W(AXW), .WORDS(DD * R), .STALL(0)) u_mem (
      .clk(clk_axi), .rst_n(rst_axi_n),
      .arvalid(axi_arvalid[p]), .arready(axi_arready[p]), .araddr(axi_araddr[p]), .arbeats(axi_arbeats[p]),
      .awvalid(axi_awvalid[p]), .awready(axi_awready[p]), .awaddr(axi_awaddr[p]), .awbeats(axi_awbeats[p]),
      .wvalid(axi_wvalid[p]), .wready(axi_wready[p]), .wdata(axi_wdata[p]),
      .rvalid(axi_rvalid[p]), .rready(axi_rready[p]), .rdata(axi_rdata[p])
    );
  end

  int total_instr = 0;

  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  task automatic put_vec(int p, int a, logic [VW-1:0] v);
    for (int k = 0; k < R; k++)
      if (p == 0) g_mem[0].u_mem.mem[a * R + k] = v[k*AXW +: AXW];
      else        g_mem[1].u_mem.mem[a * R + k] = v[k*AXW +: AXW];
  endtask

  function automatic logic [VW-1:0] get_vec(int p, int a);
    logic [VW-1:0] v;
    for (int k = 0; k < R; k++)
      v[k*AXW +: AXW] = (p == 0) ? g_mem[0].u_mem.mem[a * R + k] : g_mem[1].u_mem.mem[a * R + k];
    return v;
  endfunction

  // One layer: H x H output pixels, CIN -> COUT channels.
  task automatic run_layer(string name, int H, int CIN, int COUT);
    int P = H + 2;
    int BI = (CIN + N - 1) / N, BO = (COUT + N - 1) / N;
    logic signed [15:0] img [];      // [(r*P + c)*CIN + ch], padded
    logic signed [15:0] wt  [];      // [(t*CIN + i)*COUT + o]
    logic signed [15:0] ref_out [];  // [(y*H + x)*COUT + o]
    logic [63:0] prog [$];
    longint t_start, t_end;
    int cycles, bound, n_mm = 0;

    img = new[P * P * CIN];
    wt = new[9 * CIN * COUT];
    ref_out = new[H * H * COUT];
    for (int r = 0; r < P; r++)
      for (int c = 0; c < P; c++)
        for (int ch = 0; ch < CIN; ch++)
          img[(r * P + c) * CIN + ch] = (r == 0 || c == 0 || r == P - 1 || c == P - 1) ? 16'sd0
                                        : 16'($signed(int'($urandom_range(0, 255)) - 128));
    foreach (wt[k]) wt[k] = 16'($signed(int'($urandom_range(0, 127)) - 64));

    // DRAM images of input and weights
    for (int b = 0; b < BI; b++)
      for (int r = 0; r < P; r++)
        for (int c = 0; c < P; c++) begin
          automatic logic [VW-1:0] v = '0;
          for (int l = 0; l < N; l++)
            if (b * N + l < CIN) v[l*16 +: 16] = img[(r * P + c) * CIN + b * N + l];
          put_vec(1, IN_DRAM + b * P * P + r * P + c, v);
        end
    for (int t = 0; t < 9; t++)
      for (int bi = 0; bi < BI; bi++)
        for (int bo = 0; bo < BO; bo++)
          for (int row = 0; row < N; row++) begin
            automatic logic [VW-1:0] v = '0;
            automatic int i = bi * N + row;
            for (int l = 0; l < N; l++)
              if (i < CIN && bo * N + l < COUT) v[l*16 +: 16] = wt[(t * CIN + i) * COUT + bo * N + l];
            put_vec(0, W_DRAM + ((t * BI + bi) * BO + bo) * N + row, v);
          end

    // reference, in the program's order: tap outer, input block inner
    for (int y = 0; y < H; y++)
      for (int x = 0; x < H; x++)
        for (int o = 0; o < COUT; o++) begin
          automatic logic signed [15:0] acc = 0;
          for (int t = 0; t < 9; t++)
            for (int bi = 0; bi < BI; bi++) begin
              automatic longint s = 0;
              for (int i = bi * N; i < bi * N + N && i < CIN; i++)
                s += longint'(img[((y + t / 3) * P + x + t % 3) * CIN + i]) *
                     longint'(wt[(t * CIN + i) * COUT + o]);
              acc = (t == 0 && bi == 0) ? sat(s >>> FRAC_W)
                                        : sat(longint'(acc) + longint'(sat(s >>> FRAC_W)));
            end
          ref_out[(y * H + x) * COUT + o] = acc;
        end

    // program
    prog.push_back(mk(OP_DATAMOVE, DM_DRAM1_TO_LOCAL, BI * P * P, IN_LOCAL, IN_DRAM));
    prog.push_back(mk(OP_DATAMOVE, DM_DRAM0_TO_LOCAL, 9 * BI * BO * N, W_LOCAL, W_DRAM));
    for (int bo = 0; bo < BO; bo++)
      for (int t = 0; t < 9; t++)
        for (int bi = 0; bi < BI; bi++) begin
          prog.push_back(mk(OP_LOADWEIGHTS, 4'h0, N, W_LOCAL + ((t * BI + bi) * BO + bo) * N, 0));
          for (int y = 0; y < H; y++) begin
            prog.push_back(mk(OP_MATMUL, (t == 0 && bi == 0) ? 4'h0 : 4'h1, H,
                              IN_LOCAL + bi * P * P + (y + t / 3) * P + t % 3, bo * H * H + y * H));
            n_mm++;
          end
        end
    prog.push_back(mk(OP_DATAMOVE, DM_ACC_TO_LOCAL, BO * H * H, OUT_LOCAL, 0));
    prog.push_back(mk(OP_DATAMOVE, DM_LOCAL_TO_DRAM1, BO * H * H, OUT_LOCAL, OUT_DRAM));
    total_instr += prog.size();

    t_start = $time;
    foreach (prog[i]) begin
      @(negedge clk_axi);
      instr_tvalid = 1; instr_tdata = prog[i];
      do @(posedge clk_axi); while (!instr_tready);
    end
    @(negedge clk_axi); instr_tvalid = 0;
    wait (instr_count == 32'(total_instr));
    @(posedge clk);
    while (busy) @(posedge clk);
    t_end = $time;
    repeat (600) @(posedge clk);     // narrow side finishes the last write

    for (int bo = 0; bo < BO; bo++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < H; x++) begin
          automatic logic [VW-1:0] v = get_vec(1, OUT_DRAM + bo * H * H + y * H + x);
          for (int l = 0; l < N; l++) begin
            automatic int o = bo * N + l;
            automatic logic signed [15:0] e = (o < COUT) ? ref_out[(y * H + x) * COUT + o] : 16'sd0;
            checks++;
            if (v[l*16 +: 16] !== e) begin
              failures++;
              if (failures < 6) $display("%s pixel (%0d,%0d) channel %0d: got %0d expected %0d",
                                         name, y, x, o, $signed(v[l*16 +: 16]), e);
            end
          end
        end
    cycles = int'((t_end - t_start) / 10);
    // each MATMUL of H vectors: H + 2N cycles plus handshakes; moves at <= 2 cycles per vector
    bound = n_mm * (H + 2 * N + 8) + 9 * BI * BO * (N + 8) +
            (BI * P * P + 9 * BI * BO * N + 2 * BO * H * H) * 2 + 500;
    $display("%s: %0d instructions (%0d MATMUL), %0d cycles at 100 MHz (%.1f us), %0d MACs, bound %0d",
             name, prog.size(), n_mm, cycles, real'(cycles) / 100.0, H * H * 9 * CIN * COUT, bound);
    checks++;
    if (cycles > bound) begin failures++; $display("%s took longer than the bound", name); end
  endtask

  initial begin
    #40ms;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    instr_tvalid = 0; instr_tdata = '0;
    repeat (4) @(posedge clk);
    rst_n = 1; rst_axi_n = 1;
    repeat (4) @(posedge clk);
    run_layer("stage1 3x3 16->16 32x32", 32, 16, 16);
    run_layer("stage3 3x3 64->64 8x8", 8, 64, 64);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
