// tcu_controller_tb: runs a short layer program through the sequencer.
//
// The sequencer drives real instances of the local memory, accumulators
// and systolic array (8x8, small memories); each DRAM port is a
// vector-wide stream model in the accelerator clock domain that refuses
// handshakes at random, so the sequencer has to stall. The program is the
// per-layer order load weights, load activations, compute, save, plus the
// accumulate and accumulator-to-local paths. After it, the DUT's DRAM and
// local memory are compared vector by vector with the software model in
// tcu_ref_pkg. Also checked: the instruction count, that stalls were
// counted, and that a MATMUL of M vectors takes M + 2N + a few cycles.
module tcu_controller_tb;
  import tcu_pkg::*;
  import tcu_ref_pkg::*;
  localparam int N = 8, VW = N * 16, LD = 256, AD = 128, DD = 512;
  localparam int LAW = $clog2(LD), AAW = $clog2(AD);
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic instr_valid, instr_ready;
  instr_t instr;
  logic lm_we, lm_re;
  logic [LAW-1:0] lm_waddr, lm_raddr;
  logic [VW-1:0] lm_wdata, lm_rdata;
  logic acc_req_valid, acc_req_write, acc_req_acc, acc_rvalid;
  logic [AAW-1:0] acc_req_addr;
  logic [VW-1:0] acc_req_wdata, acc_rdata;
  logic arr_w_valid, arr_in_valid, arr_out_valid;
  logic [$clog2(N)-1:0] arr_w_row;
  logic [VW-1:0] arr_w_vec, arr_in_vec, arr_out_vec;
  logic dram_req_valid [2], dram_req_ready [2], dram_wvalid [2], dram_wready [2];
  logic dram_rvalid [2], dram_rready [2];
  dram_req_t dram_req [2];
  logic [VW-1:0] dram_wdata [2], dram_rdata [2];
  logic busy;
  logic [31:0] instr_count, stall_cycles;

  tcu_controller #(.N(N), .VEC_W(VW), .LOCAL_DEPTH(LD), .ACC_DEPTH(AD)) dut (.*);
  local_memory #(.DEPTH(LD), .WIDTH(VW)) u_lm (.clk, .we(lm_we), .waddr(lm_waddr), .wdata(lm_wdata),
    .re(lm_re), .raddr(lm_raddr), .rdata(lm_rdata));
  accumulators #(.DEPTH(AD), .N(N)) u_acc (.clk, .rst_n, .req_valid(acc_req_valid), .req_write(acc_req_write),
    .req_acc(acc_req_acc), .req_addr(acc_req_addr), .req_wdata(acc_req_wdata), .rvalid(acc_rvalid), .rdata(acc_rdata));
  systolic_array #(.N(N)) u_arr (.clk, .rst_n, .w_valid(arr_w_valid), .w_row(arr_w_row), .w_vec(arr_w_vec),
    .in_valid(arr_in_valid), .in_vec(arr_in_vec), .out_valid(arr_out_valid), .out_vec(arr_out_vec));

  // ---- DRAM stream models -------------------------------------------------
  logic [VW-1:0] dmem [2][DD];
  int rd_left [2], rd_ptr [2], wr_left [2], wr_ptr [2];
  bit stall_on = 1;
  int dram_refusals = 0;
  for (genvar p = 0; p < 2; p++) begin : g_dram
    logic gate;
    always @(negedge clk) begin
      gate = !stall_on || ($urandom_range(0, 3) != 0);
      if (!gate) dram_refusals++;
    end
    always_comb begin
      dram_req_ready[p] = gate && rd_left[p] == 0 && wr_left[p] == 0;
      dram_rvalid[p]    = gate && rd_left[p] != 0;
      dram_rdata[p]     = dmem[p][rd_ptr[p] % DD];
      dram_wready[p]    = gate && wr_left[p] != 0;
    end
    always @(posedge clk) begin
      if (!rst_n) begin rd_left[p] <= 0; wr_left[p] <= 0; rd_ptr[p] <= 0; wr_ptr[p] <= 0; end
      else begin
        if (dram_req_valid[p] && dram_req_ready[p]) begin
          if (dram_req[p].write) begin wr_left[p] <= int'(dram_req[p].len); wr_ptr[p] <= int'(dram_req[p].addr); end
          else begin rd_left[p] <= int'(dram_req[p].len); rd_ptr[p] <= int'(dram_req[p].addr); end
        end
        if (dram_rvalid[p] && dram_rready[p]) begin rd_left[p] <= rd_left[p] - 1; rd_ptr[p] <= rd_ptr[p] + 1; end
        if (dram_wvalid[p] && dram_wready[p]) begin
          dmem[p][wr_ptr[p] % DD] <= dram_wdata[p];
          wr_left[p] <= wr_left[p] - 1; wr_ptr[p] <= wr_ptr[p] + 1;
        end
      end
    end
  end

  // ---- helpers ------------------------------------------------------------
  tcu_model #(N) m;

  function automatic logic [VW-1:0] pack(tcu_model#(N)::vec_t v);
    logic [VW-1:0] r;
    for (int l = 0; l < N; l++) r[l*16 +: 16] = v[l];
    return r;
  endfunction

  task automatic issue(logic [63:0] word);
    @(negedge clk);
    instr_valid = 1; instr = instr_t'(word);
    do @(posedge clk); while (!instr_ready);
    m.exec(word);
    @(negedge clk); instr_valid = 0;
    @(posedge clk);
    while (busy) @(posedge clk);
  endtask

  initial begin
    #2ms;
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int M = 20;
  initial begin
    automatic int t0, t1, n_issued = 0;
    m = new(LD, AD, DD);
    instr_valid = 0; instr = '0;
    // DRAM0: weights at 0..N-1; DRAM1: activations at 40..40+M-1
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < DD; a++) begin
        for (int l = 0; l < N; l++)
          m.dram[p][a][l] = 16'($signed(int'($urandom_range(0, 1023)) - 512));
        dmem[p][a] = pack(m.dram[p][a]);
      end
    for (int a = 0; a < LD; a++) for (int l = 0; l < N; l++) m.lmem[a][l] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // clear local memory in DUT and model alike through DRAM0 zero area? write it directly
    for (int a = 0; a < LD; a++) u_lm.mem[a] = '0;
    issue(mk(OP_DATAMOVE, DM_DRAM0_TO_LOCAL, N, 0, 0));      n_issued++;  // load weights into local
    issue(mk(OP_DATAMOVE, DM_DRAM1_TO_LOCAL, M, 64, 40));    n_issued++;  // load activations
    issue(mk(OP_LOADWEIGHTS, 4'h0, N, 0, 0));                n_issued++;
    stall_on = 0;
    t0 = int'($time / 10);
    issue(mk(OP_MATMUL, 4'h0, M, 64, 0));                    n_issued++;  // compute
    t1 = int'($time / 10);
    stall_on = 1;
    issue(mk(OP_MATMUL, 4'h1, M, 64, 0));                    n_issued++;  // compute, accumulate
    issue(mk(OP_DATAMOVE, DM_ACC_TO_LOCAL, M, 128, 0));      n_issued++;
    issue(mk(OP_DATAMOVE, DM_LOCAL_TO_DRAM1, M, 128, 300));  n_issued++;  // save activations
    issue(mk(OP_DATAMOVE, DM_LOCAL_TO_ACC, 10, 64, 50));     n_issued++;
    issue(mk(OP_DATAMOVE, DM_LOCAL_ADD_ACC, 10, 70, 50));    n_issued++;
    issue(mk(OP_NOP, 4'h0, 1, 0, 0));                        n_issued++;
    issue(mk(OP_DATAMOVE, DM_ACC_TO_LOCAL, 10, 200, 50));    n_issued++;
    issue(mk(OP_DATAMOVE, DM_LOCAL_TO_DRAM0, 10, 200, 100)); n_issued++;
    repeat (5) @(posedge clk);
    for (int p = 0; p < 2; p++)
      for (int a = 0; a < DD; a++) begin
        checks++;
        if (dmem[p][a] !== pack(m.dram[p][a])) begin
          failures++; if (failures < 6) $display("DRAM%0d[%0d] differs", p, a);
        end
      end
    for (int a = 0; a < LD; a++) begin
      checks++;
      if (u_lm.mem[a] !== pack(m.lmem[a])) begin failures++; if (failures < 6) $display("local[%0d] differs", a); end
    end
    checks++;
    if (instr_count != 32'(n_issued)) begin failures++; $display("instr_count %0d", instr_count); end
    checks++;
    if (stall_cycles == 0 || dram_refusals == 0) begin failures++; $display("no stall counted"); end
    checks++;
    $display("MATMUL of %0d vectors took %0d cycles, stall cycles %0d", M, t1 - t0, stall_cycles);
    if (t1 - t0 > M + 2 * N + 8 || t1 - t0 < M + 2 * N) begin failures++; $display("MATMUL timing off"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
