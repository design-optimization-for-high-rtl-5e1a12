// tensil_top: the accelerator with its two clock domains.
//
// A weight-stationary 32x32 systolic array, a 48K-vector local memory in
// UltraRAM and a 20K-vector accumulator memory in Block RAM, run by an
// instruction sequencer, all on the accelerator clock clk (100 MHz). The
// accelerator reaches the processing system through three ports that all
// live on the second clock clk_axi (333 MHz):
//
//   instruction stream  64-bit words from a DMA engine, through an async FIFO
//   DRAM0, DRAM1        128-bit reduced-AXI ports, each behind a
//                       dram_port_bridge that crosses clocks and splits or
//                       builds 512-bit vectors from four 128-bit words
//
// Inside the accelerator every data path is one 512-bit vector wide, so a
// DRAM transfer moves one vector per accelerator cycle while clk_axi is at
// least four times clk. Completion is visible on busy (clk domain) and in
// instr_count; stall_cycles counts cycles the sequencer waited on DRAM.
//
// Ports are plain signals; the two DRAM ports are arrays indexed 0 and 1.
// The block set, sizes and clocking follow the published configuration;
// the port protocols are simplified and are this design's own choices.
module tensil_top #(
  parameter int N           = tcu_pkg::ARRAY_SIZE,
  parameter int LOCAL_DEPTH = tcu_pkg::LOCAL_DEPTH,
  parameter int ACC_DEPTH   = tcu_pkg::ACC_DEPTH,
  parameter int AXI_W       = tcu_pkg::AXI_W,
  localparam int VEC_W      = N * tcu_pkg::DATA_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clk_axi,
  input  logic                rst_axi_n,
  // instruction stream (clk_axi)
  input  logic                instr_tvalid,
  output logic                instr_tready,
  input  logic [tcu_pkg::INSTR_W-1:0] instr_tdata,
  // DRAM ports (clk_axi)
  output logic                axi_arvalid [2],
  input  logic                axi_arready [2],
  output logic [31:0]         axi_araddr  [2],
  output logic [19:0]         axi_arbeats [2],
  output logic                axi_awvalid [2],
  input  logic                axi_awready [2],
  output logic [31:0]         axi_awaddr  [2],
  output logic [19:0]         axi_awbeats [2],
  output logic                axi_wvalid  [2],
  input  logic                axi_wready  [2],
  output logic [AXI_W-1:0]    axi_wdata   [2],
  input  logic                axi_rvalid  [2],
  output logic                axi_rready  [2],
  input  logic [AXI_W-1:0]    axi_rdata   [2],
  // status (clk)
  output logic                busy,
  output logic [31:0]         instr_count,
  output logic [31:0]         stall_cycles
);
  localparam int LAW = $clog2(LOCAL_DEPTH);
  localparam int AAW = $clog2(ACC_DEPTH);

  // ---- instruction crossing ---------------------------------------------
  logic            i_valid, i_ready;
  logic [tcu_pkg::INSTR_W-1:0] i_data;

  async_fifo #(.WIDTH(tcu_pkg::INSTR_W), .DEPTH(16)) u_instr_fifo (
    .wclk(clk_axi), .wrst_n(rst_axi_n), .wvalid(instr_tvalid), .wready(instr_tready), .wdata(instr_tdata),
    .rclk(clk),     .rrst_n(rst_n),     .rvalid(i_valid),      .rready(i_ready),      .rdata(i_data)
  );

  // ---- internal nets ------------------------------------------------------
  logic                 lm_we, lm_re;
  logic [LAW-1:0]       lm_waddr, lm_raddr;
  logic [VEC_W-1:0]     lm_wdata, lm_rdata;
  logic                 acc_req_valid, acc_req_write, acc_req_acc, acc_rvalid;
  logic [AAW-1:0]       acc_req_addr;
  logic [VEC_W-1:0]     acc_req_wdata, acc_rdata;
  logic                 arr_w_valid, arr_in_valid, arr_out_valid;
  logic [$clog2(N)-1:0] arr_w_row;
  logic [VEC_W-1:0]     arr_w_vec, arr_in_vec, arr_out_vec;
  logic                 dram_req_valid [2], dram_req_ready [2];
  tcu_pkg::dram_req_t   dram_req       [2];
  logic                 dram_wvalid [2], dram_wready [2], dram_rvalid [2], dram_rready [2];
  logic [VEC_W-1:0]     dram_wdata  [2], dram_rdata  [2];

  tcu_controller #(.N(N), .VEC_W(VEC_W), .LOCAL_DEPTH(LOCAL_DEPTH), .ACC_DEPTH(ACC_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .instr_valid(i_valid), .instr_ready(i_ready), .instr(tcu_pkg::instr_t'(i_data)),
    .lm_we, .lm_waddr, .lm_wdata, .lm_re, .lm_raddr, .lm_rdata,
    .acc_req_valid, .acc_req_write, .acc_req_acc, .acc_req_addr, .acc_req_wdata, .acc_rvalid, .acc_rdata,
    .arr_w_valid, .arr_w_row, .arr_w_vec, .arr_in_valid, .arr_in_vec, .arr_out_valid, .arr_out_vec,
    .dram_req_valid, .dram_req_ready, .dram_req, .dram_wvalid, .dram_wready, .dram_wdata,
    .dram_rvalid, .dram_rready, .dram_rdata,
    .busy, .instr_count, .stall_cycles
  );

  local_memory #(.DEPTH(LOCAL_DEPTH), .WIDTH(VEC_W)) u_local (
    .clk, .we(lm_we), .waddr(lm_waddr), .wdata(lm_wdata), .re(lm_re), .raddr(lm_raddr), .rdata(lm_rdata)
  );

  accumulators #(.DEPTH(ACC_DEPTH), .N(N)) u_acc (
    .clk, .rst_n, .req_valid(acc_req_valid), .req_write(acc_req_write), .req_acc(acc_req_acc),
    .req_addr(acc_req_addr), .req_wdata(acc_req_wdata), .rvalid(acc_rvalid), .rdata(acc_rdata)
  );

  systolic_array #(.N(N)) u_array (
    .clk, .rst_n, .w_valid(arr_w_valid), .w_row(arr_w_row), .w_vec(arr_w_vec),
    .in_valid(arr_in_valid), .in_vec(arr_in_vec), .out_valid(arr_out_valid), .out_vec(arr_out_vec)
  );

  for (genvar p = 0; p < 2; p++) begin : g_dram
    dram_port_bridge #(.VEC_W(VEC_W), .AXI_W(AXI_W)) u_bridge (
      .clk_t(clk), .rst_t_n(rst_n),
      .req_valid(dram_req_valid[p]), .req_ready(dram_req_ready[p]), .req(dram_req[p]),
      .wvalid(dram_wvalid[p]), .wready(dram_wready[p]), .wdata(dram_wdata[p]),
      .rvalid(dram_rvalid[p]), .rready(dram_rready[p]), .rdata(dram_rdata[p]),
      .clk_a(clk_axi), .rst_a_n(rst_axi_n),
      .axi_arvalid(axi_arvalid[p]), .axi_arready(axi_arready[p]), .axi_araddr(axi_araddr[p]),
      .axi_arbeats(axi_arbeats[p]),
      .axi_awvalid(axi_awvalid[p]), .axi_awready(axi_awready[p]), .axi_awaddr(axi_awaddr[p]),
      .axi_awbeats(axi_awbeats[p]),
      .axi_wvalid(axi_wvalid[p]), .axi_wready(axi_wready[p]), .axi_wdata(axi_wdata[p]),
      .axi_rvalid(axi_rvalid[p]), .axi_rready(axi_rready[p]), .axi_rdata(axi_rdata[p])
    );
  end
endmodule
