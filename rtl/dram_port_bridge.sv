// dram_port_bridge: dual-clock, wide-to-narrow bridge for one DRAM port.
//
// The accelerator side runs on clk_t (100 MHz) and moves one 512-bit
// vector per cycle; the processing-system side runs on clk_a (333 MHz in
// the reference setup) and moves 128-bit words. Each 512-bit vector is
// split into, or built from, four 128-bit words, so with clk_a at four
// times clk_t the narrow side keeps pace with one vector per accelerator
// clock (at 333 MHz it sustains 3.33 words per accelerator cycle).
//
//   request : accelerator req -> async_fifo -> AR (reads) or AW (writes)
//   writes  : accelerator wdata -> async_fifo (512) -> width_downsizer -> W
//   reads   : R -> width_upsizer -> async_fifo (512) -> accelerator rdata
//
// Requests are in vectors on the accelerator side and become a byte
// address (vector x 64) and a count of 128-bit beats (vectors x 4) on the
// processing-system side. Because vectors are 64-byte aligned and a request holds at most 65,536
// vectors, the low 6 address bits, the low 2 beat-count bits and the top
// bits of both are constant. The narrow side is a reduced AXI: address and
// data channels with valid/ready, one command per request of any length,
// no write response and no burst splitting. Those simplifications, the
// FIFO depths and the beat order are this design's own choices; the
// two clock domains and the 512/128-bit widths follow the published design.
module dram_port_bridge #(
  parameter int VEC_W  = tcu_pkg::VEC_W,
  parameter int AXI_W  = tcu_pkg::AXI_W,
  parameter int FIFO_DEPTH = 16,
  localparam int RATIO = VEC_W / AXI_W,
  localparam int REQ_W = $bits(tcu_pkg::dram_req_t)
) (
  // accelerator side (clk_t)
  input  logic               clk_t,
  input  logic               rst_t_n,
  input  logic               req_valid,
  output logic               req_ready,
  input  tcu_pkg::dram_req_t req,
  input  logic               wvalid,
  output logic               wready,
  input  logic [VEC_W-1:0]   wdata,
  output logic               rvalid,
  input  logic               rready,
  output logic [VEC_W-1:0]   rdata,
  // processing-system side (clk_a)
  input  logic               clk_a,
  input  logic               rst_a_n,
  output logic               axi_arvalid,
  input  logic               axi_arready,
  output logic [31:0]        axi_araddr,
  output logic [19:0]        axi_arbeats,
  output logic               axi_awvalid,
  input  logic               axi_awready,
  output logic [31:0]        axi_awaddr,
  output logic [19:0]        axi_awbeats,
  output logic               axi_wvalid,
  input  logic               axi_wready,
  output logic [AXI_W-1:0]   axi_wdata,
  input  logic               axi_rvalid,
  output logic               axi_rready,
  input  logic [AXI_W-1:0]   axi_rdata
);
  localparam int BYTE_SH = $clog2(VEC_W / 8);

  // ---- requests ----------------------------------------------------------
  tcu_pkg::dram_req_t cmd;
  logic               cmd_valid, cmd_ready;

  async_fifo #(.WIDTH(REQ_W), .DEPTH(4)) u_req_fifo (
    .wclk(clk_t), .wrst_n(rst_t_n), .wvalid(req_valid), .wready(req_ready), .wdata(req),
    .rclk(clk_a), .rrst_n(rst_a_n), .rvalid(cmd_valid), .rready(cmd_ready), .rdata(cmd)
  );

  assign axi_arvalid = cmd_valid && !cmd.write;
  assign axi_awvalid = cmd_valid &&  cmd.write;
  assign axi_araddr  = 32'(cmd.addr) << BYTE_SH;
  assign axi_awaddr  = axi_araddr;
  assign axi_arbeats = 20'(cmd.len) * 20'(RATIO);
  assign axi_awbeats = axi_arbeats;
  assign cmd_ready   = cmd.write ? axi_awready : axi_arready;

  // ---- write data: clk_t 512 -> clk_a 512 -> 128 --------------------------
  logic             wf_valid, wf_ready;
  logic [VEC_W-1:0] wf_data;

  async_fifo #(.WIDTH(VEC_W), .DEPTH(FIFO_DEPTH)) u_wdata_fifo (
    .wclk(clk_t), .wrst_n(rst_t_n), .wvalid(wvalid), .wready(wready), .wdata(wdata),
    .rclk(clk_a), .rrst_n(rst_a_n), .rvalid(wf_valid), .rready(wf_ready), .rdata(wf_data)
  );

  width_downsizer #(.IN_W(VEC_W), .OUT_W(AXI_W)) u_down (
    .clk(clk_a), .rst_n(rst_a_n),
    .in_valid(wf_valid), .in_ready(wf_ready), .in_data(wf_data),
    .out_valid(axi_wvalid), .out_ready(axi_wready), .out_data(axi_wdata)
  );

  // ---- read data: clk_a 128 -> 512 -> clk_t 512 ---------------------------
  logic             rf_valid, rf_ready;
  logic [VEC_W-1:0] rf_data;

  width_upsizer #(.IN_W(AXI_W), .OUT_W(VEC_W)) u_up (
    .clk(clk_a), .rst_n(rst_a_n),
    .in_valid(axi_rvalid), .in_ready(axi_rready), .in_data(axi_rdata),
    .out_valid(rf_valid), .out_ready(rf_ready), .out_data(rf_data)
  );

  async_fifo #(.WIDTH(VEC_W), .DEPTH(FIFO_DEPTH)) u_rdata_fifo (
    .wclk(clk_a), .wrst_n(rst_a_n), .wvalid(rf_valid), .wready(rf_ready), .wdata(rf_data),
    .rclk(clk_t), .rrst_n(rst_t_n), .rvalid(rvalid), .rready(rready), .rdata(rdata)
  );
endmodule
