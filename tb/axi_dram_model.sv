// axi_dram_model: behavioural model of the processing system's DRAM as
// seen through one reduced-AXI port (testbench only, not synthesizable
// intent).
//
// Holds WORDS words of W bits. A read command (byte address, beat count)
// is answered with that many consecutive words on R; a write command takes
// that many words from W. One read and one write command may be in
// progress at once; further commands wait. When STALL is non-zero, every
// handshake is refused at random about one cycle in STALL, so the
// accelerator sees back-pressure and gaps. Tests reach the contents
// through the mem array by hierarchical reference.
module axi_dram_model #(
  parameter int W     = 128,
  parameter int WORDS = 4096,
  parameter int STALL = 0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         arvalid,
  output logic         arready,
  input  logic [31:0]  araddr,
  input  logic [19:0]  arbeats,
  input  logic         awvalid,
  output logic         awready,
  input  logic [31:0]  awaddr,
  input  logic [19:0]  awbeats,
  input  logic         wvalid,
  output logic         wready,
  input  logic [W-1:0] wdata,
  output logic         rvalid,
  input  logic         rready,
  output logic [W-1:0] rdata
);
  localparam int SH = $clog2(W / 8);
  logic [W-1:0] mem [WORDS];

  int rd_left = 0, rd_ptr = 0, wr_left = 0, wr_ptr = 0;
  int reads_done = 0, writes_done = 0, stalls = 0;
  logic gate_r, gate_w;

  always @(negedge clk) begin
    gate_r = (STALL == 0) || ($urandom_range(0, STALL - 1) != 0);
    gate_w = (STALL == 0) || ($urandom_range(0, STALL - 1) != 0);
    if (!gate_r || !gate_w) stalls++;
  end

  always_comb begin
    arready = rst_n && (rd_left == 0);
    awready = rst_n && (wr_left == 0);
    rvalid  = rst_n && (rd_left != 0) && gate_r;
    rdata   = mem[rd_ptr % WORDS];
    wready  = rst_n && (wr_left != 0) && gate_w;
  end

  always @(posedge clk) if (rst_n) begin
    if (arvalid && arready) begin
      rd_left <= int'(arbeats);
      rd_ptr  <= int'(araddr >> SH);
    end else if (rvalid && rready) begin
      rd_left <= rd_left - 1;
      rd_ptr  <= rd_ptr + 1;
      if (rd_left == 1) reads_done <= reads_done + 1;
    end
    if (awvalid && awready) begin
      wr_left <= int'(awbeats);
      wr_ptr  <= int'(awaddr >> SH);
    end else if (wvalid && wready) begin
      mem[wr_ptr % WORDS] <= wdata;
      wr_left <= wr_left - 1;
      wr_ptr  <= wr_ptr + 1;
      if (wr_left == 1) writes_done <= writes_done + 1;
    end
  end
endmodule
