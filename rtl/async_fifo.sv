// async_fifo: first-in first-out queue between two unrelated clocks.
//
// Used wherever data crosses between the 100 MHz accelerator domain and
// the 333 MHz processing-system domain. The write and read pointers are
// kept in Gray code and each is passed to the other domain through a
// two-flop synchronizer, so only one bit of a pointer changes per step and
// a crossing pointer is never seen half-updated. Full and empty are
// therefore conservative: a slot freed or filled on one side is seen on the
// other after two to three of its clock edges.
//
// Interface: valid/ready on both sides, first-word fall-through (rdata is
// the head entry while rvalid is high). DEPTH must be a power of two. Each
// side has its own active-low reset; both must be asserted together.
//
// The published design names the need for synchronization between the two
// clocks but not the circuit; the Gray-pointer FIFO is this design's choice.
module async_fifo #(
  parameter int WIDTH = tcu_pkg::VEC_W,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  // write side
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wvalid,
  output logic             wready,
  input  logic [WIDTH-1:0] wdata,
  // read side
  input  logic             rclk,
  input  logic             rrst_n,
  output logic             rvalid,
  input  logic             rready,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer seen in write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer seen in read domain
  logic [AW:0] wbin_nx, rbin_nx;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write domain ------------------------------------------------------
  assign wready  = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_nx = wbin + (AW+1)'(wvalid && wready);

  always_ff @(posedge wclk) begin
    if (wvalid && wready) mem[wbin[AW-1:0]] <= wdata;
  end

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_nx;
      wgray    <= bin2gray(wbin_nx);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  // ---- read domain -------------------------------------------------------
  assign rvalid  = (rgray != wgray_r2);
  assign rdata   = mem[rbin[AW-1:0]];
  assign rbin_nx = rbin + (AW+1)'(rvalid && rready);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_nx;
      rgray    <= bin2gray(rbin_nx);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH);
endmodule
