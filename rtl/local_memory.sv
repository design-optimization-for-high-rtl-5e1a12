// local_memory: the accelerator's vector scratchpad.
//
// Holds DEPTH vectors of WIDTH bits (48K x 512 bits by default, 3 MiB)
// with one write port and one read port that work in the same cycle, so a
// transfer can fill one region while the array reads another. Reads are
// synchronous: rdata is valid the cycle after re. A read and a write of
// the same address in one cycle return the old contents.
//
// The memory is placed in UltraRAM through the ram_style attribute, which
// is how the published configuration moves the local memory out of Block
// RAM; the depth and width follow it. Contents are not reset.
module local_memory #(
  parameter int DEPTH = tcu_pkg::LOCAL_DEPTH,
  parameter int WIDTH = tcu_pkg::VEC_W,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  // write port
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  // read port
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);
  (* ram_style = "ultra" *) logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH));
  a_raddr_range: assert property (@(posedge clk) re |-> (32'(raddr) < DEPTH));
endmodule
