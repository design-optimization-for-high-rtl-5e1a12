// accumulators: vector memory that can add incoming vectors to its contents.
//
// Holds DEPTH vectors of N lanes x DATA_W bits (20K x 32 x 16 bits by
// default, in Block RAM). One request port serves three operations:
//   read        (req_write = 0)              rdata valid one cycle later
//   write       (req_write = 1, req_acc = 0) mem[addr] <= wdata
//   accumulate  (req_write = 1, req_acc = 1) mem[addr] <= mem[addr] + wdata
// Accumulation adds lane by lane with saturation to 16 bits.
//
// Every request goes through a two-stage pipeline: stage 0 reads the
// addressed word, stage 1 forms the new value and writes it. A request may
// be issued every cycle. When stage 1 writes the address that stage 0 is
// reading, the value being written is forwarded, so back-to-back
// accumulations into one address add up correctly.
//
// Depth, lane count and lane width follow the published configuration
// (all Block RAM given to 20K accumulator vectors). The single port, the
// pipeline and the saturating add are this design's own choices.
module accumulators #(
  parameter int DEPTH  = tcu_pkg::ACC_DEPTH,
  parameter int N      = tcu_pkg::ARRAY_SIZE,
  parameter int DATA_W = tcu_pkg::DATA_W,
  localparam int AW    = $clog2(DEPTH),
  localparam int WIDTH = N * DATA_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid,
  input  logic             req_write,
  input  logic             req_acc,
  input  logic [AW-1:0]    req_addr,
  input  logic [WIDTH-1:0] req_wdata,
  output logic             rvalid,
  output logic [WIDTH-1:0] rdata
);
  (* ram_style = "block" *) logic [WIDTH-1:0] mem [DEPTH];

  // stage 1 registers
  logic             s1_valid, s1_write, s1_acc, s1_fwd;
  logic [AW-1:0]    s1_addr;
  logic [WIDTH-1:0] s1_wdata, s1_rd, s1_fwd_data;
  logic [WIDTH-1:0] s1_old, s1_new;

  assign s1_old = s1_fwd ? s1_fwd_data : s1_rd;

  always_comb begin
    s1_new = s1_wdata;
    if (s1_acc) begin
      for (int l = 0; l < N; l++)
        s1_new[l*DATA_W +: DATA_W] = tcu_pkg::sat16(
            48'(signed'(s1_old[l*DATA_W +: DATA_W])) +
            48'(signed'(s1_wdata[l*DATA_W +: DATA_W])));
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid) s1_rd <= mem[req_addr];
    if (s1_valid && s1_write) mem[s1_addr] <= s1_new;
    s1_fwd      <= s1_valid && s1_write && (s1_addr == req_addr);
    s1_fwd_data <= s1_new;
    s1_write    <= req_write;
    s1_acc      <= req_acc;
    s1_addr     <= req_addr;
    s1_wdata    <= req_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= req_valid;
  end

  assign rvalid = s1_valid && !s1_write;
  assign rdata  = s1_old;

  a_addr_range: assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> (32'(req_addr) < DEPTH));
endmodule
