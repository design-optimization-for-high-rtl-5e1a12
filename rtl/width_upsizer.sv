// width_upsizer: composes each wide word from RATIO narrow words.
//
// Collects OUT_W/IN_W consecutive IN_W-bit words
// (four 128-bit words) into one OUT_W-bit word (512 bits); the first narrow
// word lands in the least significant bits. Both sides use valid/ready
// handshakes. When the assembled word leaves, the first narrow word of the
// next one is taken in the same cycle, so a full stream takes one narrow
// word per cycle.
//
// Composing one 512-bit word from four 128-bit words follows the published
// dual-clock scheme; the beat order is this design's own choice.
module width_upsizer #(
  parameter int IN_W  = tcu_pkg::AXI_W,
  parameter int OUT_W = tcu_pkg::VEC_W,
  localparam int RATIO = OUT_W / IN_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [IN_W-1:0]  in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [OUT_W-1:0] out_data
);
  logic [OUT_W-1:0]           buf_q;
  logic                       full_q;
  logic [$clog2(RATIO)-1:0]   beat_q;

  assign out_valid = full_q;
  assign out_data  = buf_q;
  assign in_ready  = !full_q || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      beat_q <= '0;
      buf_q  <= '0;
    end else begin
      if (out_valid && out_ready) full_q <= 1'b0;
      if (in_valid && in_ready) begin
        buf_q  <= {in_data, buf_q[OUT_W-1:IN_W]};
        beat_q <= beat_q + 1'b1;
        if (32'(beat_q) == RATIO - 1) begin
          full_q <= 1'b1;
          beat_q <= '0;
        end
      end
    end
  end

  initial assert (OUT_W % IN_W == 0 && RATIO >= 2);
endmodule
