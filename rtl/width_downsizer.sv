// width_downsizer: splits each wide word into RATIO narrow words.
//
// One IN_W-bit word (512 bits) is accepted and sent out as IN_W/OUT_W
// consecutive OUT_W-bit words (four 128-bit words), least significant part
// first. Both sides use valid/ready handshakes. The next wide word is
// accepted in the same cycle as the last narrow word leaves, so a full
// stream moves one narrow word per cycle: four cycles of this clock carry
// one wide word. Placed in the fast (processing-system) clock domain, one
// wide word per accelerator clock keeps up when this clock is RATIO times
// faster.
//
// The split of one 512-bit word into four 128-bit words follows the
// published dual-clock scheme; the beat order (low part first) is this
// design's own choice.
module width_downsizer #(
  parameter int IN_W  = tcu_pkg::VEC_W,
  parameter int OUT_W = tcu_pkg::AXI_W,
  localparam int RATIO = IN_W / OUT_W
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
  logic [IN_W-1:0]            buf_q;
  logic                       full_q;
  logic [$clog2(RATIO)-1:0]   beat_q;
  logic                       last_beat;

  assign last_beat = (32'(beat_q) == RATIO - 1);
  assign out_valid = full_q;
  assign out_data  = buf_q[OUT_W-1:0];
  assign in_ready  = !full_q || (out_ready && last_beat);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q <= 1'b0;
      beat_q <= '0;
      buf_q  <= '0;
    end else if (in_valid && in_ready) begin
      full_q <= 1'b1;
      beat_q <= '0;
      buf_q  <= in_data;
    end else if (out_valid && out_ready) begin
      buf_q  <= buf_q >> OUT_W;
      beat_q <= beat_q + 1'b1;
      if (last_beat) full_q <= 1'b0;
    end
  end

  initial assert (IN_W % OUT_W == 0 && RATIO >= 2);
endmodule
