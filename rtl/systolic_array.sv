// systolic_array: weight-stationary N x N matrix-vector engine.
//
// Computes, for each input vector x, y[j] = sat( (sum_i x[i] * W[i][j]) >>> FRAC_W )
// where W is held in the cells. Row i of the array holds weight row W[i][*]
// and is written by presenting w_valid with w_row = i and w_vec = W[i][*].
//
// Activation lane i enters row i after i cycles of skew and then moves one
// cell right per cycle; partial sums move one cell down per cycle. Column j
// therefore finishes N + j cycles after its vector entered, and a deskew
// delay of N-1-j cycles realigns the columns. The result is scaled by an
// arithmetic shift (rounding toward minus infinity), saturated to 16 bits and
// registered. Latency from in_valid to out_valid is LATENCY = 2*N cycles;
// a new vector can enter every cycle and the array never stalls.
//
// Interface: weights and activations are packed vectors with lane 0 in the
// least significant DATA_W bits. The 32x32 size and 16-bit fixed point
// follow the published configuration; the binary point, the rounding and
// the way weights are written (one addressed row per cycle) are this
// design's own choices.
module systolic_array #(
  parameter int N      = tcu_pkg::ARRAY_SIZE,
  parameter int DATA_W = tcu_pkg::DATA_W,
  parameter int FRAC_W = tcu_pkg::FRAC_W,
  localparam int ACC_W = 2 * DATA_W + $clog2(N) + 1,
  localparam int LATENCY = 2 * N
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight load
  input  logic                    w_valid,
  input  logic [$clog2(N)-1:0]    w_row,
  input  logic [N*DATA_W-1:0]     w_vec,
  // activations in
  input  logic                    in_valid,
  input  logic [N*DATA_W-1:0]     in_vec,
  // results out
  output logic                    out_valid,
  output logic [N*DATA_W-1:0]     out_vec
);
  // a[i][j]: activation entering cell (i,j); p[i][j]: partial sum leaving it
  logic signed [DATA_W-1:0] a  [N][N+1];
  logic signed [ACC_W-1:0]  p  [N+1][N];
  logic [LATENCY-1:0]       vld_sr;

  // ---- input skew: lane i delayed by i cycles ----------------------------
  for (genvar i = 0; i < N; i++) begin : g_skew
    logic signed [DATA_W-1:0] sk [i+1];
    assign sk[0] = in_vec[i*DATA_W +: DATA_W];
    for (genvar d = 1; d <= i; d++) begin : g_d
      always_ff @(posedge clk) sk[d] <= sk[d-1];
    end
    assign a[i][0] = sk[i];
  end

  // ---- cell grid ---------------------------------------------------------
  for (genvar j = 0; j < N; j++) begin : g_top
    assign p[0][j] = '0;
  end
  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      systolic_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk   (clk),
        .w_load(w_valid && (w_row == i)),
        .w_in  (w_vec[j*DATA_W +: DATA_W]),
        .a_in  (a[i][j]),
        .p_in  (p[i][j]),
        .a_out (a[i][j+1]),
        .p_out (p[i+1][j])
      );
    end
  end

  // ---- deskew: column j delayed by N-1-j cycles, then scale + saturate ---
  for (genvar j = 0; j < N; j++) begin : g_deskew
    logic signed [ACC_W-1:0] ds [N-j];
    assign ds[0] = p[N][j];
    for (genvar d = 1; d < N - j; d++) begin : g_d
      always_ff @(posedge clk) ds[d] <= ds[d-1];
    end
    always_ff @(posedge clk)
      out_vec[j*DATA_W +: DATA_W] <= tcu_pkg::sat16(48'(ds[N-1-j] >>> FRAC_W));
  end

  // ---- valid pipeline ----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_sr <= '0;
    else        vld_sr <= {vld_sr[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld_sr[LATENCY-1];

endmodule
