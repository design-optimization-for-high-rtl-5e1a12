// systolic_array_tb: checks the array's products, its latency and its rate.
//
// Loads a random weight matrix row by row, streams NV random vectors in on
// consecutive cycles and compares every output lane with a software
// matrix-vector product (arithmetic shift by FRAC_W, saturation to 16 bits).
// Checks that the first result appears exactly 2*N cycles after the first
// input and that results then come one per cycle. Large operands are mixed
// in so that saturation is exercised.
module systolic_array_tb;
  localparam int N = 8, DW = 16, FR = 8, NV = 40;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic w_valid, in_valid, out_valid;
  logic [$clog2(N)-1:0] w_row;
  logic [N*DW-1:0] w_vec, in_vec, out_vec;
  int checks = 0, failures = 0;

  systolic_array #(.N(N), .DATA_W(DW), .FRAC_W(FR)) dut (.*);

  logic signed [DW-1:0] W [N][N];
  logic signed [DW-1:0] X [NV][N];
  logic signed [DW-1:0] Y [NV][N];

  function automatic logic signed [DW-1:0] ref_sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return DW'(v);
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int nout = 0, first_out_cycle = -1, cycle = 0, first_in_cycle = -1;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) if (in_valid && first_in_cycle < 0) first_in_cycle = cycle;
  always @(posedge clk) if (out_valid) begin
    if (first_out_cycle < 0) first_out_cycle = cycle;
    for (int j = 0; j < N; j++) begin
      checks++;
      if (out_vec[j*DW +: DW] !== Y[nout][j]) begin
        failures++;
        if (failures < 10) $display("vec %0d lane %0d: got %h exp %h", nout, j, out_vec[j*DW +: DW], Y[nout][j]);
      end
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++)
        W[i][j] = (i == j && i == 0) ? 16'sh7f00 : DW'($signed(int'($urandom_range(0, 1023)) - 512));
    for (int v = 0; v < NV; v++)
      for (int i = 0; i < N; i++)
        X[v][i] = (v % 7 == 3) ? 16'sh7fff : DW'($signed(int'($urandom_range(0, 2047)) - 1024));
    for (int v = 0; v < NV; v++)
      for (int j = 0; j < N; j++) begin
        automatic longint s = 0;
        for (int i = 0; i < N; i++) s += longint'(X[v][i]) * longint'(W[i][j]);
        Y[v][j] = ref_sat(s >>> FR);
      end
    w_valid = 0; in_valid = 0; w_row = '0; w_vec = '0; in_vec = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < N; i++) begin
      w_valid <= 1; w_row <= i[$clog2(N)-1:0];
      for (int j = 0; j < N; j++) w_vec[j*DW +: DW] <= W[i][j];
      @(posedge clk);
    end
    w_valid <= 0;
    @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      in_valid <= 1;
      for (int i = 0; i < N; i++) in_vec[i*DW +: DW] <= X[v][i];
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4 * N) @(posedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("got %0d results, expected %0d", nout, NV); end
    checks++;
    if (first_out_cycle - first_in_cycle != 2 * N) begin
      failures++; $display("latency %0d, expected %0d", first_out_cycle - first_in_cycle, 2 * N);
    end
    // saturation must have happened in at least one lane
    checks++;
    begin
      automatic int sat = 0;
      for (int v = 0; v < NV; v++) for (int j = 0; j < N; j++) if (Y[v][j] == 16'sh7fff || Y[v][j] == 16'sh8000) sat++;
      if (sat == 0) begin failures++; $display("no saturation exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
