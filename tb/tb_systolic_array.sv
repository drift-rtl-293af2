// tb_systolic_array: self-checking test of the weight-stationary array at its
// default size (32 x 32 plus checksum column).
// Loads a random INT8 weight matrix, streams random activation rows without
// gaps, and compares every output row with a behavioural GEMM, the checksum
// column with the row sum, and the latency with 2N clocks.
// Interface: w_load/w_row/w_data/w_chk for weights, x_valid/x_data in,
// y_valid/y_data/y_chk out. Timing: expects each output row exactly 2N clocks
// after its input row. Array size and operand widths follow the paper; the
// skew/deskew latency is this design's.
module tb_systolic_array;
  localparam int N = 32;
  localparam int ROWS = 40;
  localparam int CSW = 32 + $clog2(N) + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                       w_load;
  logic [$clog2(N)-1:0]       w_row;
  logic signed [N-1:0][7:0]   w_data;
  logic signed [8+$clog2(N):0] w_chk;
  logic                       x_valid;
  logic signed [N-1:0][7:0]   x_data;
  logic                       y_valid;
  logic signed [N-1:0][31:0]  y_data;
  logic signed [CSW-1:0]      y_chk;

  systolic_array #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  logic signed [7:0] W [N][N];
  logic signed [7:0] X [ROWS][N];
  int cyc = 0, first_in = -1, first_out = -1, nout = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(posedge clk) if (rst_n && y_valid) begin
    int exp_v; longint exp_s;
    if (first_out < 0) first_out = cyc;
    exp_s = 0;
    for (int j = 0; j < N; j++) begin
      exp_v = 0;
      for (int k = 0; k < N; k++) exp_v += int'(X[nout][k]) * int'(W[k][j]);
      exp_s += exp_v;
      checks++;
      if (y_data[j] !== exp_v) begin
        failures++;
        if (failures < 10) $display("row %0d col %0d: got %0d exp %0d", nout, j, y_data[j], exp_v);
      end
    end
    checks++;
    if (longint'(y_chk) != exp_s) begin
      failures++;
      $display("row %0d checksum: got %0d exp %0d", nout, y_chk, exp_s);
    end
    nout++;
  end

  initial begin
    w_load = 0; w_row = 0; w_data = '0; w_chk = '0; x_valid = 0; x_data = '0;
    for (int k = 0; k < N; k++) for (int j = 0; j < N; j++) W[k][j] = 8'($urandom);
    for (int m = 0; m < ROWS; m++) for (int k = 0; k < N; k++) X[m][k] = 8'($urandom);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int k = 0; k < N; k++) begin
      int s; s = 0;
      @(posedge clk);
      w_load <= 1; w_row <= k[$clog2(N)-1:0];
      for (int j = 0; j < N; j++) begin w_data[j] <= W[k][j]; s += W[k][j]; end
      w_chk <= s[8+$clog2(N):0];
    end
    @(posedge clk); w_load <= 0;
    for (int m = 0; m < ROWS; m++) begin
      @(posedge clk);
      if (m == 0) first_in = cyc;
      x_valid <= 1;
      for (int k = 0; k < N; k++) x_data[k] <= X[m][k];
    end
    @(posedge clk); x_valid <= 0;
    repeat (3 * N) @(posedge clk);
    checks++;
    if (nout != ROWS) begin failures++; $display("got %0d rows, expected %0d", nout, ROWS); end
    checks++;
    // x_valid is driven on the edge after first_in was sampled
    if (first_out - (first_in + 1) != 2 * N) begin
      failures++; $display("latency %0d, expected %0d", first_out - first_in - 1, 2 * N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
