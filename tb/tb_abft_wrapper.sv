// tb_abft_wrapper: self-checking test of the ABFT-wrapped systolic array.
// Part 1 runs a 5x5 example tile (X, W and an error that turns a 4 into 14 at
// row 1, column 3) on a 5-wide instance with threshold 2**3 and expects
// exactly that row and column to be flagged. Part 2 runs random tiles on a
// default-size instance (32x32, threshold 2**10) with single bit flips in
// bits 10 and above (must be flagged at their row and column), in bits below
// 10 (must not be flagged) and with two errors (both rows and columns
// flagged), and checks outputs against a behavioural GEMM and tile_done
// against its latency of M + 2 + 2N clocks.
// Interface: drives the wrapper's weight, activation, and inj_* ports and
// reads y_* rows and the row/column flags at tile_done. Timing: checks that
// tile_done comes M + 2 + 2N clocks after the first row. The 5 x 5 example
// and the 10th-bit threshold follow the paper; the random tiles are this testbench's own.
module tb_abft_wrapper;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- small instance: the 5x5 example ----------------------
  localparam int SN = 5, SM = 5;
  logic                      s_w_load;
  logic [2:0]                s_w_row;
  logic signed [SN-1:0][7:0] s_w_data;
  logic                      s_x_valid, s_x_ready;
  logic signed [SN-1:0][7:0] s_x_data;
  logic                      s_y_valid;
  logic [2:0]                s_y_row;
  logic signed [SN-1:0][31:0] s_y_data;
  logic                      s_tile_done;
  logic [SM-1:0]             s_row_flags;
  logic [SN-1:0]             s_col_flags;
  logic                      s_inj_en;
  logic [2:0]                s_inj_row, s_inj_col;
  logic [31:0]               s_inj_mask;

  abft_wrapper #(.N(SN), .M(SM), .THETA_BIT(3)) u_small (
    .clk, .rst_n,
    .w_load(s_w_load), .w_row(s_w_row), .w_data(s_w_data),
    .x_valid(s_x_valid), .x_ready(s_x_ready), .x_data(s_x_data),
    .y_valid(s_y_valid), .y_row(s_y_row), .y_data(s_y_data),
    .tile_done(s_tile_done), .row_flags(s_row_flags), .col_flags(s_col_flags),
    .inj_en(s_inj_en), .inj_row(s_inj_row), .inj_col(s_inj_col), .inj_mask(s_inj_mask));

  int EX_X [5][5] = '{'{1,2,0,4,0}, '{0,1,2,0,1}, '{0,3,0,1,0}, '{3,0,5,0,1}, '{0,0,1,2,0}};
  int EX_W [5][5] = '{'{0,3,3,0,1}, '{2,1,0,2,0}, '{1,0,0,1,2}, '{0,3,2,0,1}, '{0,0,4,0,0}};
  int EX_Y [5][5] = '{'{4,17,11,4,5}, '{4,1,4,14,4}, '{6,6,2,6,1}, '{5,9,13,5,13}, '{1,6,4,1,4}};

  always @(posedge clk) if (rst_n && s_y_valid) begin
    for (int j = 0; j < SN; j++)
      check(s_y_data[j] == EX_Y[s_y_row][j], $sformatf("example Y[%0d][%0d]=%0d", s_y_row, j, s_y_data[j]));
  end

  // ---------------- default-size instance ---------------------------------
  localparam int N = 32, M = 32;
  logic                      w_load;
  logic [4:0]                w_row;
  logic signed [N-1:0][7:0]  w_data;
  logic                      x_valid, x_ready;
  logic signed [N-1:0][7:0]  x_data;
  logic                      y_valid;
  logic [4:0]                y_row;
  logic signed [N-1:0][31:0] y_data;
  logic                      tile_done;
  logic [M-1:0]              row_flags;
  logic [N-1:0]              col_flags;
  logic                      inj_en;
  logic [4:0]                inj_row, inj_col;
  logic [31:0]               inj_mask;

  abft_wrapper u_big (.*);

  logic signed [7:0] W [N][N];
  logic signed [7:0] X [M][N];
  int  err_r [2], err_c [2];   // injected locations this tile (second may be -1)
  logic [31:0] err_m [2];

  always @(posedge clk) if (rst_n && y_valid) begin
    for (int j = 0; j < N; j++) begin
      int e; e = 0;
      for (int k = 0; k < N; k++) e += int'(X[y_row][k]) * int'(W[k][j]);
      for (int q = 0; q < 2; q++) if (err_r[q] == int'(y_row) && err_c[q] == j) e = e ^ int'(err_m[q]);
      checks++;
      if (y_data[j] != e) begin failures++; if (failures < 10) $display("Y[%0d][%0d]=%0d exp %0d", y_row, j, y_data[j], e); end
    end
  end

  // The wrapper has one injection port; a second error is made by moving the
  // port to the second location after the first error's row has left.
  bit phase;
  always @(posedge clk) if (y_valid && int'(y_row) == err_r[0]) phase <= 1;
  always_comb begin
    inj_en   = (err_m[phase] != 0);
    inj_row  = 5'(err_r[phase]);
    inj_col  = 5'(err_c[phase]);
    inj_mask = err_m[phase];
  end
  task automatic run_tile(input int r0, input int c0, input int b0, input int r1, input int c1, input int b1);
    int t_first, t_done;
    for (int m = 0; m < M; m++) for (int k = 0; k < N; k++) X[m][k] = 8'($urandom);
    err_r[0] = r0; err_c[0] = c0; err_m[0] = (b0 >= 0) ? (32'd1 << b0) : 0;
    err_r[1] = r1; err_c[1] = c1; err_m[1] = (b1 >= 0) ? (32'd1 << b1) : 0;
    phase = 0;
    for (int m = 0; m < M; m++) begin
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      if (m == 0) t_first = cyc;
      x_valid <= 1;
      for (int k = 0; k < N; k++) x_data[k] <= X[m][k];
    end
    @(posedge clk); x_valid <= 0;
    while (!tile_done) @(posedge clk);
    t_done = cyc;
    // flags
    begin
      logic [M-1:0] er; logic [N-1:0] ec;
      er = '0; ec = '0;
      for (int q = 0; q < 2; q++) if (err_r[q] >= 0 && err_m[q] != 0 && (q == 0 ? b0 : b1) >= 10) begin
        er[err_r[q]] = 1; ec[err_c[q]] = 1;
      end
      check(row_flags == er, $sformatf("row flags %h exp %h", row_flags, er));
      check(col_flags == ec, $sformatf("col flags %h exp %h", col_flags, ec));
    end
    check(t_done - (t_first + 1) == M + 2 + 2 * N,
          $sformatf("tile_done after %0d clocks, exp %0d", t_done - t_first - 1, M + 2 + 2 * N));
  endtask

  initial begin
    s_w_load = 0; s_w_row = 0; s_w_data = '0; s_x_valid = 0; s_x_data = '0;
    s_inj_en = 0; s_inj_row = 0; s_inj_col = 0; s_inj_mask = 0;
    w_load = 0; w_row = 0; w_data = '0; x_valid = 0; x_data = '0;
    err_r = '{-1, -1}; err_c = '{-1, -1}; err_m = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // ---- part 1 ----
    for (int k = 0; k < SN; k++) begin
      @(posedge clk);
      s_w_load <= 1; s_w_row <= 3'(k);
      for (int j = 0; j < SN; j++) s_w_data[j] <= 8'(EX_W[k][j]);
    end
    @(posedge clk); s_w_load <= 0;
    s_inj_en <= 1; s_inj_row <= 3'd1; s_inj_col <= 3'd3; s_inj_mask <= 32'd4 ^ 32'd14;
    for (int m = 0; m < SM; m++) begin
      @(posedge clk);
      s_x_valid <= 1;
      for (int k = 0; k < SN; k++) s_x_data[k] <= 8'(EX_X[m][k]);
    end
    @(posedge clk); s_x_valid <= 0;
    wait (s_tile_done);
    @(posedge clk);
    check(s_row_flags == 5'b00010, $sformatf("example row flags %b", s_row_flags));
    check(s_col_flags == 5'b01000, $sformatf("example col flags %b", s_col_flags));
    // ---- part 2 ----
    for (int k = 0; k < N; k++) for (int j = 0; j < N; j++) W[k][j] = 8'($urandom);
    for (int k = 0; k < N; k++) begin
      @(posedge clk);
      w_load <= 1; w_row <= 5'(k);
      for (int j = 0; j < N; j++) w_data[j] <= W[k][j];
    end
    @(posedge clk); w_load <= 0;
    run_tile(-1, -1, -1, -1, -1, -1);          // clean
    run_tile(7, 12, 10, -1, -1, -1);           // bit 10: at the threshold
    run_tile(0, 31, 30, -1, -1, -1);           // high bit
    run_tile(31, 0, 31, -1, -1, -1);           // sign bit
    run_tile(15, 3, 9, -1, -1, -1);            // bit 9: below the threshold
    run_tile(4, 9, 3, -1, -1, -1);             // low bit
    run_tile(3, 5, 20, 20, 17, 14);            // two large errors
    for (int t = 0; t < 4; t++) run_tile(int'($urandom_range(0, M-1)), int'($urandom_range(0, N-1)),
                                         int'($urandom_range(10, 31)), -1, -1, -1);
    repeat (5) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
