// systolic_array: N x N weight-stationary INT8 systolic array with one extra
// checksum column, the compute unit of the DRIFT accelerator.
//
// PE(k,j) holds W[k][j]. Activation row X[m][*] enters on the left (element k
// into array row k), moves right one PE per clock, and partial sums move down,
// so column j produces Y[m][j] = sum_k X[m][k]*W[k][j] at its bottom. Input
// skew registers delay element k by k clocks and output deskew registers
// delay column j by N-j clocks, so a whole row goes in and a whole row comes
// out on one clock each: y_valid/y_data follow x_valid/x_data by exactly
// LATENCY = 2N clocks, one row per clock, with no stall.
//
// Column N is the ABFT checksum column drawn in the paper's architecture
// figure (labelled with sums of W): its PEs hold w_chk[k] = sum_j W[k][j],
// which the ABFT wrapper computes while the weights load, so y_chk is the
// predicted row sum sum_j Y[m][j] computed independently of the N ordinary
// columns. The 8-bit multipliers and 32-bit accumulators follow the paper;
// the skew/deskew arrangement, the wider checksum column and the row-by-row
// weight load (one row per w_load pulse, only between tiles) are choices of
// this design.
module systolic_array #(
  parameter int unsigned N      = 32,
  parameter int unsigned ACC_W  = 32,
  parameter int unsigned CHKW_W = 8 + $clog2(N) + 1,  // width of sum_j W[k][j]
  parameter int unsigned CSW    = ACC_W + $clog2(N) + 2 // checksum accumulator width
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weight load: row k of W plus its checksum
  input  logic                           w_load,
  input  logic [$clog2(N)-1:0]           w_row,
  input  logic signed [N-1:0][7:0]       w_data,
  input  logic signed [CHKW_W-1:0]       w_chk,
  // activation rows
  input  logic                           x_valid,
  input  logic signed [N-1:0][7:0]       x_data,
  // result rows
  output logic                           y_valid,
  output logic signed [N-1:0][ACC_W-1:0] y_data,
  output logic signed [CSW-1:0]          y_chk
);
  localparam int unsigned LATENCY = 2 * N;

  // activations entering each PE row after the skew, and between PEs
  logic signed [7:0]       x_h   [N][N+2];
  logic signed [ACC_W-1:0] ps_v  [N+1][N];
  logic signed [CSW-1:0]   psc_v [N+1];

  // ---------------- input skew: element k delayed by k clocks -------------
  for (genvar k = 0; k < N; k++) begin : g_skew
    if (k == 0) begin : g_nodly
      assign x_h[0][0] = x_data[0];
    end else begin : g_dly
      logic signed [7:0] sk [k];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int i = 0; i < k; i++) sk[i] <= '0;
        end else begin
          sk[0] <= x_data[k];
          for (int i = 1; i < k; i++) sk[i] <= sk[i-1];
        end
      end
      assign x_h[k][0] = sk[k-1];
    end
  end

  // ---------------- PE grid ------------------------------------------------
  for (genvar j = 0; j < N; j++) begin : g_top
    assign ps_v[0][j] = '0;
  end
  assign psc_v[0] = '0;

  for (genvar k = 0; k < N; k++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      sa_pe #(.XW(8), .WW(8), .AW(ACC_W)) u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_we     (w_load && (w_row == k)),
        .w_in     (w_data[j]),
        .x_in     (x_h[k][j]),
        .psum_in  (ps_v[k][j]),
        .x_out    (x_h[k][j+1]),
        .psum_out (ps_v[k+1][j])
      );
    end
    // checksum column
    sa_pe #(.XW(8), .WW(CHKW_W), .AW(CSW)) u_chk_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .w_we     (w_load && (w_row == k)),
      .w_in     (w_chk),
      .x_in     (x_h[k][N]),
      .psum_in  (psc_v[k]),
      .x_out    (x_h[k][N+1]),
      .psum_out (psc_v[k+1])
    );
  end

  // ---------------- output deskew: column j delayed by N-j clocks ---------
  for (genvar j = 0; j < N; j++) begin : g_deskew
    logic signed [ACC_W-1:0] dq [N-j];
    always_ff @(posedge clk) begin
      if (!rst_n) begin
        for (int i = 0; i < int'(N - j); i++) dq[i] <= '0;
      end else begin
        dq[0] <= ps_v[N][j];
        for (int i = 1; i < int'(N - j); i++) dq[i] <= dq[i-1];
      end
    end
    assign y_data[j] = dq[N-j-1];
  end
  assign y_chk = psc_v[N];

  // ---------------- valid pipeline ----------------------------------------
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], x_valid};
  end
  assign y_valid = vpipe[LATENCY-1];

  // x_h[k][N+1] leaves the array unused (activations are not forwarded on).
endmodule
