// abft_wrapper: systolic array wrapped with algorithm-based fault tolerance
// (ABFT) that reports which rows and columns of an output tile carry an error
// larger than a threshold.
//
// A tile is Y = X * W with X of M rows and W of N x N. The wrapper adds three
// things around the array, as in the paper's architecture figure:
//  * weight checksums: while row k of W loads, an adder tree forms
//    sum_j W[k][j] and loads it into the array's checksum column, so every
//    output row comes with its predicted row sum;
//  * activation checksums: an accumulator per array row adds up X[m][k] over
//    the M rows of the tile. After the M-th row the accumulated row (the
//    column-checksum row of X) is pushed through the array, which yields the
//    predicted column sums of Y. Because the multipliers are 8 bits wide the
//    sum is sent as two rows, its low 7 bits (unsigned) and the rest (signed),
//    and recombined as hi*128 + lo;
//  * checkers: each output row is summed and compared with its predicted sum,
//    and each output column is accumulated over the tile and compared with the
//    predicted column sum. A row or column is flagged when the absolute
//    difference is at least 2**THETA_BIT.
// The checksum principle, the threshold at the 10th bit and the place of the
// checksum column follow the paper; the two-row split of the activation
// checksum, the adder tree for the row sums and the handshake are this
// design's choices.
//
// Interface and timing: x_ready is low for the two clocks that follow the M-th
// row of a tile, while the checksum rows are injected. Output rows leave on
// y_valid with their index y_row, 2N clocks after they entered. tile_done
// pulses one clock after the last checksum row leaves the array, that is
// M + 2 + 2N clocks after the first row of a gapless tile entered, and
// row_flags/col_flags hold the result until the next tile_done.
// inj_* XOR a mask into one INT32 output element as it leaves the array
// (a model of a timing error: the paper's error model flips bits of the
// INT32 GEMM output); the corrupted value is what y_data carries and what the
// checkers see.
module abft_wrapper #(
  parameter int unsigned N         = 32,
  parameter int unsigned M         = 32,
  parameter int unsigned ACC_W     = 32,
  parameter int unsigned THETA_BIT = 10
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // weights
  input  logic                           w_load,
  input  logic [$clog2(N)-1:0]           w_row,
  input  logic signed [N-1:0][7:0]       w_data,
  // activations
  input  logic                           x_valid,
  output logic                           x_ready,
  input  logic signed [N-1:0][7:0]       x_data,
  // results
  output logic                           y_valid,
  output logic [$clog2(M)-1:0]           y_row,
  output logic signed [N-1:0][ACC_W-1:0] y_data,
  // ABFT verdict of the last tile
  output logic                           tile_done,
  output logic [M-1:0]                   row_flags,
  output logic [N-1:0]                   col_flags,
  // fault injection (timing-error model)
  input  logic                           inj_en,
  input  logic [$clog2(M)-1:0]           inj_row,
  input  logic [$clog2(N)-1:0]           inj_col,
  input  logic [ACC_W-1:0]               inj_mask
);
  localparam int unsigned CHKW_W = 8 + $clog2(N) + 1;
  localparam int unsigned CSW    = ACC_W + $clog2(N) + 2;
  localparam int unsigned XSW    = 8 + $clog2(M) + 1;    // sum of X over M rows
  localparam int unsigned MW     = $clog2(M);
  localparam logic [CSW-1:0] THETA = CSW'(1) << THETA_BIT;

  initial begin
    assert (M <= 128) else $error("abft_wrapper: M must be <= 128 for the 2-row checksum split");
    assert (THETA_BIT < CSW - 1) else $error("abft_wrapper: THETA_BIT too large");
  end

  // ---------------- weight checksum (adder tree) ---------------------------
  logic signed [CHKW_W-1:0] w_chk;
  always_comb begin
    w_chk = '0;
    for (int j = 0; j < N; j++) w_chk += CHKW_W'($signed(w_data[j]));
  end

  // ---------------- activation checksum and injection ----------------------
  typedef enum logic [1:0] {IN_DATA, IN_LO, IN_HI} in_state_e;
  in_state_e                    in_st;
  logic [MW:0]                  in_cnt;
  logic signed [XSW-1:0]        xsum [N];
  logic                         a_valid;
  logic signed [N-1:0][7:0]     a_data;

  assign x_ready = (in_st == IN_DATA);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_st  <= IN_DATA;
      in_cnt <= '0;
      for (int k = 0; k < N; k++) xsum[k] <= '0;
    end else begin
      unique case (in_st)
        IN_DATA: if (x_valid) begin
          for (int k = 0; k < N; k++) xsum[k] <= xsum[k] + XSW'($signed(x_data[k]));
          if (in_cnt == (MW+1)'(M - 1)) begin
            in_cnt <= '0;
            in_st  <= IN_LO;
          end else begin
            in_cnt <= in_cnt + 1'b1;
          end
        end
        IN_LO: in_st <= IN_HI;
        IN_HI: begin
          in_st <= IN_DATA;
          for (int k = 0; k < N; k++) xsum[k] <= '0;
        end
        default: in_st <= IN_DATA;
      endcase
    end
  end

  always_comb begin
    a_valid = 1'b0;
    a_data  = x_data;
    unique case (in_st)
      IN_DATA: a_valid = x_valid;
      IN_LO: begin
        a_valid = 1'b1;
        for (int k = 0; k < N; k++) a_data[k] = {1'b0, xsum[k][6:0]};
      end
      IN_HI: begin
        a_valid = 1'b1;
        for (int k = 0; k < N; k++) a_data[k] = 8'(xsum[k] >>> 7);
      end
      default: ;
    endcase
  end

  // ---------------- the array ----------------------------------------------
  logic                           s_valid;
  logic signed [N-1:0][ACC_W-1:0] s_data;
  logic signed [CSW-1:0]          s_chk;

  systolic_array #(.N(N), .ACC_W(ACC_W), .CHKW_W(CHKW_W), .CSW(CSW)) u_sa (
    .clk     (clk),
    .rst_n   (rst_n),
    .w_load  (w_load),
    .w_row   (w_row),
    .w_data  (w_data),
    .w_chk   (w_chk),
    .x_valid (a_valid),
    .x_data  (a_data),
    .y_valid (s_valid),
    .y_data  (s_data),
    .y_chk   (s_chk)
  );

  // ---------------- output side ---------------------------------------------
  // Output rows come out in the order they went in: M data rows, then the
  // low and the high checksum row.
  logic [MW+1:0] out_cnt;     // 0..M+1
  logic          out_is_data, out_is_lo, out_is_hi;
  logic signed [N-1:0][ACC_W-1:0] o_data;

  assign out_is_data = s_valid && (out_cnt < (MW+2)'(M));
  assign out_is_lo   = s_valid && (out_cnt == (MW+2)'(M));
  assign out_is_hi   = s_valid && (out_cnt == (MW+2)'(M + 1));

  always_comb begin
    o_data = s_data;
    if (inj_en && out_is_data && (out_cnt[MW-1:0] == inj_row))
      o_data[inj_col] = s_data[inj_col] ^ inj_mask;
  end

  assign y_valid = out_is_data;
  assign y_row   = out_cnt[MW-1:0];
  assign y_data  = o_data;

  // row check: adder tree over the output row against the checksum column
  logic signed [CSW-1:0] row_sum, row_diff;
  logic                  row_err;
  always_comb begin
    row_sum = '0;
    for (int j = 0; j < N; j++) row_sum += CSW'($signed(o_data[j]));
    row_diff = row_sum - s_chk;
    row_err  = (row_diff >= $signed(THETA)) || (row_diff <= -$signed(THETA));
  end

  // column check: accumulate each column over the tile
  logic signed [CSW-1:0] col_acc [N];
  logic signed [CSW-1:0] col_lo  [N];
  logic [N-1:0]          col_err;
  always_comb begin
    for (int j = 0; j < N; j++) begin
      logic signed [CSW-1:0] pred, diff;
      pred = (CSW'($signed(s_data[j])) <<< 7) + col_lo[j];
      diff = col_acc[j] - pred;
      col_err[j] = (diff >= $signed(THETA)) || (diff <= -$signed(THETA));
    end
  end

  logic [M-1:0] row_flags_w;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_cnt     <= '0;
      row_flags_w <= '0;
      row_flags   <= '0;
      col_flags   <= '0;
      tile_done   <= 1'b0;
      for (int j = 0; j < N; j++) begin
        col_acc[j] <= '0;
        col_lo[j]  <= '0;
      end
    end else begin
      tile_done <= 1'b0;
      if (s_valid) out_cnt <= out_is_hi ? '0 : out_cnt + 1'b1;
      if (out_is_data) begin
        row_flags_w[out_cnt[MW-1:0]] <= row_err;
        for (int j = 0; j < N; j++) col_acc[j] <= col_acc[j] + CSW'($signed(o_data[j]));
      end
      if (out_is_lo)
        for (int j = 0; j < N; j++) col_lo[j] <= CSW'($signed(s_data[j]));
      if (out_is_hi) begin
        row_flags <= row_flags_w;
        col_flags <= col_err;
        tile_done <= 1'b1;
        for (int j = 0; j < N; j++) col_acc[j] <= '0;
      end
    end
  end

  // the checksum column output of the two checksum rows (grand total) is not
  // needed by the checkers
endmodule
