// tb_drift_top_full: the accelerator at its default size (64 arrays of
// 32 x 32, 32-row tiles, threshold 2**10, checkpoint every 10 steps) taken
// through one complete rollback cycle. It loads random weights into all 64
// arrays, runs tile 0 at timestep 0 (nominal point, no errors, checkpoint
// written), then tile 0 again at timestep 10 (undervolted point) with a
// bit-20 error injected into array 37 at (5, 9). Checks: every output
// element against a behavioural GEMM, the corrupted element restored to its
// timestep-0 value, both checkpoints in DRAM at the tile-contiguous
// addresses, the operating points, and the repair statistics.
// Interface: the top's ports with no parameter overrides, dram_model behind
// the DRAM port, vf_ack answered after a few clocks. Timing: watchdog, waits
// on cmd_ready/res_done. Sizes follow the paper; the scenario is this testbench's own.
module tb_drift_top_full;
  import drift_pkg::*;
  localparam int NUM_SA = 64, N = 32, M = 32;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  aggr_mode_e cfg_mode;
  logic cmd_valid, cmd_ready, cmd_is_embedding;
  logic [15:0] cmd_timestep;
  logic [drift_pkg::TILE_ID_W-1:0] cmd_tile_id;
  logic w_load; logic [5:0] w_sa; logic [4:0] w_row; logic [N-1:0][7:0] w_data;
  logic x_valid, x_ready; logic [N-1:0][7:0] x_data;
  op_point_t op; logic vf_req, vf_ack;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [drift_pkg::DRAM_ADDR_W-1:0] dram_req_addr;
  logic [N-1:0][31:0] dram_req_wdata, dram_rsp_rdata;
  logic res_done, res_slot, post_idle, rd_en, nominal_sel, hand_stall;
  logic [drift_pkg::TILE_ID_W-1:0] res_tile_id;
  logic [5:0] rd_bank; logic [5:0] rd_addr; logic [N-1:0][31:0] rd_data;
  logic [15:0] err_count, rec_rows, rec_elems;
  logic inj_en; logic [5:0] inj_sa; logic [4:0] inj_row, inj_col; logic [31:0] inj_mask;

  drift_top dut (.*);

  dram_model #(.N(N)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  always @(posedge clk) vf_ack <= vf_req && !vf_ack;

  initial begin
    #50000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic signed [7:0] W [NUM_SA][N][N];
  logic signed [7:0] X [M][N];
  int Y0 [NUM_SA][M][N];     // results of timestep 0

  function automatic logic [drift_pkg::DRAM_ADDR_W-1:0] caddr(int t, int a, int m);
    return drift_pkg::DRAM_ADDR_W'(((longint'(t) * NUM_SA + longint'(a)) * M + longint'(m)) * N * 4);
  endfunction

  task automatic run(input int tstep, input bit inject);
    for (int m = 0; m < M; m++) for (int k = 0; k < N; k++) X[m][k] = 8'($urandom);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd_valid = 1; cmd_timestep = 16'(tstep); cmd_is_embedding = 0; cmd_tile_id = '0;
    inj_en = inject; inj_sa = 6'd37; inj_row = 5'd5; inj_col = 5'd9; inj_mask = 32'd1 << 20;
    @(negedge clk); cmd_valid = 0;
    for (int m = 0; m < M; ) begin
      @(negedge clk);
      if (x_ready) begin
        x_valid = 1;
        for (int k = 0; k < N; k++) x_data[k] = X[m][k];
        m++;
      end else x_valid = 0;
    end
    @(negedge clk); x_valid = 0;
    while (!res_done) @(negedge clk);
    inj_en = 0;
    checks += 2;
    if (tstep < 2 ? (op.vdd_mv != 900) : (op.vdd_mv != 680)) begin failures++; $display("vdd %0d", op.vdd_mv); end
    if (op.freq_mhz != 2000) begin failures++; $display("freq %0d", op.freq_mhz); end
    // read back and compare
    for (int a = 0; a < NUM_SA; a++) for (int m = 0; m < M; m++) begin
      logic [N-1:0][31:0] got;
      @(negedge clk);
      rd_en = 1; rd_bank = 6'(a); rd_addr = {res_slot, 5'(m)};
      @(negedge clk); rd_en = 0;
      got = rd_data;
      for (int j = 0; j < N; j++) begin
        int y; y = 0;
        for (int k = 0; k < N; k++) y += int'(X[m][k]) * int'(W[a][k][j]);
        if (inject && a == 37 && m == 5 && j == 9) y = Y0[a][m][j];   // rolled back
        if (!inject) Y0[a][m][j] = y;
        checks++;
        if (got[j] !== 32'(y)) begin
          failures++;
          if (failures < 6) $display("t=%0d array %0d (%0d,%0d): %0d exp %0d", tstep, a, m, j, $signed(got[j]), y);
        end
      end
      checks++;
      if (u_dram.peek(caddr(0, a, m)) !== got) begin failures++; $display("checkpoint array %0d row %0d", a, m); end
    end
  endtask

  initial begin
    cfg_mode = AGGR_UNDERVOLT;
    cmd_valid = 0; cmd_timestep = 0; cmd_is_embedding = 0; cmd_tile_id = 0;
    w_load = 0; w_sa = 0; w_row = 0; w_data = '0; x_valid = 0; x_data = '0;
    rd_en = 0; rd_bank = 0; rd_addr = 0;
    inj_en = 0; inj_sa = 0; inj_row = 0; inj_col = 0; inj_mask = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NUM_SA; a++) for (int k = 0; k < N; k++) begin
      @(negedge clk);
      for (int j = 0; j < N; j++) begin W[a][k][j] = 8'($urandom); w_data[j] = W[a][k][j]; end
      w_load = 1; w_sa = 6'(a); w_row = 5'(k);
    end
    @(negedge clk); w_load = 0;
    run(0, 0);
    checks += 1;
    if (u_dram.n_writes != NUM_SA * M) begin failures++; $display("writes %0d", u_dram.n_writes); end
    run(10, 1);
    checks += 3;
    if (rec_rows != 1) begin failures++; $display("rec_rows %0d", rec_rows); end
    if (rec_elems != 1) begin failures++; $display("rec_elems %0d", rec_elems); end
    if (u_dram.n_reads != 1 || u_dram.n_writes != 2 * NUM_SA * M) begin
      failures++; $display("dram reads %0d writes %0d", u_dram.n_reads, u_dram.n_writes);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
