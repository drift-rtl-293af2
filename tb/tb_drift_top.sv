// tb_drift_top: end-to-end test of the DRIFT accelerator at reduced size
// (4 arrays of 8 x 8, 8-row tiles, checkpoint every 3 timesteps, BER window
// of 2 tiles, more than 1 error per window counts as high).
// It runs a short "denoising loop": the embedding GEMM, then
// timesteps 0..8 with two GEMM tiles each, alternating between waiting for
// each result and issuing two commands back to back. Timing errors are
// injected through the fault port: large ones (bit >= THETA_BIT, one or two
// per tile) and small ones (below the threshold).
// Independent reference: Y = X*W per array; an element inside the correction
// mask (flagged row x flagged column) must afterwards hold the checkpoint
// value that the DRAM model held for it when the command was issued; a small
// error must survive unrepaired. After every checkpoint step the DRAM copy of
// each tile must equal the final SRAM contents at the repacked address.
// It also checks the DVFS point of every command, and counts each mechanism:
// V/f change stalls, nominal and aggressive commands, repairs, false-positive
// repairs, undetected small errors, checkpoints, compute overlapping post-
// processing, hand-over stalls, and BER-driven trims up and down; a mechanism
// that never happens counts as a failure.
// Timing: a watchdog stops the run; every command is waited for through
// cmd_ready and res_done. The mechanisms (nominal/aggressive points, repair,
// checkpoint at the interval, overlap of recovery with the next GEMM) follow
// the paper; the reduced sizes and the random workload are this testbench's own.
module tb_drift_top;
  import drift_pkg::*;
  localparam int NUM_SA = 4, N = 8, M = 8, THETA_BIT = 10, CKPT = 3, WIN = 2;
  localparam int BW = 2, AW = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  aggr_mode_e cfg_mode;
  logic cmd_valid, cmd_ready, cmd_is_embedding;
  logic [15:0] cmd_timestep;
  logic [drift_pkg::TILE_ID_W-1:0] cmd_tile_id;
  logic w_load; logic [BW-1:0] w_sa; logic [2:0] w_row; logic [N-1:0][7:0] w_data;
  logic x_valid, x_ready; logic [N-1:0][7:0] x_data;
  op_point_t op; logic vf_req, vf_ack;
  logic dram_req_valid, dram_req_ready, dram_req_we, dram_rsp_valid;
  logic [drift_pkg::DRAM_ADDR_W-1:0] dram_req_addr;
  logic [N-1:0][31:0] dram_req_wdata, dram_rsp_rdata;
  logic res_done, res_slot, post_idle, rd_en, nominal_sel;
  logic [drift_pkg::TILE_ID_W-1:0] res_tile_id;
  logic [BW-1:0] rd_bank; logic [AW-1:0] rd_addr; logic [N-1:0][31:0] rd_data;
  logic [15:0] err_count, rec_rows, rec_elems;
  logic hand_stall;
  logic inj_en; logic [BW-1:0] inj_sa; logic [2:0] inj_row, inj_col; logic [31:0] inj_mask;

  drift_top #(.NUM_SA(NUM_SA), .N(N), .M(M), .THETA_BIT(THETA_BIT), .CKPT_INTERVAL(CKPT),
              .WINDOW_TILES(WIN), .HI_ERR(1)) dut (.*);

  dram_model #(.N(N)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(dram_req_we), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  // LDO + ADPLL model: settle 6 clocks after a request
  int vf_wait = 0, n_vf = 0;
  always @(posedge clk) begin
    vf_ack <= 0;
    if (vf_req && !vf_ack) begin
      vf_wait <= vf_wait + 1;
      if (vf_wait == 5) begin vf_ack <= 1; vf_wait <= 0; n_vf++; end
    end
  end

  initial begin
    #400000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_nominal = 0, n_aggr = 0, n_repair = 0, n_false_pos = 0, n_small = 0, n_ckpt = 0;
  int n_overlap = 0, n_hand_stall = 0, n_trim_up = 0, n_trim_dn = 0;
  always @(posedge clk) if (rst_n) begin
    if (x_ready && !post_idle) n_overlap++;
    if (hand_stall) n_hand_stall++;
  end

  logic signed [7:0] W [NUM_SA][N][N];
  typedef logic [N-1:0][31:0] row_t;
  row_t exp_res [2][NUM_SA][M];       // expected final tile per slot
  bit   pending_slot [2];
  int   slot_tile [2];
  int   slot_tstep [2];
  int   acc_cyc [M];

  function automatic logic [drift_pkg::DRAM_ADDR_W-1:0] caddr(int t, int a, int m);
    return drift_pkg::DRAM_ADDR_W'(((longint'(t) * NUM_SA + longint'(a)) * M + longint'(m)) * N * 4);
  endfunction

  // issue one command and stream its rows; errs: list of (a, r, c, bit)
  int next_slot = 0;
  task automatic issue(input int tstep, input bit emb, input int tile, input int nerr,
                       input int ea [2], input int er [2], input int ec [2], input int eb [2]);
    logic signed [7:0] X [M][N];
    int s;
    bit masked_r [NUM_SA][M], masked_c [NUM_SA][N];
    int exp_v, exp_f; bit exp_nom;
    s = next_slot; next_slot ^= 1;
    for (int m = 0; m < M; m++) for (int k = 0; k < N; k++) X[m][k] = 8'($urandom);
    for (int a = 0; a < NUM_SA; a++) begin
      for (int m = 0; m < M; m++) masked_r[a][m] = 0;
      for (int j = 0; j < N; j++) masked_c[a][j] = 0;
    end
    for (int e = 0; e < nerr; e++) if (eb[e] >= THETA_BIT) begin
      masked_r[ea[e]][er[e]] = 1; masked_c[ea[e]][ec[e]] = 1;
    end
    // expected values
    for (int a = 0; a < NUM_SA; a++) for (int m = 0; m < M; m++) begin
      row_t ck;
      ck = u_dram.peek(caddr(tile, a, m));
      for (int j = 0; j < N; j++) begin
        int y; y = 0;
        for (int k = 0; k < N; k++) y += int'(X[m][k]) * int'(W[a][k][j]);
        for (int e = 0; e < nerr; e++) if (ea[e] == a && er[e] == m && ec[e] == j) y = y ^ (1 << eb[e]);
        if (masked_r[a][m] && masked_c[a][j]) begin
          bit real_err; real_err = 0;
          for (int e = 0; e < nerr; e++) if (ea[e] == a && er[e] == m && ec[e] == j) real_err = 1;
          if (!real_err) n_false_pos++;
          y = int'(ck[j]);
        end
        exp_res[s][a][m][j] = 32'(y);
      end
    end
    for (int e = 0; e < nerr; e++) if (eb[e] < THETA_BIT) n_small++; else n_repair++;
    // command
    while (!cmd_ready) @(posedge clk);
    cmd_valid <= 1; cmd_timestep <= 16'(tstep); cmd_is_embedding <= emb; cmd_tile_id <= drift_pkg::TILE_ID_W'(tile);
    @(posedge clk); cmd_valid <= 0;
    // operating point
    exp_nom = emb || tstep < 2;
    @(posedge clk); #1;
    checks += 2;
    if (nominal_sel != exp_nom) begin failures++; $display("nominal_sel wrong at t=%0d", tstep); end
    if (exp_nom) begin
      n_nominal++;
      if (op.vdd_mv != 900 || op.freq_mhz != 2000) begin failures++; $display("op %0d/%0d at nominal", op.vdd_mv, op.freq_mhz); end
    end else begin
      n_aggr++;
      if (op.freq_mhz != 2000 || op.vdd_mv < 640 || op.vdd_mv > 900) begin failures++; $display("op %0d/%0d aggressive", op.vdd_mv, op.freq_mhz); end
      if (op.vdd_mv > 680) n_trim_up++;
      if (op.vdd_mv < 680) n_trim_dn++;
    end
    // rows (driven on the falling edge, accepted on the next rising edge),
    // with the errors armed one after another
    for (int m = 0; m < M; m++) acc_cyc[m] = -1;
    fork
      begin
        int m; m = 0;
        while (m < M) begin
          @(negedge clk);
          if (x_ready) begin
            x_valid = 1;
            for (int k = 0; k < N; k++) x_data[k] = X[m][k];
            acc_cyc[m] = cyc;
            m++;
          end else x_valid = 0;
        end
        @(negedge clk); x_valid = 0;
      end
      begin
        for (int e = 0; e < nerr; e++) begin
          @(negedge clk);
          inj_en = 1; inj_sa = BW'(ea[e]); inj_row = 3'(er[e]); inj_col = 3'(ec[e]);
          inj_mask = 32'd1 << eb[e];
          // the row leaves the array 2N clocks after it entered
          while (acc_cyc[er[e]] < 0 || cyc < acc_cyc[er[e]] + 2 * N + 2) @(negedge clk);
        end
        @(negedge clk); inj_en = 0;
      end
    join
    pending_slot[s] = 1; slot_tile[s] = tile; slot_tstep[s] = tstep;
  endtask

  // wait for results of everything issued, then check both slots
  task automatic drain_and_check();
    while (!(cmd_ready && post_idle)) @(posedge clk);
    repeat (2) @(posedge clk);
    for (int s = 0; s < 2; s++) if (pending_slot[s]) begin
      for (int a = 0; a < NUM_SA; a++) for (int m = 0; m < M; m++) begin
        @(posedge clk);
        rd_en <= 1; rd_bank <= BW'(a); rd_addr <= AW'(s * M + m);
        @(posedge clk); rd_en <= 0;
        #1;
        checks++;
        if (rd_data !== exp_res[s][a][m]) begin
          failures++;
          if (failures < 8) for (int j = 0; j < N; j++) if (rd_data[j] !== exp_res[s][a][m][j])
            $display("t=%0d tile %0d array %0d (%0d,%0d): %0d exp %0d", slot_tstep[s], slot_tile[s], a, m, j,
                     $signed(rd_data[j]), $signed(exp_res[s][a][m][j]));
        end
        if (slot_tstep[s] % CKPT == 0) begin
          checks++;
          if (u_dram.peek(caddr(slot_tile[s], a, m)) !== rd_data) begin
            failures++; $display("checkpoint of tile %0d array %0d row %0d wrong", slot_tile[s], a, m);
          end
        end
      end
      if (slot_tstep[s] % CKPT == 0) n_ckpt++;
      pending_slot[s] = 0;
    end
  endtask

  int ea [2], er [2], ec [2], eb [2];
  initial begin
    cfg_mode = AGGR_UNDERVOLT;
    cmd_valid = 0; cmd_timestep = 0; cmd_is_embedding = 0; cmd_tile_id = 0;
    w_load = 0; w_sa = 0; w_row = 0; w_data = '0; x_valid = 0; x_data = '0;
    rd_en = 0; rd_bank = 0; rd_addr = 0;
    inj_en = 0; inj_sa = 0; inj_row = 0; inj_col = 0; inj_mask = 0;
    pending_slot = '{0, 0};
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int a = 0; a < NUM_SA; a++) for (int k = 0; k < N; k++) begin
      logic [N-1:0][7:0] wr;
      for (int j = 0; j < N; j++) begin W[a][k][j] = 8'($urandom); wr[j] = W[a][k][j]; end
      w_load <= 1; w_sa <= BW'(a); w_row <= 3'(k); w_data <= wr;
      @(posedge clk);
    end
    w_load <= 0;
    // embedding (nominal), tile 7
    issue(0, 1, 7, 0, ea, er, ec, eb);
    drain_and_check();
    for (int t = 0; t <= 8; t++) begin
      for (int tile = 0; tile < 2; tile++) begin
        int nerr;
        nerr = 0;
        if (t >= 1) begin
          // one large error most steps, two in one array at t=4 and t=7,
          // errors in many steps early to drive the BER trim up
          nerr = 1;
          ea[0] = int'($urandom_range(0, NUM_SA-1)); er[0] = int'($urandom_range(0, M-4));
          ec[0] = int'($urandom_range(0, N-1));     eb[0] = int'($urandom_range(THETA_BIT, 30));
          if (t == 4 || t == 7) begin
            nerr = 2; ea[1] = ea[0]; er[1] = er[0] + 3; ec[1] = (ec[0] + 5) % N;
            eb[1] = int'($urandom_range(THETA_BIT, 30));
          end
          if (t == 5) eb[0] = int'($urandom_range(0, THETA_BIT-1));      // small: tolerated
          if (t >= 6 && tile == 1) nerr = 0;                             // quiet tail: trim down
        end
        issue(t, 0, tile, nerr, ea, er, ec, eb);
        if (t % 2 == 0) drain_and_check();   // odd steps: two commands back to back
      end
      if (t % 2 == 1) drain_and_check();
    end
    // a few quiet steps so the monitor sees low error counts
    for (int t = 9; t <= 14; t++) begin
      issue(t, 0, 0, 0, ea, er, ec, eb);
      drain_and_check();
    end
    $display("mechanisms: vf_changes=%0d nominal=%0d aggressive=%0d repairs=%0d false_pos=%0d small_kept=%0d ckpts=%0d overlap=%0d hand_stall=%0d trim_up=%0d trim_dn=%0d",
             n_vf, n_nominal, n_aggr, n_repair, n_false_pos, n_small, n_ckpt, n_overlap, n_hand_stall, n_trim_up, n_trim_dn);
    checks += 11;
    if (n_vf == 0) failures++;
    if (n_nominal == 0) failures++;
    if (n_aggr == 0) failures++;
    if (n_repair == 0) failures++;
    if (n_false_pos == 0) failures++;
    if (n_small == 0) failures++;
    if (n_ckpt == 0) failures++;
    if (n_overlap == 0) failures++;
    if (n_hand_stall == 0) failures++;
    if (n_trim_up == 0) failures++;
    if (n_trim_dn == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
