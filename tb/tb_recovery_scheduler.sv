// tb_recovery_scheduler: self-checking test of the rollback repair at its
// default size (64 arrays, 32 x 32 tiles). A DRAM model is preloaded with a
// checkpoint at the tile-contiguous addresses and a behavioural SRAM with the
// "current" results. For several flag patterns (none, one error, two errors
// in one array, errors in several arrays, a row flag without a column flag)
// it checks that exactly the elements in the cross product of flagged rows
// and columns now hold the checkpoint value and all others are unchanged,
// that only the flagged rows were read from DRAM, and the statistics outputs.
// Interface: start/slot/tile_id with row/column flags of all arrays; DRAM
// read port (dram_model) and SRAM masked-write port. Timing: waits for done
// and checks rows_fetched/elems_fixed. The cross-combined mask follows the
// paper; one outstanding read and the row coalescing are this design's.
module tb_recovery_scheduler;
  localparam int NUM_SA = 64, N = 32, M = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, slot, busy, done;
  logic [drift_pkg::TILE_ID_W-1:0] tile_id;
  logic [NUM_SA-1:0][M-1:0] row_flags;
  logic [NUM_SA-1:0][N-1:0] col_flags;
  logic [15:0] rows_fetched, elems_fixed;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [drift_pkg::DRAM_ADDR_W-1:0] dram_req_addr;
  logic [N-1:0][31:0] dram_rsp_rdata;
  logic sram_en;
  logic [5:0] sram_bank, sram_addr;
  logic [N-1:0] sram_wmask;
  logic [N-1:0][31:0] sram_wdata;

  recovery_scheduler dut (.*);
  dram_model #(.N(N)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(1'b0), .req_addr(dram_req_addr), .req_wdata('0),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata));

  logic [N-1:0][31:0] sram [NUM_SA][2*M];
  logic [N-1:0][31:0] prev [NUM_SA][2*M];
  always @(posedge clk) if (sram_en)
    for (int j = 0; j < N; j++) if (sram_wmask[j]) sram[sram_bank][sram_addr][j] <= sram_wdata[j];

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic logic [drift_pkg::DRAM_ADDR_W-1:0] caddr(int t, int a, int m);
    return drift_pkg::DRAM_ADDR_W'(((longint'(t) * NUM_SA + longint'(a)) * M + longint'(m)) * N * 4);
  endfunction

  task automatic run(input int t, input bit s);
    int exp_rows, exp_elems, reads0;
    for (int a = 0; a < NUM_SA; a++) for (int r = 0; r < 2*M; r++) begin
      for (int j = 0; j < N; j++) sram[a][r][j] = $urandom;
      prev[a][r] = sram[a][r];
    end
    reads0 = u_dram.n_reads;
    @(posedge clk);
    start <= 1; slot <= s; tile_id <= drift_pkg::TILE_ID_W'(t);
    @(posedge clk); start <= 0;
    while (!done) @(posedge clk);
    @(posedge clk);
    exp_rows = 0; exp_elems = 0;
    for (int a = 0; a < NUM_SA; a++) begin
      if (|col_flags[a]) begin
        exp_rows += $countones(row_flags[a]);
        exp_elems += $countones(row_flags[a]) * $countones(col_flags[a]);
      end
      for (int m = 0; m < M; m++) for (int j = 0; j < N; j++) begin
        logic [31:0] e;
        e = (row_flags[a][m] && col_flags[a][j]) ? u_dram.peek(caddr(t, a, m))[j] : prev[a][int'(s)*M + m][j];
        checks++;
        if (sram[a][int'(s)*M + m][j] !== e) begin
          failures++;
          if (failures < 6) $display("array %0d (%0d,%0d) = %h exp %h", a, m, j, sram[a][int'(s)*M+m][j], e);
        end
      end
      // the other slot is never touched
      for (int m = 0; m < M; m++) begin
        checks++;
        if (sram[a][int'(!s)*M + m] !== prev[a][int'(!s)*M + m]) failures++;
      end
    end
    checks += 3;
    if (u_dram.n_reads - reads0 != exp_rows) begin failures++; $display("reads %0d exp %0d", u_dram.n_reads - reads0, exp_rows); end
    if (int'(rows_fetched) != exp_rows) begin failures++; $display("rows_fetched %0d exp %0d", rows_fetched, exp_rows); end
    if (int'(elems_fixed) != exp_elems) begin failures++; $display("elems_fixed %0d exp %0d", elems_fixed, exp_elems); end
  endtask

  initial begin
    start = 0; slot = 0; tile_id = 0; row_flags = '0; col_flags = '0;
    for (int t = 0; t < 4; t++) for (int a = 0; a < NUM_SA; a++) for (int m = 0; m < M; m++) begin
      logic [N-1:0][31:0] d;
      for (int j = 0; j < N; j++) d[j] = $urandom;
      u_dram.poke(caddr(t, a, m), d);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // nothing flagged
    run(0, 0);
    // one error
    row_flags[3][7] = 1; col_flags[3][12] = 1;
    run(1, 1);
    // two errors in one array: 2x2 mask
    row_flags = '0; col_flags = '0;
    row_flags[10][2] = 1; row_flags[10][30] = 1; col_flags[10][0] = 1; col_flags[10][31] = 1;
    run(2, 0);
    // several arrays, plus a row flag with no column flag (not repaired)
    row_flags = '0; col_flags = '0;
    row_flags[0][0] = 1; col_flags[0][5] = 1;
    row_flags[63][31] = 1; col_flags[63][16] = 1;
    row_flags[20][9] = 1;
    row_flags[40][4] = 1; row_flags[40][5] = 1; col_flags[40][8] = 1;
    run(3, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
