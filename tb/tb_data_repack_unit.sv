// tb_data_repack_unit: self-checking test of the checkpoint offload at its
// default size (64 arrays, 32 x 32 tiles). A behavioural two-slot SRAM is
// filled with random data, the unit offloads slot 1 of tile 5 and slot 0 of
// tile 6 into a DRAM model that stalls at random, and every DRAM word is
// compared with the SRAM row that belongs at the tile-contiguous address
// base + ((tile*64 + array)*32 + row)*128. Also checks the write count, that
// no other address was written and that each offload takes at least 2 clocks
// per row.
// Interface: start/slot/tile_id in, SRAM read port and DRAM write port
// (dram_model with stalls) out. Timing: waits for done, with a watchdog.
// The tile-contiguous layout follows the paper's repacking; the address
// formula and beat width are this design's.
module tb_data_repack_unit;
  localparam int NUM_SA = 64, N = 32, M = 32;
  localparam logic [drift_pkg::DRAM_ADDR_W-1:0] BASE = 'h1000_0000;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic start, slot, busy, done;
  logic [drift_pkg::TILE_ID_W-1:0] tile_id;
  logic sram_en;
  logic [5:0] sram_bank, sram_addr;
  logic [N-1:0][31:0] sram_rdata;
  logic dram_req_valid, dram_req_ready, rsp_valid;
  logic [drift_pkg::DRAM_ADDR_W-1:0] dram_req_addr;
  logic [N-1:0][31:0] dram_req_wdata, rsp_rdata;

  data_repack_unit #(.CKPT_BASE(BASE)) dut (.*);
  dram_model #(.N(N)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_we(1'b1), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(rsp_valid), .rsp_rdata(rsp_rdata));

  logic [N-1:0][31:0] sram [NUM_SA][2*M];
  always @(posedge clk) if (sram_en) sram_rdata <= sram[sram_bank][sram_addr];

  initial begin
    #20000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic offload(input int t, input bit s);
    int t0, ndone;
    @(posedge clk);
    start <= 1; slot <= s; tile_id <= drift_pkg::TILE_ID_W'(t);
    t0 = cyc;
    @(posedge clk); start <= 0;
    ndone = 0;
    while (!done) @(posedge clk);
    checks++;
    if (cyc - t0 < 2 * NUM_SA * M) begin failures++; $display("offload too fast: %0d", cyc - t0); end
    for (int a = 0; a < NUM_SA; a++)
      for (int m = 0; m < M; m++) begin
        logic [drift_pkg::DRAM_ADDR_W-1:0] ad;
        ad = BASE + drift_pkg::DRAM_ADDR_W'(((longint'(t) * NUM_SA + longint'(a)) * M + longint'(m)) * N * 4);
        checks++;
        if (u_dram.peek(ad) !== sram[a][int'(s) * M + m]) begin
          failures++;
          if (failures < 5) $display("tile %0d array %0d row %0d wrong at %h", t, a, m, ad);
        end
      end
  endtask

  initial begin
    start = 0; slot = 0; tile_id = 0;
    for (int a = 0; a < NUM_SA; a++) for (int r = 0; r < 2*M; r++) for (int j = 0; j < N; j++)
      sram[a][r][j] = $urandom;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    offload(5, 1'b1);
    offload(6, 1'b0);
    checks++;
    if (u_dram.n_writes != 2 * NUM_SA * M) begin failures++; $display("writes %0d", u_dram.n_writes); end
    checks++;
    if (u_dram.mem.num() != 2 * NUM_SA * M) begin failures++; $display("distinct addresses %0d", u_dram.mem.num()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
