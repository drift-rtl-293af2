// tb_sram_buffer: self-checking test of the banked two-port result buffer at
// its default size (64 banks x 64 words x 32 INT32). Writes random rows on
// port A into all banks at once, reads them back on port B with the one-clock
// read latency, then checks that element-masked writes on port B change only
// the masked elements, against a behavioural copy.
// Interface: drives port A (a_we/a_addr/a_wdata) and port B
// (b_en/b_we/b_bank/b_addr/b_wmask/b_wdata, b_rdata one clock later).
// Timing: read data is checked on the clock after b_en. The two-slot,
// two-port organisation is this design's choice; the paper names the buffer.
module tb_sram_buffer;
  localparam int NUM_SA = 64, N = 32, DEPTH = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NUM_SA-1:0]                a_we;
  logic [5:0]                       a_addr;
  logic [NUM_SA-1:0][N-1:0][31:0]   a_wdata;
  logic                             b_en, b_we;
  logic [5:0]                       b_bank, b_addr;
  logic [N-1:0]                     b_wmask;
  logic [N-1:0][31:0]               b_wdata, b_rdata;

  sram_buffer dut (.*);

  logic [N-1:0][31:0] ref_mem [NUM_SA][DEPTH];

  initial begin
    #5000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic rd_check(input int b, input int ad);
    @(posedge clk);
    b_en <= 1; b_we <= 0; b_bank <= 6'(b); b_addr <= 6'(ad);
    @(posedge clk);
    b_en <= 0;
    #1;
    checks++;
    if (b_rdata !== ref_mem[b][ad]) begin
      failures++;
      if (failures < 5) $display("bank %0d addr %0d mismatch %h %h", b, ad, b_rdata[0], ref_mem[b][ad][0]);
    end
  endtask

  initial begin
    a_we = '0; a_addr = '0; a_wdata = '0; b_en = 0; b_we = 0; b_bank = 0; b_addr = 0;
    b_wmask = '0; b_wdata = '0;
    // port A fills every word of every bank
    for (int ad = 0; ad < DEPTH; ad++) begin
      logic [NUM_SA-1:0][N-1:0][31:0] row;
      for (int b = 0; b < NUM_SA; b++)
        for (int j = 0; j < N; j++) begin
          row[b][j] = $urandom; ref_mem[b][ad][j] = row[b][j];
        end
      @(posedge clk);
      a_we <= '1; a_addr <= 6'(ad); a_wdata <= row;
    end
    @(posedge clk); a_we <= '0;
    for (int t = 0; t < 300; t++) rd_check(int'($urandom_range(0, NUM_SA-1)), int'($urandom_range(0, DEPTH-1)));
    // masked writes on port B
    for (int t = 0; t < 200; t++) begin
      int b, ad; logic [N-1:0] mk;
      b = int'($urandom_range(0, NUM_SA-1)); ad = int'($urandom_range(0, DEPTH-1)); mk = N'($urandom);
      @(posedge clk);
      b_en <= 1; b_we <= 1; b_bank <= 6'(b); b_addr <= 6'(ad); b_wmask <= mk;
      begin
        logic [N-1:0][31:0] wd;
        for (int j = 0; j < N; j++) begin
          wd[j] = $urandom;
          if (mk[j]) ref_mem[b][ad][j] = wd[j];
        end
        b_wdata <= wd;
      end
      @(posedge clk); b_en <= 0; b_we <= 0;
      rd_check(b, ad);
    end
    // a port-A write to one bank only
    @(posedge clk);
    a_we <= '0; a_we[5] <= 1'b1; a_addr <= 6'd9;
    for (int j = 0; j < N; j++) ref_mem[5][9][j] = 32'(j * 3);
    a_wdata <= '0;
    begin
      logic [NUM_SA-1:0][N-1:0][31:0] row;
      row = '0;
      for (int j = 0; j < N; j++) row[5][j] = 32'(j * 3);
      a_wdata <= row;
    end
    @(posedge clk); a_we <= '0;
    rd_check(5, 9); rd_check(6, 9);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
