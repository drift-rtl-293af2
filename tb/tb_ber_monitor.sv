// tb_ber_monitor: self-checking test of the error-rate monitor with 64
// arrays and a short window of 4 tiles. Drives random flag patterns, keeps
// its own count of max(#rows, #columns) per array, and checks err_count,
// ber_high (count > 8) and ber_low (count < 1) at the end of every window,
// and that neither verdict pulses in between.
// Interface: drives the monitor's tile_valid/row_flags/col_flags ports
// directly. Timing: one tile per 1-3 clocks, the verdict is checked on the
// clock after the last tile of a window. The error estimate and thresholds
// are this design's choices; the paper only names the monitor.
module tb_ber_monitor;
  localparam int NUM_SA = 64, N = 32, M = 32, WIN = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic tile_valid;
  logic [NUM_SA-1:0][M-1:0] row_flags;
  logic [NUM_SA-1:0][N-1:0] col_flags;
  logic [15:0] err_count;
  logic ber_high, ber_low;

  ber_monitor #(.WINDOW_TILES(WIN)) dut (.*);

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int acc, nh, nl;
    tile_valid = 0; row_flags = '0; col_flags = '0;
    nh = 0; nl = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int w = 0; w < 40; w++) begin
      int density;
      density = (w % 3 == 0) ? 0 : ((w % 3 == 1) ? 1 : 6);   // none / few / many
      acc = 0;
      for (int t = 0; t < WIN; t++) begin
        @(posedge clk);
        row_flags <= '0; col_flags <= '0;
        begin
          logic [NUM_SA-1:0][M-1:0] rf; logic [NUM_SA-1:0][N-1:0] cf;
          rf = '0; cf = '0;
          for (int e = 0; e < density; e++) begin
            int a; a = int'($urandom_range(0, NUM_SA-1));
            rf[a][$urandom_range(0, M-1)] = 1;
            cf[a][$urandom_range(0, N-1)] = 1;
            if ($urandom_range(0, 1)) cf[a][$urandom_range(0, N-1)] = 1;
          end
          for (int a = 0; a < NUM_SA; a++) begin
            int r, c; r = $countones(rf[a]); c = $countones(cf[a]);
            acc += (r > c) ? r : c;
          end
          row_flags <= rf; col_flags <= cf;
        end
        tile_valid <= 1;
        @(posedge clk); tile_valid <= 0;
        #1;
        if (t < WIN - 1) begin
          checks++;
          if (ber_high || ber_low) begin failures++; $display("verdict inside window"); end
        end
      end
      checks += 3;
      if (int'(err_count) != acc) begin failures++; $display("window %0d count %0d exp %0d", w, err_count, acc); end
      if (ber_high != (acc > 8)) begin failures++; $display("ber_high wrong, count %0d", acc); end
      if (ber_low != (acc < 1)) begin failures++; $display("ber_low wrong, count %0d", acc); end
      nh += int'(ber_high); nl += int'(ber_low);
    end
    checks += 2;
    if (nh == 0) begin failures++; $display("ber_high never seen"); end
    if (nl == 0) begin failures++; $display("ber_low never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
