// tb_dvfs_controller: self-checking test of the resilience-aware DVFS policy
// at its default operating points. For both modes it issues commands for
// the embedding and for timesteps 0..5 and checks the requested point
// (0.9 V/2000 MHz for the embedding and steps 0-1; 680 mV/2000 MHz
// undervolted or 880 mV/3500 MHz overclocked otherwise), the vf_req/vf_ack
// handshake (ready low until the acknowledge, no request when the point does
// not change), and the BER trim: up 10 mV per ber_high, never above 900 mV,
// down per ber_low, never more than 4 steps below the configured point.
// Interface: mode/cmd_valid/timestep/is_embedding/ber_high/ber_low in,
// op/nominal_sel/vf_req out, vf_ack answered after a random delay. Timing:
// checks that ready stays low until the acknowledge. Operating points follow
// the paper; the 10 mV trim steps are this design's.
module tb_dvfs_controller;
  import drift_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  aggr_mode_e mode;
  logic cmd_valid, is_embedding, ber_high, ber_low, nominal_sel, vf_req, vf_ack, ready;
  logic [15:0] timestep;
  op_point_t op;

  dvfs_controller dut (.*);

  initial begin
    #1000000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic cmd(input int t, input bit emb, input int exp_v, input int exp_f, input bit exp_nom);
    bit changed;
    changed = (int'(op.vdd_mv) != exp_v) || (int'(op.freq_mhz) != exp_f);
    @(posedge clk);
    cmd_valid <= 1; timestep <= 16'(t); is_embedding <= emb;
    @(posedge clk); cmd_valid <= 0;
    #1;
    checks += 4;
    if (int'(op.vdd_mv) != exp_v || int'(op.freq_mhz) != exp_f) begin
      failures++; $display("t=%0d emb=%0d: %0d mV %0d MHz, exp %0d/%0d", t, emb, op.vdd_mv, op.freq_mhz, exp_v, exp_f);
    end
    if (nominal_sel != exp_nom) begin failures++; $display("nominal_sel wrong at t=%0d", t); end
    if (vf_req != changed) begin failures++; $display("vf_req=%0d, change=%0d at t=%0d", vf_req, changed, t); end
    if (ready == changed) begin failures++; $display("ready wrong at t=%0d", t); end
    if (changed) begin
      repeat (3) @(posedge clk);
      #1;
      checks++;
      if (!vf_req || ready) begin failures++; $display("released before ack"); end
      @(posedge clk); vf_ack <= 1;
      @(posedge clk); vf_ack <= 0;
      #1;
      checks++;
      if (vf_req || !ready) begin failures++; $display("not released by ack"); end
    end
  endtask

  task automatic pulse_ber(input bit hi);
    @(posedge clk);
    if (hi) ber_high <= 1; else ber_low <= 1;
    @(posedge clk);
    ber_high <= 0; ber_low <= 0;
  endtask

  initial begin
    mode = AGGR_UNDERVOLT; cmd_valid = 0; is_embedding = 0; timestep = 0;
    ber_high = 0; ber_low = 0; vf_ack = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // undervolt
    cmd(0, 1, 900, 2000, 1);
    cmd(0, 0, 900, 2000, 1);
    cmd(1, 0, 900, 2000, 1);
    cmd(2, 0, 680, 2000, 0);
    cmd(3, 1, 900, 2000, 1);
    cmd(5, 0, 680, 2000, 0);
    // trim up twice, then down four times (one below the base... and more)
    pulse_ber(1); pulse_ber(1);
    cmd(6, 0, 700, 2000, 0);
    for (int i = 0; i < 8; i++) pulse_ber(0);
    cmd(7, 0, 640, 2000, 0);          // floor: 680 - 4*10
    // overclock
    for (int i = 0; i < 4; i++) pulse_ber(1);   // trim back to 0
    mode = AGGR_OVERCLOCK;
    cmd(8, 0, 880, 3500, 0);
    cmd(1, 0, 900, 2000, 1);
    for (int i = 0; i < 5; i++) pulse_ber(1);   // only 2 steps fit under 900 mV
    cmd(9, 0, 900, 3500, 0);
    cmd(0, 1, 900, 2000, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
