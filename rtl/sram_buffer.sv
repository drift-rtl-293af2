// sram_buffer: banked on-chip result buffer of the DRIFT accelerator.
//
// One bank per systolic array; a bank word is one output-tile row (N INT32
// elements) and a bank holds DEPTH words, by default two tile slots of M rows
// so that one tile can be repaired and checkpointed while the next one is
// being computed. Each bank has two ports:
//  * port A, write only, used by the arrays: every bank whose a_we bit is set
//    writes a_wdata[bank] at a_addr in the same clock (the arrays run in
//    lock-step, so one address serves all banks);
//  * port B, one bank at a time, used by the recovery scheduler (element-
//    masked writes), the data repack unit and the host (reads). A read returns
//    b_rdata one clock after b_en with b_we low.
// If both ports write the same word in the same clock, port B's elements win.
// The paper names the buffer and what it caches; the banking, the two ports
// and the two slots are this design's choices. It is written as a register
// array; a chip would map each bank onto SRAM macros.
module sram_buffer #(
  parameter int unsigned NUM_SA = 64,
  parameter int unsigned N      = 32,
  parameter int unsigned DEPTH  = 64,
  parameter int unsigned ACC_W  = 32,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = (NUM_SA > 1) ? $clog2(NUM_SA) : 1
) (
  input  logic                                  clk,
  // port A
  input  logic [NUM_SA-1:0]                     a_we,
  input  logic [AW-1:0]                         a_addr,
  input  logic [NUM_SA-1:0][N-1:0][ACC_W-1:0]   a_wdata,
  // port B
  input  logic                                  b_en,
  input  logic                                  b_we,
  input  logic [BW-1:0]                         b_bank,
  input  logic [AW-1:0]                         b_addr,
  input  logic [N-1:0]                          b_wmask,
  input  logic [N-1:0][ACC_W-1:0]               b_wdata,
  output logic [N-1:0][ACC_W-1:0]               b_rdata
);
  // one memory per bank, as one SRAM macro (or group of macros) per array
  logic [NUM_SA-1:0][N-1:0][ACC_W-1:0] rdata_bank;
  logic [BW-1:0]                       rbank_q;

  for (genvar g = 0; g < NUM_SA; g++) begin : g_bank
    logic [N-1:0][ACC_W-1:0] mem [DEPTH];
    logic                    b_sel;
    assign b_sel = b_en && (int'(b_bank) == g);

    always_ff @(posedge clk) begin
      if (a_we[g]) mem[a_addr] <= a_wdata[g];
      if (b_sel && b_we) begin
        for (int j = 0; j < N; j++)
          if (b_wmask[j]) mem[b_addr][j] <= b_wdata[j];
      end
      if (b_sel && !b_we) rdata_bank[g] <= mem[b_addr];
    end
  end

  always_ff @(posedge clk)
    if (b_en && !b_we) rbank_q <= b_bank;

  assign b_rdata = rdata_bank[rbank_q];
endmodule
