// dram_model: behavioural model of the off-chip DRAM for the testbenches.
// Accepts one request per clock when req_ready is high (ready drops on a
// pseudo-random 1-in-4 of clocks when STALLS is set), stores writes in an
// associative array indexed by byte address, and returns read data in order
// LAT clocks after the request. Unwritten addresses read as zero.
// Interface: req_valid/req_ready/req_we/req_addr (byte address, one N x 32-bit
// beat per request) and rsp_valid/rsp_rdata; peek/poke functions give the
// testbench direct access. Timing: responses come LAT clocks after the
// accepted request, in order. The paper only says the chip uses HBM2; the
// latency, stall pattern and beat width are choices of this model.
module dram_model #(
  parameter int N      = 32,
  parameter int LAT    = 4,
  parameter bit STALLS = 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    req_valid,
  output logic                    req_ready,
  input  logic                    req_we,
  input  logic [drift_pkg::DRAM_ADDR_W-1:0] req_addr,
  input  logic [N-1:0][31:0]      req_wdata,
  output logic                    rsp_valid,
  output logic [N-1:0][31:0]      rsp_rdata
);
  logic [N-1:0][31:0] mem [logic [drift_pkg::DRAM_ADDR_W-1:0]];
  int n_reads = 0, n_writes = 0;
  logic [N-1:0][31:0] pipe_d [LAT];
  logic               pipe_v [LAT];

  always @(posedge clk) req_ready <= !STALLS || ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe_v[i] <= 0;
    end else begin
      pipe_v[0] <= req_valid && req_ready && !req_we;
      pipe_d[0] <= mem.exists(req_addr) ? mem[req_addr] : '0;
      for (int i = 1; i < LAT; i++) begin
        pipe_v[i] <= pipe_v[i-1];
        pipe_d[i] <= pipe_d[i-1];
      end
      if (req_valid && req_ready) begin
        if (req_we) begin mem[req_addr] = req_wdata; n_writes++; end
        else n_reads++;
      end
    end
  end
  assign rsp_valid = pipe_v[LAT-1];
  assign rsp_rdata = pipe_d[LAT-1];

  function automatic logic [N-1:0][31:0] peek(input logic [drift_pkg::DRAM_ADDR_W-1:0] addr);
    return mem.exists(addr) ? mem[addr] : '0;
  endfunction
  function automatic void poke(input logic [drift_pkg::DRAM_ADDR_W-1:0] addr, input logic [N-1:0][31:0] d);
    mem[addr] = d;
  endfunction
endmodule
