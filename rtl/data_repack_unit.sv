// data_repack_unit: writes a finished output tile of every array to DRAM as a
// rollback checkpoint, in a tile-contiguous ("repacked") layout.
//
// In the row-major layout of the full output matrix, the M rows of one
// array's N-column tile lie NUM_SA*N*4 bytes apart, so repairing a few
// elements of one tile later touches many DRAM rows. This unit instead gives
// every tile one contiguous M*N*4-byte block (drift_pkg::ckpt_addr), so the
// whole tile, and any subset of it, falls in a single DRAM page. That layout
// choice is the paper's; the address map itself, the one-row DRAM beat and
// the sequential walk are this design's.
//
// Operation: a start pulse with the SRAM slot and the tile id walks arrays
// a = 0..NUM_SA-1 and rows m = 0..M-1. For each row it reads the SRAM bank
// (1-clock read), then holds a DRAM write request (valid/ready) until it is
// accepted. One row therefore takes 2 clocks plus the DRAM back-pressure;
// done pulses for one clock after the last write is accepted.
// The low log2(N*4) bits of dram_req_addr are always zero (every beat is a
// whole, aligned tile row); synthesis reports them as constant outputs.
module data_repack_unit #(
  parameter int unsigned NUM_SA = 64,
  parameter int unsigned N      = 32,
  parameter int unsigned M      = 32,
  parameter int unsigned ACC_W  = 32,
  parameter logic [drift_pkg::DRAM_ADDR_W-1:0] CKPT_BASE = '0,
  localparam int unsigned AW    = $clog2(2 * M),
  localparam int unsigned BW    = (NUM_SA > 1) ? $clog2(NUM_SA) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic                                 slot,
  input  logic [drift_pkg::TILE_ID_W-1:0]      tile_id,
  output logic                                 busy,
  output logic                                 done,
  // SRAM port B (reads)
  output logic                                 sram_en,
  output logic [BW-1:0]                        sram_bank,
  output logic [AW-1:0]                        sram_addr,
  input  logic [N-1:0][ACC_W-1:0]              sram_rdata,
  // DRAM write requests
  output logic                                 dram_req_valid,
  input  logic                                 dram_req_ready,
  output logic [drift_pkg::DRAM_ADDR_W-1:0]    dram_req_addr,
  output logic [N-1:0][ACC_W-1:0]              dram_req_wdata
);
  import drift_pkg::*;

  typedef enum logic [1:0] {R_IDLE, R_READ, R_WAIT, R_SEND} rstate_e;
  rstate_e                st;
  logic [BW-1:0]          a_q;
  logic [$clog2(M)-1:0]   m_q;
  logic                   slot_q;
  logic [TILE_ID_W-1:0]   tile_q;
  logic [N-1:0][ACC_W-1:0] data_q;
  logic                   last;

  assign last      = (int'(a_q) == NUM_SA - 1) && (int'(m_q) == M - 1);
  assign busy      = (st != R_IDLE);
  assign sram_en   = (st == R_READ);
  assign sram_bank = a_q;
  assign sram_addr = {slot_q, m_q};

  assign dram_req_valid = (st == R_SEND);
  assign dram_req_addr  = ckpt_addr(CKPT_BASE, tile_q, int'(a_q), int'(m_q), NUM_SA, M, N);
  assign dram_req_wdata = data_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st     <= R_IDLE;
      a_q    <= '0;
      m_q    <= '0;
      slot_q <= 1'b0;
      tile_q <= '0;
      data_q <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        R_IDLE: if (start) begin
          a_q    <= '0;
          m_q    <= '0;
          slot_q <= slot;
          tile_q <= tile_id;
          st     <= R_READ;
        end
        R_READ: st <= R_WAIT;
        R_WAIT: begin
          data_q <= sram_rdata;
          st     <= R_SEND;
        end
        R_SEND: if (dram_req_ready) begin
          if (last) begin
            st   <= R_IDLE;
            done <= 1'b1;
          end else begin
            st <= R_READ;
            if (int'(m_q) == M - 1) begin
              m_q <= '0;
              a_q <= a_q + 1'b1;
            end else begin
              m_q <= m_q + 1'b1;
            end
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end

  initial assert ((1 << $clog2(M)) == M) else $error("data_repack_unit: M must be a power of two");
endmodule
