// recovery_scheduler: rollback repair of the large errors ABFT has located.
//
// For each array a the ABFT wrapper reports the output rows and columns
// whose checksums disagree by at least the threshold. The scheduler crosses
// them into a correction mask (element (m,j) is suspect when row m and
// column j are both flagged), which covers every large error and, when there
// are several, also some correct elements. It then fetches the same elements
// of the checkpoint written by the data repack unit (an older timestep of the
// same GEMM, close to the current values because diffusion activations change
// slowly between steps) and overwrites the masked elements in the SRAM
// buffer. Crossing the indices and overwriting from the checkpoint follow the
// paper; the mechanics below are this design's.
//
// Accesses are coalesced per tile row: only rows with a flagged row index (in
// an array that also has a flagged column) are read, one DRAM beat of N
// elements each, from the tile's contiguous checkpoint block; a find-first
// over all NUM_SA*M candidate rows skips the clean ones, so the repair takes
// time in proportion to the rows read. One read is outstanding at a time:
// request (valid/ready), then the in-order response (rsp_valid), then a
// masked SRAM write on the same clock as the response. done pulses one clock
// after the last write (or one clock after start when nothing is flagged).
// busy is high from the start until done.
// Synthesis reports most output bits as idle: sram_wdata is the DRAM
// response row forwarded unchanged (the element mask selects what is
// written), and the low log2(N*4) address bits are always zero because every
// request is one whole, aligned tile row.
module recovery_scheduler #(
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
  input  logic [NUM_SA-1:0][M-1:0]             row_flags,
  input  logic [NUM_SA-1:0][N-1:0]             col_flags,
  output logic                                 busy,
  output logic                                 done,
  // statistics of the last repair
  output logic [15:0]                          rows_fetched,
  output logic [15:0]                          elems_fixed,
  // DRAM reads
  output logic                                 dram_req_valid,
  input  logic                                 dram_req_ready,
  output logic [drift_pkg::DRAM_ADDR_W-1:0]    dram_req_addr,
  input  logic                                 dram_rsp_valid,
  input  logic [N-1:0][ACC_W-1:0]              dram_rsp_rdata,
  // SRAM port B (masked writes)
  output logic                                 sram_en,
  output logic [BW-1:0]                        sram_bank,
  output logic [AW-1:0]                        sram_addr,
  output logic [N-1:0]                         sram_wmask,
  output logic [N-1:0][ACC_W-1:0]              sram_wdata
);
  import drift_pkg::*;

  localparam int unsigned NR  = NUM_SA * M;
  localparam int unsigned IW  = $clog2(NR);
  localparam int unsigned MW  = $clog2(M);

  typedef enum logic [1:0] {S_IDLE, S_FIND, S_REQ, S_RSP} sstate_e;
  sstate_e              st;
  logic [NR-1:0]        pend;
  logic [NUM_SA-1:0][N-1:0] cmask;
  logic                 slot_q;
  logic [TILE_ID_W-1:0] tile_q;
  logic [IW-1:0]        cur;

  // find-first pending row
  logic [IW-1:0] ff_idx;
  logic          ff_any;
  always_comb begin
    ff_idx = '0;
    ff_any = |pend;
    for (int i = NR - 1; i >= 0; i--) if (pend[i]) ff_idx = IW'(i);
  end

  logic [BW-1:0] cur_a;
  logic [MW-1:0] cur_m;
  if (NUM_SA > 1) begin : g_a
    assign cur_a = cur[IW-1:MW];
  end else begin : g_a1
    assign cur_a = '0;
  end
  assign cur_m = cur[MW-1:0];

  assign busy           = (st != S_IDLE);
  assign dram_req_valid = (st == S_REQ);
  assign dram_req_addr  = ckpt_addr(CKPT_BASE, tile_q, int'(cur_a), int'(cur_m), NUM_SA, M, N);

  assign sram_en    = (st == S_RSP) && dram_rsp_valid;
  assign sram_bank  = cur_a;
  assign sram_addr  = {slot_q, cur_m};
  assign sram_wmask = cmask[cur_a];
  assign sram_wdata = dram_rsp_rdata;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st           <= S_IDLE;
      pend         <= '0;
      cmask        <= '0;
      slot_q       <= 1'b0;
      tile_q       <= '0;
      cur          <= '0;
      done         <= 1'b0;
      rows_fetched <= '0;
      elems_fixed  <= '0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          for (int a = 0; a < NUM_SA; a++)
            for (int m = 0; m < M; m++)
              pend[a*M + m] <= row_flags[a][m] && (|col_flags[a]);
          cmask        <= col_flags;
          slot_q       <= slot;
          tile_q       <= tile_id;
          rows_fetched <= '0;
          elems_fixed  <= '0;
          st           <= S_FIND;
        end
        S_FIND: if (ff_any) begin
          cur <= ff_idx;
          st  <= S_REQ;
        end else begin
          st   <= S_IDLE;
          done <= 1'b1;
        end
        S_REQ: if (dram_req_ready) st <= S_RSP;
        S_RSP: if (dram_rsp_valid) begin
          pend[cur]    <= 1'b0;
          rows_fetched <= rows_fetched + 1'b1;
          elems_fixed  <= elems_fixed + 16'($countones(cmask[cur_a]));
          st           <= S_FIND;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  initial assert ((1 << MW) == M) else $error("recovery_scheduler: M must be a power of two");
endmodule
