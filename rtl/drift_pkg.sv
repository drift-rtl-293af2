// drift_pkg: types and constants shared by the DRIFT accelerator.
//
// The accelerator computes INT8 x INT8 GEMM tiles with 32-bit accumulation on
// weight-stationary systolic arrays, checks every tile with row and column
// checksums (ABFT), repairs large errors by copying the same elements from an
// older checkpoint held in DRAM, and drives a resilience-aware DVFS policy.
// The operand widths (8-bit multipliers, 32-bit accumulators), the array size
// (32), the number of arrays (64), the checkpoint interval (10) and the
// operating points (0.9 V/2 GHz nominal, 0.68 V/2 GHz undervolt, 0.88 V/3.5 GHz
// overclock) follow the paper. The DRAM address map and field widths below
// are this design's own choices.
package drift_pkg;

  // Operating point requested from the LDO (millivolts) and ADPLL (megahertz).
  typedef struct packed {
    logic [11:0] vdd_mv;
    logic [12:0] freq_mhz;
  } op_point_t;

  // Aggressive-mode choice for the error-resilient computations.
  typedef enum logic {
    AGGR_UNDERVOLT = 1'b0,
    AGGR_OVERCLOCK = 1'b1
  } aggr_mode_e;

  localparam int unsigned DRAM_ADDR_W = 34;   // 16 GiB of checkpoint space
  localparam int unsigned TILE_ID_W   = 16;
  localparam int unsigned TSTEP_W     = 16;

  // Tile-major (repacked) checkpoint address of row m of the output tile of
  // array a for GEMM tile tile_id. Each tile occupies M*N*4 contiguous bytes,
  // rows of N*4 bytes back to back, so one tile sits in one DRAM page.
  function automatic logic [DRAM_ADDR_W-1:0] ckpt_addr(
      input logic [DRAM_ADDR_W-1:0] base,
      input logic [TILE_ID_W-1:0]   tile_id,
      input int unsigned            a,
      input int unsigned            m,
      input int unsigned            num_sa,
      input int unsigned            rows,
      input int unsigned            cols);
    logic [DRAM_ADDR_W-1:0] tile_index;
    tile_index = DRAM_ADDR_W'(tile_id) * DRAM_ADDR_W'(num_sa) + DRAM_ADDR_W'(a);
    return base + (tile_index * DRAM_ADDR_W'(rows) + DRAM_ADDR_W'(m)) * DRAM_ADDR_W'(cols * 4);
  endfunction

endpackage
