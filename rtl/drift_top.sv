// drift_top: the DRIFT accelerator, a TPU-like engine that runs diffusion-
// model GEMMs at aggressive voltage/frequency and repairs the large timing
// errors this causes by rolling single elements back to an older timestep.
//
// Blocks (all in this directory):
//  * NUM_SA abft_wrapper instances (systolic array + ABFT checksums). All
//    arrays run in lock-step on one broadcast activation row; each holds its
//    own N x N weight tile, so one command computes NUM_SA output tiles of
//    M x N INT32 elements;
//  * sram_buffer: one bank per array, two tile slots per bank;
//  * recovery_scheduler: crosses the ABFT row/column flags into a mask and
//    overwrites the masked elements from the DRAM checkpoint;
//  * data_repack_unit: writes the tile to DRAM as a tile-contiguous checkpoint
//    every CKPT_INTERVAL timesteps;
//  * ber_monitor and dvfs_controller: nominal V/f for the embedding and the
//    first NOMINAL_STEPS timesteps, aggressive V/f otherwise, trimmed by the
//    error rate ABFT observes.
// The LDO, the ADPLL and the HBM2 DRAM are outside: their requests and
// responses are ports.
//
// Sequencing. A compute FSM takes a command (timestep, embedding flag, tile
// id), asks the DVFS controller for the operating point and stalls until
// vf_ack if it changes, accepts M activation rows (x_valid/x_ready), lets the
// arrays write the results into SRAM slot `slot`, and waits for the ABFT
// verdict. It then hands the tile to a post-processing FSM, waiting if that
// FSM is still busy with the previous tile (the data dependency: a tile must
// be repaired before its slot is reused). The post FSM repairs the tile if
// any error was flagged, then, when timestep % CKPT_INTERVAL == 0, writes the
// repaired tile out as the new checkpoint, and finally pulses res_done. Because
// the two FSMs work on different slots, repair and checkpoint traffic overlap
// the next command's computation. The host may read results through rd_*
// while post_idle is high; results of a tile stay until the command after
// next overwrites its slot.
//
// What follows the paper: the blocks and their roles, the 64 arrays of size
// 32 with 8-bit multipliers and 32-bit accumulators, the 10th-bit threshold,
// the interval n = 10, the operating points and the order
// detect -> cross-combine -> fetch checkpoint -> overwrite. This design's own
// choices: the lock-step mapping, the two-slot buffer, the command and memory
// interfaces, repairing before checkpointing, and the inj_* port, which XORs a
// mask into one INT32 output of one array to model a timing error.
module drift_top #(
  parameter int unsigned NUM_SA        = 64,
  parameter int unsigned N             = 32,
  parameter int unsigned M             = 32,
  parameter int unsigned THETA_BIT     = 10,
  parameter int unsigned CKPT_INTERVAL = 10,
  parameter int unsigned NOMINAL_STEPS = 2,
  parameter int unsigned WINDOW_TILES  = 64,
  parameter int unsigned HI_ERR        = 8,
  parameter int unsigned LO_ERR        = 1,
  parameter logic [drift_pkg::DRAM_ADDR_W-1:0] CKPT_BASE = '0,
  localparam int unsigned ACC_W = 32,
  localparam int unsigned BW    = (NUM_SA > 1) ? $clog2(NUM_SA) : 1,
  localparam int unsigned AW    = $clog2(2 * M)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  drift_pkg::aggr_mode_e               cfg_mode,
  // commands
  input  logic                                cmd_valid,
  output logic                                cmd_ready,
  input  logic [drift_pkg::TSTEP_W-1:0]       cmd_timestep,
  input  logic                                cmd_is_embedding,
  input  logic [drift_pkg::TILE_ID_W-1:0]     cmd_tile_id,
  // weight load (only while cmd_ready is high)
  input  logic                                w_load,
  input  logic [BW-1:0]                       w_sa,
  input  logic [$clog2(N)-1:0]                w_row,
  input  logic [N-1:0][7:0]                   w_data,
  // activation rows, broadcast to all arrays
  input  logic                                x_valid,
  output logic                                x_ready,
  input  logic [N-1:0][7:0]                   x_data,
  // to/from LDO and ADPLL
  output drift_pkg::op_point_t                op,
  output logic                                vf_req,
  input  logic                                vf_ack,
  // DRAM (HBM2) port: in-order reads
  output logic                                dram_req_valid,
  input  logic                                dram_req_ready,
  output logic                                dram_req_we,
  output logic [drift_pkg::DRAM_ADDR_W-1:0]   dram_req_addr,
  output logic [N-1:0][ACC_W-1:0]             dram_req_wdata,
  input  logic                                dram_rsp_valid,
  input  logic [N-1:0][ACC_W-1:0]             dram_rsp_rdata,
  // results
  output logic                                res_done,
  output logic                                res_slot,
  output logic [drift_pkg::TILE_ID_W-1:0]     res_tile_id,
  output logic                                post_idle,
  input  logic                                rd_en,
  input  logic [BW-1:0]                       rd_bank,
  input  logic [AW-1:0]                       rd_addr,
  output logic [N-1:0][ACC_W-1:0]             rd_data,
  // status
  output logic                                nominal_sel,
  output logic [15:0]                         err_count,
  output logic [15:0]                         rec_rows,
  output logic [15:0]                         rec_elems,
  output logic                                hand_stall,   // finished tile waits for post-processing
  // timing-error model
  input  logic                                inj_en,
  input  logic [BW-1:0]                       inj_sa,
  input  logic [$clog2(M)-1:0]                inj_row,
  input  logic [$clog2(N)-1:0]                inj_col,
  input  logic [ACC_W-1:0]                    inj_mask
);
  import drift_pkg::*;

  // ======================= arrays ==========================================
  logic [NUM_SA-1:0]                  sa_x_ready, sa_y_valid, sa_tile_done;
  logic [NUM_SA-1:0][$clog2(M)-1:0]   sa_y_row;
  logic [NUM_SA-1:0][N-1:0][ACC_W-1:0] sa_y_data;
  logic [NUM_SA-1:0][M-1:0]           sa_row_flags;
  logic [NUM_SA-1:0][N-1:0]           sa_col_flags;
  logic                               arr_x_valid;

  for (genvar a = 0; a < NUM_SA; a++) begin : g_sa
    abft_wrapper #(.N(N), .M(M), .ACC_W(ACC_W), .THETA_BIT(THETA_BIT)) u_abft (
      .clk       (clk),
      .rst_n     (rst_n),
      .w_load    (w_load && cmd_ready && (int'(w_sa) == a)),
      .w_row     (w_row),
      .w_data    (w_data),
      .x_valid   (arr_x_valid),
      .x_ready   (sa_x_ready[a]),
      .x_data    (x_data),
      .y_valid   (sa_y_valid[a]),
      .y_row     (sa_y_row[a]),
      .y_data    (sa_y_data[a]),
      .tile_done (sa_tile_done[a]),
      .row_flags (sa_row_flags[a]),
      .col_flags (sa_col_flags[a]),
      .inj_en    (inj_en && (int'(inj_sa) == a)),
      .inj_row   (inj_row),
      .inj_col   (inj_col),
      .inj_mask  (inj_mask)
    );
  end

  // ======================= DVFS and BER monitor =============================
  logic dv_cmd, dv_ready, ber_high, ber_low;

  ber_monitor #(.NUM_SA(NUM_SA), .N(N), .M(M), .WINDOW_TILES(WINDOW_TILES),
                .HI_ERR(HI_ERR), .LO_ERR(LO_ERR)) u_ber (
    .clk        (clk),
    .rst_n      (rst_n),
    .tile_valid (sa_tile_done[0]),
    .row_flags  (sa_row_flags),
    .col_flags  (sa_col_flags),
    .err_count  (err_count),
    .ber_high   (ber_high),
    .ber_low    (ber_low)
  );

  dvfs_controller #(.NOMINAL_STEPS(NOMINAL_STEPS)) u_dvfs (
    .clk          (clk),
    .rst_n        (rst_n),
    .mode         (cfg_mode),
    .cmd_valid    (dv_cmd),
    .timestep     (cmd_timestep),
    .is_embedding (cmd_is_embedding),
    .ber_high     (ber_high),
    .ber_low      (ber_low),
    .op           (op),
    .nominal_sel  (nominal_sel),
    .vf_req       (vf_req),
    .vf_ack       (vf_ack),
    .ready        (dv_ready)
  );

  // ======================= compute FSM =====================================
  typedef enum logic [2:0] {C_IDLE, C_VF, C_RUN, C_DRAIN, C_HAND} cstate_e;
  cstate_e              c_st;
  logic                 slot;           // slot the current tile writes
  logic [TSTEP_W-1:0]   c_tstep;
  logic [TILE_ID_W-1:0] c_tile;
  logic [$clog2(M):0]   c_rows;
  logic                 post_start;

  assign cmd_ready   = (c_st == C_IDLE);
  assign dv_cmd      = cmd_valid && cmd_ready;
  assign x_ready     = (c_st == C_RUN) && sa_x_ready[0] && (int'(c_rows) < M);
  assign arr_x_valid = x_valid && x_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      c_st    <= C_IDLE;
      slot    <= 1'b0;
      c_tstep <= '0;
      c_tile  <= '0;
      c_rows  <= '0;
    end else begin
      unique case (c_st)
        C_IDLE: if (cmd_valid) begin
          c_tstep <= cmd_timestep;
          c_tile  <= cmd_tile_id;
          c_rows  <= '0;
          c_st    <= C_VF;
        end
        C_VF:    if (dv_ready) c_st <= C_RUN;
        C_RUN: begin
          if (arr_x_valid) c_rows <= c_rows + 1'b1;
          if (arr_x_valid && int'(c_rows) == M - 1) c_st <= C_DRAIN;
        end
        C_DRAIN: if (sa_tile_done[0]) c_st <= C_HAND;
        C_HAND:  if (post_start) begin
          c_st <= C_IDLE;
          slot <= ~slot;
        end
        default: c_st <= C_IDLE;
      endcase
    end
  end

  // ======================= post-processing FSM =============================
  typedef enum logic [2:0] {P_IDLE, P_REC, P_OFF, P_DONE} pstate_e;
  pstate_e              p_st;
  logic                 p_slot;
  logic [TILE_ID_W-1:0] p_tile;
  logic                 p_ckpt;
  logic                 rec_start, rec_busy, rec_done;
  logic                 rep_start, rep_busy, rep_done;
  logic                 any_flag;
  logic                 ckpt_step;

  assign post_idle  = (p_st == P_IDLE);
  assign hand_stall = (c_st == C_HAND) && !post_idle;
  assign post_start = (c_st == C_HAND) && post_idle;
  assign ckpt_step  = (32'(c_tstep) % CKPT_INTERVAL) == 0;
  always_comb begin
    any_flag = 1'b0;
    for (int a = 0; a < NUM_SA; a++) any_flag |= (|sa_row_flags[a]) && (|sa_col_flags[a]);
  end
  assign rec_start = post_start && any_flag;
  assign rep_start = (p_st == P_REC && rec_done && p_ckpt) ||
                     (post_start && !any_flag && ckpt_step);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      p_st        <= P_IDLE;
      p_slot      <= 1'b0;
      p_tile      <= '0;
      p_ckpt      <= 1'b0;
      res_done    <= 1'b0;
      res_slot    <= 1'b0;
      res_tile_id <= '0;
    end else begin
      res_done <= 1'b0;
      unique case (p_st)
        P_IDLE: if (post_start) begin
          p_slot <= slot;
          p_tile <= c_tile;
          p_ckpt <= ckpt_step;
          p_st   <= any_flag ? P_REC : (ckpt_step ? P_OFF : P_DONE);
        end
        P_REC: if (rec_done) p_st <= p_ckpt ? P_OFF : P_DONE;
        P_OFF: if (rep_done) p_st <= P_DONE;
        P_DONE: begin
          res_done    <= 1'b1;
          res_slot    <= p_slot;
          res_tile_id <= p_tile;
          p_st        <= P_IDLE;
        end
        default: p_st <= P_IDLE;
      endcase
    end
  end

  // ======================= recovery and repack =============================
  logic                        rec_req_valid, rep_req_valid;
  logic [DRAM_ADDR_W-1:0]      rec_req_addr, rep_req_addr;
  logic [N-1:0][ACC_W-1:0]     rep_req_wdata;
  logic                        rec_sram_en, rep_sram_en;
  logic [BW-1:0]               rec_sram_bank, rep_sram_bank;
  logic [AW-1:0]               rec_sram_addr, rep_sram_addr;
  logic [N-1:0]                rec_sram_wmask;
  logic [N-1:0][ACC_W-1:0]     rec_sram_wdata;
  logic [N-1:0][ACC_W-1:0]     b_rdata;

  recovery_scheduler #(.NUM_SA(NUM_SA), .N(N), .M(M), .ACC_W(ACC_W), .CKPT_BASE(CKPT_BASE)) u_rec (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (rec_start),
    .slot           (slot),
    .tile_id        (c_tile),
    .row_flags      (sa_row_flags),
    .col_flags      (sa_col_flags),
    .busy           (rec_busy),
    .done           (rec_done),
    .rows_fetched   (rec_rows),
    .elems_fixed    (rec_elems),
    .dram_req_valid (rec_req_valid),
    .dram_req_ready (dram_req_ready && p_st == P_REC),
    .dram_req_addr  (rec_req_addr),
    .dram_rsp_valid (dram_rsp_valid && p_st == P_REC),
    .dram_rsp_rdata (dram_rsp_rdata),
    .sram_en        (rec_sram_en),
    .sram_bank      (rec_sram_bank),
    .sram_addr      (rec_sram_addr),
    .sram_wmask     (rec_sram_wmask),
    .sram_wdata     (rec_sram_wdata)
  );

  data_repack_unit #(.NUM_SA(NUM_SA), .N(N), .M(M), .ACC_W(ACC_W), .CKPT_BASE(CKPT_BASE)) u_rep (
    .clk            (clk),
    .rst_n          (rst_n),
    .start          (rep_start),
    .slot           (post_start ? slot : p_slot),
    .tile_id        (post_start ? c_tile : p_tile),
    .busy           (rep_busy),
    .done           (rep_done),
    .sram_en        (rep_sram_en),
    .sram_bank      (rep_sram_bank),
    .sram_addr      (rep_sram_addr),
    .sram_rdata     (b_rdata),
    .dram_req_valid (rep_req_valid),
    .dram_req_ready (dram_req_ready && p_st == P_OFF),
    .dram_req_addr  (rep_req_addr),
    .dram_req_wdata (rep_req_wdata)
  );

  always_comb begin
    dram_req_valid = 1'b0;
    dram_req_we    = 1'b0;
    dram_req_addr  = rec_req_addr;
    dram_req_wdata = rep_req_wdata;
    if (p_st == P_REC) begin
      dram_req_valid = rec_req_valid;
    end else if (p_st == P_OFF) begin
      dram_req_valid = rep_req_valid;
      dram_req_we    = 1'b1;
      dram_req_addr  = rep_req_addr;
    end
  end

  // ======================= SRAM buffer =====================================
  logic                    b_en, b_we;
  logic [BW-1:0]           b_bank;
  logic [AW-1:0]           b_addr;
  logic [N-1:0]            b_wmask;

  always_comb begin
    b_en    = 1'b0;
    b_we    = 1'b0;
    b_bank  = rd_bank;
    b_addr  = rd_addr;
    b_wmask = rec_sram_wmask;
    unique case (p_st)
      P_REC: begin
        b_en   = rec_sram_en;
        b_we   = 1'b1;
        b_bank = rec_sram_bank;
        b_addr = rec_sram_addr;
      end
      P_OFF: begin
        b_en   = rep_sram_en;
        b_bank = rep_sram_bank;
        b_addr = rep_sram_addr;
      end
      default: b_en = rd_en;
    endcase
  end
  assign rd_data = b_rdata;

  logic [NUM_SA-1:0] a_we;
  always_comb
    for (int a = 0; a < NUM_SA; a++) a_we[a] = sa_y_valid[a];

  sram_buffer #(.NUM_SA(NUM_SA), .N(N), .DEPTH(2 * M), .ACC_W(ACC_W)) u_sram (
    .clk     (clk),
    .a_we    (a_we),
    .a_addr  ({slot, sa_y_row[0]}),
    .a_wdata (sa_y_data),
    .b_en    (b_en),
    .b_we    (b_we),
    .b_bank  (b_bank),
    .b_addr  (b_addr),
    .b_wmask (b_wmask),
    .b_wdata (rec_sram_wdata),
    .b_rdata (b_rdata)
  );

  // Arrays run in lock-step; the other arrays' handshake outputs mirror
  // array 0 (x_ready, y_row, tile_done), so only array 0's are used.
  // The busy outputs of the two post-processing units are implied by p_st.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               sa_tile_done == {NUM_SA{sa_tile_done[0]}} &&
                               sa_x_ready   == {NUM_SA{sa_x_ready[0]}} &&
                               sa_y_row     == {NUM_SA{sa_y_row[0]}});
  a_no_b_conflict: assert property (@(posedge clk) disable iff (!rst_n)
                               !(rec_busy && rep_busy));
  a_dram_we: assert property (@(posedge clk) disable iff (!rst_n)
                               dram_req_valid |-> (dram_req_we == (p_st == P_OFF)));
endmodule
