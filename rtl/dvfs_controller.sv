// dvfs_controller: digital policy of the fine-grained, resilience-aware DVFS
// module.
//
// Each GEMM command carries its timestep and whether it belongs to the
// timestep/condition embedding. The embedding and the first NOMINAL_STEPS
// denoising steps are error-nominal_sel and run at the nominal point (0.9 V,
// 2 GHz); every other computation is error-resilient and runs at the
// aggressive point of the selected mode: undervolt (0.68 V, 2 GHz, for energy)
// or overclock (0.88 V, 3.5 GHz, for speed). These numbers and the
// nominal_sel/resilient split are the paper's. The aggressive voltage is trimmed
// in V_STEP_MV steps by the BER monitor, up on ber_high (never above nominal)
// and down on ber_low (at most TRIM_DN steps below the configured point); that
// feedback rule is this design's choice.
//
// Handshake with the LDO and ADPLL (not part of this RTL): on cmd_valid the
// controller computes the target point; if it differs from the point in force
// it updates op and holds vf_req high until vf_ack, and ready is low
// meanwhile, so the compute engine stalls until the supply and clock have
// settled. If the point does not change, ready stays high.
module dvfs_controller #(
  parameter int unsigned NOMINAL_STEPS = 2,
  parameter int unsigned V_NOM_MV      = 900,
  parameter int unsigned F_NOM_MHZ     = 2000,
  parameter int unsigned V_UV_MV       = 680,
  parameter int unsigned F_UV_MHZ      = 2000,
  parameter int unsigned V_OC_MV       = 880,
  parameter int unsigned F_OC_MHZ      = 3500,
  parameter int unsigned V_STEP_MV     = 10,
  parameter int unsigned TRIM_DN       = 4
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  drift_pkg::aggr_mode_e             mode,
  input  logic                              cmd_valid,
  input  logic [drift_pkg::TSTEP_W-1:0]     timestep,
  input  logic                              is_embedding,
  input  logic                              ber_high,
  input  logic                              ber_low,
  output drift_pkg::op_point_t              op,
  output logic                              nominal_sel,
  output logic                              vf_req,
  input  logic                              vf_ack,
  output logic                              ready
);
  import drift_pkg::*;

  // trim in voltage steps, signed
  logic signed [7:0] trim;
  logic signed [15:0] v_base, v_aggr;
  logic               sens;
  op_point_t          target;

  always_comb begin
    v_base = (mode == AGGR_OVERCLOCK) ? 16'(V_OC_MV) : 16'(V_UV_MV);
    v_aggr = v_base + 16'(trim) * 16'(V_STEP_MV);
    sens   = is_embedding || (32'(timestep) < NOMINAL_STEPS);
    if (sens) begin
      target.vdd_mv   = 12'(V_NOM_MV);
      target.freq_mhz = 13'(F_NOM_MHZ);
    end else begin
      target.vdd_mv   = 12'(v_aggr);
      target.freq_mhz = (mode == AGGR_OVERCLOCK) ? 13'(F_OC_MHZ) : 13'(F_UV_MHZ);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      trim      <= '0;
      op        <= '{vdd_mv: 12'(V_NOM_MV), freq_mhz: 13'(F_NOM_MHZ)};
      nominal_sel <= 1'b1;
      vf_req    <= 1'b0;
    end else begin
      if (ber_high && (v_aggr + 16'(V_STEP_MV) <= 16'(V_NOM_MV))) trim <= trim + 1'b1;
      else if (ber_low && (trim > -$signed(8'(TRIM_DN))))                 trim <= trim - 1'b1;
      if (cmd_valid && !vf_req) begin
        nominal_sel <= sens;
        if (target != op) begin
          op     <= target;
          vf_req <= 1'b1;
        end
      end
      if (vf_req && vf_ack) vf_req <= 1'b0;
    end
  end

  assign ready = !vf_req;
endmodule
