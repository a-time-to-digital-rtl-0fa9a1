// Dual-LUT charge correction.
//
// LUT I removes the time walk: the charge Q_i selects one of N_ZONES charge
// zones, each holding a time walk dt in TDC bins (the first zone is the
// reference, normally dt = 0). The fine time is corrected to
// k = i - dt (mod 48), kept in 1..48. LUT II then holds one coefficient C_k per
// corrected fine time, C_k = mean(Q) / Q_k from calibration, and the output is
// Q = Q_i x C_k. Both tables live in registers (distributed RAM) and are
// written through cfg (tables TBL_DUAL_THRESH, TBL_DUAL_WALK, TBL_DUAL_COEF);
// they are not reset.
//
// Pipeline, one measurement per clock:
//   stage 1  zone lookup in LUT I, k = i - dt mod 48      (registered)
//   stage 2  LUT II read of C_k                           (registered)
//   stage 3  Q_i x C_k, rounded                           (registered)
// out_valid follows in_valid by 3 clocks. fine_out is the uncorrected fine
// time i, which is what gets packaged.
//
// Table structure, the mod-48 correction and the product follow the design
// description; the zone bound encoding, the coefficient format (unsigned,
// 15 fraction bits) and the pipeline depth are this implementation's choices.
//
// Lint reports rst_n as used both synchronously and asynchronously. That
// comes from the assertions below, which are disabled during reset; every
// flip-flop that is reset uses rst_n as an asynchronous reset.
module dual_lut_correction
  import charge_meas_pkg::*;
#(
  parameter int unsigned ZONES     = charge_meas_pkg::N_ZONES,
  parameter int unsigned BINS      = charge_meas_pkg::FINE_BINS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic [CHARGE_W-1:0] q_in,
  input  logic [FINE_W-1:0]   fine_in,     // i, 1..BINS
  output logic                out_valid,
  output logic [QCORR_W-1:0]  q_out,
  output logic [FINE_W-1:0]   fine_out
);

  localparam int unsigned ZW = (ZONES > 1) ? $clog2(ZONES) : 1;
  localparam int unsigned KW = $clog2(BINS);

  // LUT I: zone bounds and time walk per zone
  logic [CHARGE_W-1:0] bound [ZONES-1];
  logic [WALK_W-1:0]   walk  [ZONES];
  // LUT II: coefficient per corrected fine time, index k-1
  logic [COEF_W-1:0]   coef  [BINS];

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      unique case (cfg.table_sel)
        TBL_DUAL_THRESH:
          if (cfg.addr < CFG_ADDR_W'(ZONES - 1)) bound[ZW'(cfg.addr)] <= CHARGE_W'(cfg.data);
        TBL_DUAL_WALK:
          if (cfg.addr < CFG_ADDR_W'(ZONES))     walk[ZW'(cfg.addr)]  <= WALK_W'(cfg.data);
        TBL_DUAL_COEF:
          if (cfg.addr < CFG_ADDR_W'(BINS))   coef[KW'(cfg.addr)]  <= COEF_W'(cfg.data);
        default: ;
      endcase
    end
  end

  // ---- stage 1: LUT I and corrected fine time ----
  logic [ZW-1:0]      zone;
  logic [WALK_W-1:0]  dt;
  logic signed [7:0]  k_diff;     // (i-1) - dt, in -47..47 for valid tables
  logic [KW-1:0]      k_idx_c;    // k - 1

  charge_zone_finder #(
    .CHARGE_W (CHARGE_W),
    .N_ZONES  (ZONES),
    .ZONE_W   (ZW)
  ) u_zone (
    .q     (q_in),
    .bound (bound),
    .zone  (zone)
  );

  always_comb begin
    dt      = walk[zone];
    k_diff  = $signed({2'b00, fine_in}) - 8'sd1 - $signed({2'b00, dt});
    if (k_diff < 0) k_idx_c = KW'(k_diff + 8'(BINS));
    else            k_idx_c = KW'(k_diff);
  end

  logic                s1_valid;
  logic [CHARGE_W-1:0] s1_q;
  logic [FINE_W-1:0]   s1_fine;
  logic [KW-1:0]       s1_k;

  // ---- stage 2: LUT II ----
  logic                s2_valid;
  logic [CHARGE_W-1:0] s2_q;
  logic [FINE_W-1:0]   s2_fine;
  logic [COEF_W-1:0]   s2_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
      s1_q     <= '0;
      s1_fine  <= '0;
      s1_k     <= '0;
      s2_q     <= '0;
      s2_fine  <= '0;
      s2_c     <= '0;
    end else begin
      s1_valid <= in_valid;
      s2_valid <= s1_valid;
      if (in_valid) begin
        s1_q    <= q_in;
        s1_fine <= fine_in;
        s1_k    <= k_idx_c;
      end
      if (s1_valid) begin
        s2_q    <= s1_q;
        s2_fine <= s1_fine;
        s2_c    <= coef[s1_k];
      end
    end
  end

  // ---- stage 3: Q = Q_i x C_k ----
  coef_multiplier #(
    .CHARGE_W  (CHARGE_W),
    .COEF_W    (COEF_W),
    .COEF_FRAC (COEF_FRAC),
    .FINE_W    (FINE_W),
    .OUT_W     (QCORR_W)
  ) u_mult (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (s2_valid),
    .q_in      (s2_q),
    .coef      (s2_c),
    .fine_in   (s2_fine),
    .out_valid (out_valid),
    .q_out     (q_out),
    .fine_out  (fine_out)
  );

  // The fine time must be a TDC code and the time walk less than one period.
  a_fine_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (fine_in >= 1 && fine_in <= FINE_W'(BINS)))
    else $error("fine time %0d out of 1..%0d", fine_in, BINS);
  a_walk_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (dt < WALK_W'(BINS)))
    else $error("time walk %0d not below %0d", dt, BINS);

endmodule
