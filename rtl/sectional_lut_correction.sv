// Sectional-LUT charge correction.
//
// The charge range is divided into N_ZONES sections, the same ranges as the
// zones of the dual-LUT method, so no time walk occurs inside a section. Each
// section has its own 48-entry table of coefficients C_{s,i}, indexed by the
// uncorrected fine time i; the output is Q = Q_i x C_{s,i}. This absorbs both
// the time walk and a curve shape that changes with amplitude. The section
// bounds and the N_ZONES x 48 coefficients live in registers (distributed
// RAM), written through cfg (tables TBL_SECT_THRESH and TBL_SECT_COEF, the
// latter at address s*48 + i - 1); they are not reset.
//
// Pipeline, one measurement per clock, latency 3 like the dual-LUT block:
//   stage 1  section lookup                               (registered)
//   stage 2  read of C_{s,i}                              (registered)
//   stage 3  Q_i x C, rounded                             (registered)
//
// Table structure and product follow the design description; bound encoding,
// coefficient format and pipeline depth are this implementation's choices.
//
// Lint reports rst_n as used both synchronously and asynchronously. That
// comes from the assertions below, which are disabled during reset; every
// flip-flop that is reset uses rst_n as an asynchronous reset.
module sectional_lut_correction
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

  localparam int unsigned ZW     = (ZONES > 1) ? $clog2(ZONES) : 1;
  localparam int unsigned KW     = $clog2(BINS);
  localparam int unsigned DEPTH  = ZONES * BINS;
  localparam int unsigned AW     = $clog2(DEPTH);

  logic [CHARGE_W-1:0] bound [ZONES-1];
  logic [COEF_W-1:0]   coef  [DEPTH];        // index s*BINS + i - 1

  always_ff @(posedge clk) begin
    if (cfg.we) begin
      unique case (cfg.table_sel)
        TBL_SECT_THRESH:
          if (cfg.addr < CFG_ADDR_W'(ZONES - 1)) bound[ZW'(cfg.addr)] <= CHARGE_W'(cfg.data);
        TBL_SECT_COEF:
          if (cfg.addr < CFG_ADDR_W'(DEPTH))       coef[AW'(cfg.addr)]  <= COEF_W'(cfg.data);
        default: ;
      endcase
    end
  end

  // ---- stage 1: section ----
  logic [ZW-1:0] zone;

  charge_zone_finder #(
    .CHARGE_W (CHARGE_W),
    .N_ZONES  (ZONES),
    .ZONE_W   (ZW)
  ) u_zone (
    .q     (q_in),
    .bound (bound),
    .zone  (zone)
  );

  logic                s1_valid;
  logic [CHARGE_W-1:0] s1_q;
  logic [FINE_W-1:0]   s1_fine;
  logic [AW-1:0]       s1_addr;

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
      s1_addr  <= '0;
      s2_q     <= '0;
      s2_fine  <= '0;
      s2_c     <= '0;
    end else begin
      s1_valid <= in_valid;
      s2_valid <= s1_valid;
      if (in_valid) begin
        s1_q    <= q_in;
        s1_fine <= fine_in;
        s1_addr <= AW'(zone) * AW'(BINS) + AW'(KW'(fine_in - 1'b1));
      end
      if (s1_valid) begin
        s2_q    <= s1_q;
        s2_fine <= s1_fine;
        s2_c    <= coef[s1_addr];
      end
    end
  end

  // ---- stage 3: Q = Q_i x C_{s,i} ----
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

  a_fine_range: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (fine_in >= 1 && fine_in <= FINE_W'(BINS)))
    else $error("fine time %0d out of 1..%0d", fine_in, BINS);

endmodule
