// Shared constants and types of the charge measurement and correction logic.
//
// The numbers that come from the design description are: a 12-bit ADC, 27
// summation points, 48 TDC bins per ADC clock period (333 ps bins at a
// 62.5 MHz sampling clock) and four charge zones (four time-walk values were
// found in calibration). Coefficient format, configuration bus and packet
// layout are choices of this implementation.
package charge_meas_pkg;

  // ADC and integration
  localparam int unsigned ADC_W      = 12;                    // ADC resolution
  localparam int unsigned N_SUM      = 27;                    // summation points
  localparam int unsigned CHARGE_W   = $clog2(N_SUM * ((1 << ADC_W) - 1) + 1); // 17

  // TDC
  localparam int unsigned FINE_BINS  = 48;                    // bins per ADC period
  localparam int unsigned FINE_W     = $clog2(FINE_BINS + 1); // 6, holds 1..48

  // Correction LUTs
  localparam int unsigned N_ZONES    = 4;                     // charge zones / sections
  localparam int unsigned COEF_W     = 16;                    // unsigned coefficient
  localparam int unsigned COEF_FRAC  = 15;                    // 1.0 == 1 << 15
  localparam int unsigned QCORR_W    = CHARGE_W + 1;          // Q x C with C < 2.0
  localparam int unsigned WALK_W     = FINE_W;                // time walk, 0..47 bins

  // Configuration write port shared by all correction tables
  localparam int unsigned CFG_ADDR_W = 8;                     // 4 x 48 = 192 words max
  localparam int unsigned CFG_DATA_W = 18;

  typedef enum logic [2:0] {
    TBL_DUAL_THRESH = 3'd0,  // LUT I zone upper bounds Q_kH, addr = zone
    TBL_DUAL_WALK   = 3'd1,  // LUT I time walk dt, addr = zone
    TBL_DUAL_COEF   = 3'd2,  // LUT II C_k, addr = k - 1
    TBL_SECT_THRESH = 3'd3,  // sectional LUT section upper bounds, addr = section
    TBL_SECT_COEF   = 3'd4   // sectional LUT C_{s,i}, addr = s * 48 + i - 1
  } cfg_table_e;

  typedef struct packed {
    logic                  we;
    cfg_table_e            table_sel;
    logic [CFG_ADDR_W-1:0] addr;
    logic [CFG_DATA_W-1:0] data;
  } cfg_wr_t;

  typedef enum logic {
    ALG_DUAL_LUT      = 1'b0,
    ALG_SECTIONAL_LUT = 1'b1
  } corr_alg_e;

  // One measurement after correction, as handed to the data packaging block
  typedef struct packed {
    logic [FINE_W-1:0]  fine_time;
    logic [QCORR_W-1:0] charge;
  } meas_t;

  localparam int unsigned PKT_W = $bits(meas_t);              // 24

endpackage
