// Charge zone finder shared by both correction algorithms.
//
// The charge range is cut into N_ZONES contiguous zones Q_kL..Q_kH. Zone k
// (0-based) ends at bound[k]; the last zone has no upper end. The zone of q is
// the first k with q <= bound[k], or N_ZONES-1 if q exceeds every bound.
// Bounds are expected in ascending order (the calibration produces them so);
// they are written through the configuration port of the correction block that
// owns them. Purely combinational.
module charge_zone_finder #(
  parameter int unsigned CHARGE_W = 17,
  parameter int unsigned N_ZONES  = 4,
  parameter int unsigned ZONE_W   = (N_ZONES > 1) ? $clog2(N_ZONES) : 1
) (
  input  logic [CHARGE_W-1:0] q,
  input  logic [CHARGE_W-1:0] bound [N_ZONES-1],
  output logic [ZONE_W-1:0]   zone
);

  always_comb begin
    zone = ZONE_W'(N_ZONES - 1);
    for (int k = N_ZONES - 2; k >= 0; k--) begin
      if (q <= bound[k]) zone = ZONE_W'(k);
    end
  end

endmodule
