// Charge-by-coefficient multiplier, Q = Q_i x C.
//
// C is an unsigned fixed-point number with COEF_FRAC fraction bits (1.0 is
// 1 << COEF_FRAC). The product is rounded to the nearest integer (half up) and
// registered: out_valid/q_out follow in_valid/q_in by one clock. The output is
// one bit wider than the charge, which holds every product for C < 2.0. The
// fine time travels alongside unchanged. The fixed-point format is this
// implementation's choice; the description gives only the product.
module coef_multiplier #(
  parameter int unsigned CHARGE_W  = 17,
  parameter int unsigned COEF_W    = 16,
  parameter int unsigned COEF_FRAC = 15,
  parameter int unsigned FINE_W    = 6,
  parameter int unsigned OUT_W     = CHARGE_W + COEF_W - COEF_FRAC
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [CHARGE_W-1:0] q_in,
  input  logic [COEF_W-1:0]   coef,
  input  logic [FINE_W-1:0]   fine_in,
  output logic                out_valid,
  output logic [OUT_W-1:0]    q_out,
  output logic [FINE_W-1:0]   fine_out
);

  localparam int unsigned PROD_W = CHARGE_W + COEF_W;

  logic [PROD_W-1:0] prod;
  logic [PROD_W-1:0] prod_rnd;

  always_comb begin
    prod     = PROD_W'(q_in) * PROD_W'(coef);
    prod_rnd = prod + PROD_W'(1 << (COEF_FRAC - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      q_out     <= '0;
      fine_out  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        q_out    <= OUT_W'(prod_rnd >> COEF_FRAC);
        fine_out <= fine_in;
      end
    end
  end

endmodule
