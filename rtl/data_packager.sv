// Data packaging block.
//
// Packs each corrected measurement (fine time and corrected charge, see
// meas_t) into one PKT_W-bit word, fine time in the upper bits, and holds it
// for the data interface block under a valid/ready handshake. The buffer is a
// single word: a new measurement is accepted when the buffer is empty or is
// being emptied in the same cycle; otherwise it is dropped and drop_count
// (saturating) goes up. At the 27-sample dead time a measurement comes at most
// every 27 clocks, so drops mean the interface stalled for that long.
//
// Timing: pkt_valid rises the clock after in_valid; the word stays until
// pkt_ready is seen with pkt_valid. The description says only that corrected
// charge and fine time are packaged; word layout, buffer depth and drop
// counting are this design's choices.
//
// Lint reports rst_n as used both synchronously and asynchronously. That
// comes from the assertions below, which are disabled during reset; every
// flip-flop that is reset uses rst_n as an asynchronous reset.
module data_packager
  import charge_meas_pkg::*;
#(
  parameter int unsigned DROP_W = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  meas_t             in,
  output logic              pkt_valid,
  output logic [PKT_W-1:0]  pkt_data,
  input  logic              pkt_ready,
  output logic [DROP_W-1:0] drop_count
);

  logic accept;

  assign accept = in_valid && (!pkt_valid || pkt_ready);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pkt_valid  <= 1'b0;
      pkt_data   <= '0;
      drop_count <= '0;
    end else begin
      if (accept) begin
        pkt_valid <= 1'b1;
        pkt_data  <= in;
      end else if (pkt_ready) begin
        pkt_valid <= 1'b0;
      end
      if (in_valid && !accept && drop_count != '1) drop_count <= drop_count + 1'b1;
    end
  end

  // handshake rule: a word on offer stays unchanged until taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      pkt_valid && !pkt_ready |=> pkt_valid && $stable(pkt_data))
    else $error("packet changed before it was taken");

endmodule
