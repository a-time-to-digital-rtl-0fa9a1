// Self-checking testbench of the data packaging block.
//
// Sends measurements at random intervals while the receiving side takes words
// with a random ready pattern, including long stalls. The reference keeps a
// one-word model of the buffer: each word must come out once, unchanged, as
// {fine time, corrected charge}, in order, and measurements arriving while the
// buffer is full and not being emptied must be dropped and counted. Both
// back-pressure with a hold and drops must occur.
`timescale 1ns / 1ps
module tb_data_packager;
  import charge_meas_pkg::*;

  logic clk = 1'b0, rst_n;
  logic in_valid, pkt_valid, pkt_ready;
  meas_t in;
  logic [PKT_W-1:0] pkt_data;
  logic [15:0] drop_count;

  int checks = 0, failures = 0;
  int drops = 0, holds = 0, taken = 0;

  always #8 clk = ~clk;

  data_packager dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in(in), .pkt_valid(pkt_valid),
    .pkt_data(pkt_data), .pkt_ready(pkt_ready), .drop_count(drop_count)
  );

  bit             ref_full = 0;
  logic [PKT_W-1:0] ref_word;

  initial begin
    in_valid = 0; in = '0; pkt_ready = 0; rst_n = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      in_valid     = ($urandom_range(4) == 0);
      in.fine_time = FINE_W'($urandom_range(1, 48));
      in.charge    = QCORR_W'($urandom);
      pkt_ready    = (n % 200 < 100) ? ($urandom_range(1) == 1) : ($urandom_range(15) == 0);
      // outputs of this cycle against the model
      checks++;
      if (pkt_valid != ref_full || (ref_full && pkt_data != ref_word) ||
          int'(drop_count) != drops) begin
        failures++;
        $display("FAIL: cycle %0d valid=%0b data=%h drops=%0d, expected %0b %h %0d", n,
                 pkt_valid, pkt_data, drop_count, ref_full, ref_word, drops);
      end
      // model update at the coming edge
      if (ref_full && pkt_ready) taken++;
      if (ref_full && !pkt_ready) holds++;
      if (in_valid && (!ref_full || pkt_ready)) begin
        ref_full = 1;
        ref_word = {in.fine_time, in.charge};
      end else begin
        if (in_valid) drops++;
        if (pkt_ready) ref_full = 0;
      end
    end
    checks++;
    if (drops == 0 || holds == 0 || taken < 100) begin
      failures++;
      $display("FAIL: drops=%0d holds=%0d taken=%0d", drops, holds, taken);
    end
    $display("drops=%0d holds=%0d taken=%0d", drops, holds, taken);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
