// tb_conv3x3_mac: self-checking test of the 3x3 MAC unit.
//
// Streams output pixels made of a random number of input channels (1 to 8),
// one 3x3 window per clock, with random idle gaps or back to back, using
// random unsigned 4-bit activations and signed 4-bit weights, and pixels of
// all-extreme values. Each result is compared with a sum computed here and
// must be valid in the clock right after the edge that took the last window,
// and only then.
module tb_conv3x3_mac;
  localparam int unsigned BA = 4, BW = 4, ACC_W = 24, TAPS = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0;
  logic [TAPS-1:0][BA-1:0] act = '0;
  logic [TAPS-1:0][BW-1:0] wgt = '0;
  logic out_valid;
  logic signed [ACC_W-1:0] out_acc;

  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  conv3x3_mac #(.BA(BA), .BW(BW), .ACC_W(ACC_W), .TAPS(TAPS)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nch, expv, a, w;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < 400; p++) begin
      nch = int'($urandom_range(1, 8));
      expv = 0;
      for (int c = 0; c < nch; c++) begin
        in_valid = 1'b1; in_first = (c == 0); in_last = (c == nch - 1);
        for (int k = 0; k < TAPS; k++) begin
          a = (p % 7 == 0) ? 15 : int'($urandom_range(0, 15));
          w = (p % 7 == 0) ? ((p % 2) ? -8 : 7) : int'($urandom_range(0, 15)) - 8;
          act[k] = BA'(a); wgt[k] = BW'(w);
          expv += a * w;
        end
        @(negedge clk);
        checks++;
        if (c == nch - 1) begin
          if (!out_valid || int'(out_acc) != expv) begin
            failures++;
            $display("FAIL p=%0d acc=%0d exp=%0d valid=%0b", p, out_acc, expv, out_valid);
          end
        end else if (out_valid) begin
          failures++; $display("FAIL early valid p=%0d c=%0d", p, c);
        end
        in_valid = 1'b0; in_first = 1'b0; in_last = 1'b0;
        if ($urandom_range(0, 2) == 0) begin
          @(negedge clk);
          checks++;
          if (out_valid) begin failures++; $display("FAIL valid in gap p=%0d", p); end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
