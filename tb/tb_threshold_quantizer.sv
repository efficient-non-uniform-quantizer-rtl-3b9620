// tb_threshold_quantizer: self-checking test of the threshold quantizer.
//
// Loads a random increasing threshold set, then drives random MAC values
// (negative, zero, exactly on a threshold, one above it, beyond the top one)
// and compares each code with a reference that counts how many of the
// thresholds {0, t_1 .. t_NT} the value exceeds. Checks the one-clock latency
// and that every code 0 .. 2^BA-1 is produced. Runs at BA = 4.
module tb_threshold_quantizer;
  localparam int unsigned BA  = 4;
  localparam int unsigned XW  = 24;
  localparam int unsigned NT  = (1 << BA) - 2;
  localparam int unsigned TIW = $clog2(NT);

  logic clk = 1'b0, rst_n = 1'b0;
  logic thr_we = 1'b0;
  logic [TIW-1:0] thr_idx = '0;
  logic signed [XW-1:0] thr_data = '0;
  logic in_valid = 1'b0;
  logic signed [XW-1:0] x = '0;
  logic out_valid;
  logic [BA-1:0] y;

  int checks = 0, failures = 0;
  int thr [NT];
  int hit [1 << BA];

  always #5 clk = ~clk;

  threshold_quantizer #(.BA(BA), .XW(XW)) dut (.*);

  function automatic int ref_q(int v);
    int c = 0;
    if (v > 0) c++;
    for (int i = 0; i < NT; i++) if (v > thr[i]) c++;
    return c;
  endfunction

  task automatic apply(int v);
    int exp_y;
    @(negedge clk);
    in_valid = 1'b1; x = XW'(v);
    exp_y = ref_q(v);
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || int'(y) != exp_y) begin
      failures++;
      $display("FAIL x=%0d y=%0d exp=%0d valid=%0b", v, y, exp_y, out_valid);
    end
    hit[exp_y]++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t, v;
    foreach (hit[i]) hit[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Increasing thresholds, spaced like the quantile thresholds of a
    // Gaussian MAC distribution (widening gaps).
    t = 0;
    for (int i = 0; i < NT; i++) begin
      t += 100 + int'($urandom_range(0, 200)) + 20 * i;
      thr[i] = t;
    end
    for (int i = 0; i < NT; i++) begin
      @(negedge clk);
      thr_we = 1'b1; thr_idx = TIW'(i); thr_data = XW'(thr[i]);
    end
    @(negedge clk);
    thr_we = 1'b0;
    // Valid must be low when nothing is driven.
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL spurious valid"); end
    // Corner values.
    apply(-(1 << (XW - 1)));
    apply(-1);
    apply(0);
    apply(1);
    for (int i = 0; i < NT; i++) begin
      apply(thr[i]);
      apply(thr[i] + 1);
      apply(thr[i] - 1);
    end
    apply((1 << (XW - 1)) - 1);
    // Random values over and beyond the threshold range.
    for (int n = 0; n < 2000; n++) begin
      v = int'($urandom_range(0, 2 * t + 400)) - 200;
      apply(v);
    end
    for (int i = 0; i < (1 << BA); i++) begin
      checks++;
      if (hit[i] == 0) begin failures++; $display("FAIL code %0d never produced", i); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
