// tb_residual_add: self-checking test of the saturating residual adder.
//
// Drives random pairs of MAC-scale integers, pairs near the positive and
// negative limits (so that the sum saturates both ways) and pairs that just
// fit, and compares sum and sat with a reference computed in 64-bit integers.
// Checks the one-clock latency and that both saturation directions occurred.
module tb_residual_add;
  localparam int unsigned ACC_W = 24;
  localparam longint MAXV = (64'sd1 <<< (ACC_W - 1)) - 1;
  localparam longint MINV = -(64'sd1 <<< (ACC_W - 1));

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic signed [ACC_W-1:0] mac = '0, res = '0;
  logic out_valid;
  logic signed [ACC_W-1:0] sum;
  logic sat;

  int checks = 0, failures = 0, n_pos_sat = 0, n_neg_sat = 0;

  always #5 clk = ~clk;

  residual_add #(.ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(longint a, longint b);
    longint s, e;
    bit es;
    s = a + b;
    if (s > MAXV) begin e = MAXV; es = 1'b1; n_pos_sat++; end
    else if (s < MINV) begin e = MINV; es = 1'b1; n_neg_sat++; end
    else begin e = s; es = 1'b0; end
    in_valid = 1'b1; mac = ACC_W'(a); res = ACC_W'(b);
    @(negedge clk);
    in_valid = 1'b0;
    checks++;
    if (!out_valid || longint'(sum) != e || sat != es) begin
      failures++;
      $display("FAIL a=%0d b=%0d sum=%0d exp=%0d sat=%0b", a, b, sum, e, sat);
    end
  endtask

  function automatic longint rnd();
    return longint'($urandom_range(0, (1 << ACC_W) - 1)) + MINV;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL spurious valid"); end
    apply(MAXV, 1);
    apply(MAXV, 0);
    apply(MINV, -1);
    apply(MINV, 0);
    apply(MAXV, MINV);
    apply(MAXV - 5, 5);
    apply(MAXV - 5, 6);
    apply(-100, 37);
    for (int n = 0; n < 3000; n++) apply(rnd(), rnd());
    for (int n = 0; n < 200; n++) apply(longint'($urandom_range(0, 50000)), -longint'($urandom_range(0, 50000)));
    checks++;
    if (n_pos_sat == 0 || n_neg_sat == 0) begin failures++; $display("FAIL saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
