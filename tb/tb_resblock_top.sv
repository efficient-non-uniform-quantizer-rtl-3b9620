// tb_resblock_top: end-to-end test of the quantized residual basic block.
//
// Builds a random block input and random kernels, derives both quantizers'
// thresholds the way the method intends (equiprobable bins over the positive
// values actually seen, here taken from this testbench's own reference
// model), loads everything through the block's ports, runs the block
// NRUNS times and compares every output word with a reference computed here:
//   q1 = Q(x, T1); m1 = conv3x3(q1, W1); q2 = Q(m1, T2);
//   y  = sat(conv3x3(q2, W2) + x)
// with zero padding at the borders. It also checks the output order and
// count, and that a run takes one clock per 3x3 window (plus a fixed
// overhead). Each mechanism of the block must occur at least once: values
// clamped to code 0, values in the top code, border windows that read the
// zero padding, residual sums that saturate, and a second run after done
// that takes the first run's output as its input (two chained blocks).
// Reduced size here (CH=4, 5x6 map, precision 3,3); the full-size twin runs
// the default 64-channel 32x32 block at precision 4,4.
module tb_resblock_top;
  localparam int unsigned CH = 4, H = 5, W = 6, BA = 3, BW = 3;
  localparam int unsigned NRUNS = 2;
  localparam int unsigned ACC_W = 24;
  localparam int unsigned NPIX = H * W, DEPTH = CH * NPIX;
  localparam int unsigned AW = $clog2(DEPTH), WAW = $clog2(CH * CH);
  localparam int unsigned NT = (1 << BA) - 2, TIW = (NT > 1) ? $clog2(NT) : 1;
  localparam int unsigned TAPS = 9;
  localparam longint MAXV = (64'sd1 <<< (ACC_W - 1)) - 1;
  localparam longint MINV = -(64'sd1 <<< (ACC_W - 1));
  localparam longint RUN_CYC = longint'(DEPTH) * (2 * CH + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  logic busy, done;
  logic in_we = 1'b0;
  logic [AW-1:0] in_addr = '0;
  logic signed [ACC_W-1:0] in_data = '0;
  logic w_we = 1'b0, w_sel = 1'b0;
  logic [WAW-1:0] w_addr = '0;
  logic [TAPS-1:0][BW-1:0] w_data = '0;
  logic thr_we = 1'b0, thr_sel = 1'b0;
  logic [TIW-1:0] thr_idx = '0;
  logic signed [ACC_W-1:0] thr_data = '0;
  logic out_valid;
  logic [AW-1:0] out_addr;
  logic signed [ACC_W-1:0] out_data;
  logic out_sat;

  always #5 clk = ~clk;

  resblock_top #(.CH(CH), .H(H), .W(W), .BA(BA), .BW(BW), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int xin [DEPTH];
  int q1 [DEPTH];
  int m1 [DEPTH];
  int q2 [DEPTH];
  longint yexp [DEPTH];
  bit     ysat [DEPTH];
  int w1 [CH*CH][TAPS];
  int w2 [CH*CH][TAPS];
  int t1 [NT];
  int t2 [NT];
  int n_out, n_zero_clamp, n_top_code, n_pad_win, n_res_sat, n_runs_done;
  longint cyc = 0, t_start;

  always_ff @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (int'(longint'(NRUNS) * RUN_CYC * 2 + 200000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int refq(int v, const ref int t[NT]);
    int c = 0;
    if (v > 0) c++;
    for (int i = 0; i < NT; i++) if (v > t[i]) c++;
    return c;
  endfunction

  // Equiprobable thresholds over the positive values of v.
  task automatic pick_thresholds(const ref int v[DEPTH], ref int t[NT]);
    int pos[$];
    int n;
    foreach (v[i]) if (v[i] > 0) pos.push_back(v[i]);
    pos.sort();
    n = pos.size();
    for (int i = 0; i < NT; i++) begin
      t[i] = (n > 0) ? pos[((i + 1) * n) / (NT + 2)] : i + 1;
      if (i > 0 && t[i] <= t[i-1]) t[i] = t[i-1] + 1;
    end
  endtask

  function automatic int conv_at(const ref int a[DEPTH], const ref int w[CH*CH][TAPS],
                                 int oc, int y, int x);
    int s = 0;
    for (int ic = 0; ic < CH; ic++)
      for (int k = 0; k < TAPS; k++) begin
        int yy, xx;
        yy = y + k / 3 - 1; xx = x + k % 3 - 1;
        if (yy >= 0 && yy < H && xx >= 0 && xx < W)
          s += a[ic*NPIX + yy*W + xx] * w[oc*CH + ic][k];
      end
    return s;
  endfunction

  task automatic build_reference();
    for (int i = 0; i < DEPTH; i++) q1[i] = refq(xin[i], t1);
    for (int oc = 0; oc < CH; oc++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++)
          m1[oc*NPIX + y*W + x] = conv_at(q1, w1, oc, y, x);
  endtask

  task automatic finish_reference();
    longint s;
    for (int i = 0; i < DEPTH; i++) q2[i] = refq(m1[i], t2);
    for (int oc = 0; oc < CH; oc++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          s = longint'(conv_at(q2, w2, oc, y, x)) + longint'(xin[oc*NPIX + y*W + x]);
          yexp[oc*NPIX + y*W + x] = (s > MAXV) ? MAXV : (s < MINV) ? MINV : s;
          ysat[oc*NPIX + y*W + x] = (s > MAXV) || (s < MINV);
        end
  endtask

  // Output monitor: order, value, saturation flag.
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (int'(out_addr) != n_out || longint'(out_data) != yexp[out_addr]) begin
        failures++;
        if (failures < 20)
          $display("FAIL out #%0d addr=%0d data=%0d exp=%0d", n_out, out_addr, out_data,
                   yexp[out_addr]);
      end
      checks++;
      if (out_sat != ysat[out_addr]) begin
        failures++;
        if (failures < 20) $display("FAIL sat flag addr=%0d", out_addr);
      end
      if (out_sat) n_res_sat++;
      n_out++;
    end
  end

  initial begin
    int v, span;
    n_zero_clamp = 0; n_top_code = 0; n_pad_win = 0; n_res_sat = 0; n_runs_done = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    for (int run = 0; run < NRUNS; run++) begin
      // Fresh kernels for every run: each run is the next block of a chain.
      for (int i = 0; i < CH*CH; i++)
        for (int k = 0; k < TAPS; k++) begin
          w1[i][k] = int'($urandom_range(0, (1 << BW) - 1)) - (1 << (BW - 1));
          w2[i][k] = int'($urandom_range(0, (1 << BW) - 1)) - (1 << (BW - 1));
        end
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < CH*CH; i++) begin
          w_we = 1'b1; w_sel = s[0]; w_addr = WAW'(i);
          for (int k = 0; k < TAPS; k++) w_data[k] = BW'(s == 0 ? w1[i][k] : w2[i][k]);
          @(negedge clk);
        end
      w_we = 1'b0;
      // Block input: MAC-scale values around a Gaussian-like spread, some
      // negative, a few near the positive and negative limits.
      span = 900 * (run + 1);
      for (int i = 0; i < DEPTH; i++) begin
        v = int'($urandom_range(0, span)) + int'($urandom_range(0, span)) - span / 2;
        if (i % 97 == 5)  v = int'(MAXV) - int'($urandom_range(0, 3));
        if (i % 101 == 7) v = int'(MINV) + int'($urandom_range(0, 3));
        // After the first run the input is the previous block's output, so
        // the un-quantized sum is quantized by the next block's Q1.
        xin[i] = (run == 0) ? v : int'(yexp[i]);
      end
      // Word 0 gets a large positive value, so its activation code is the
      // top one and a border tap that read word 0 instead of zero would show.
      xin[0] = 1 << 20;
      pick_thresholds(xin, t1);
      build_reference();
      pick_thresholds(m1, t2);
      finish_reference();
      foreach (q1[i]) begin
        if (xin[i] <= 0) n_zero_clamp++;
        if (q1[i] == (1 << BA) - 1) n_top_code++;
      end
      foreach (q2[i]) if (q2[i] == (1 << BA) - 1) n_top_code++;
      n_pad_win += CH * (2 * W + 2 * H - 4);

      for (int i = 0; i < DEPTH; i++) begin
        in_we = 1'b1; in_addr = AW'(i); in_data = ACC_W'(xin[i]);
        @(negedge clk);
      end
      in_we = 1'b0;
      for (int s = 0; s < 2; s++)
        for (int i = 0; i < NT; i++) begin
          thr_we = 1'b1; thr_sel = s[0]; thr_idx = TIW'(i);
          thr_data = ACC_W'(s == 0 ? t1[i] : t2[i]);
          @(negedge clk);
        end
      thr_we = 1'b0;

      n_out = 0;
      start = 1'b1;
      t_start = cyc;
      @(negedge clk);
      start = 1'b0;
      checks++;
      if (!busy) begin failures++; $display("FAIL busy not raised"); end
      while (!done) @(negedge clk);
      n_runs_done++;
      checks++;
      if (cyc - t_start < RUN_CYC || cyc - t_start > RUN_CYC + 20) begin
        failures++;
        $display("FAIL run took %0d clocks, expected %0d + overhead", cyc - t_start, RUN_CYC);
      end
      @(negedge clk);
      checks++;
      if (n_out != DEPTH || busy) begin
        failures++;
        $display("FAIL %0d outputs, expected %0d (busy=%0b)", n_out, DEPTH, busy);
      end
      $display("run %0d: %0d clocks for %0d windows", run, cyc - t_start, 2 * CH * DEPTH);
    end

    $display("mechanisms: zero_clamp=%0d top_code=%0d pad_windows=%0d res_sat=%0d runs=%0d",
             n_zero_clamp, n_top_code, n_pad_win, n_res_sat, n_runs_done);
    checks++; if (n_zero_clamp == 0) begin failures++; $display("FAIL no zero clamp"); end
    checks++; if (n_top_code == 0)   begin failures++; $display("FAIL no top code"); end
    checks++; if (n_pad_win == 0)    begin failures++; $display("FAIL no padding"); end
    checks++; if (n_res_sat == 0)    begin failures++; $display("FAIL no residual saturation"); end
    checks++; if (n_runs_done != NRUNS) begin failures++; $display("FAIL runs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
