// threshold_quantizer: non-uniform activation quantizer built from thresholds.
//
// It maps a signed MAC result x to an unsigned B_a-bit code y:
//   y = 0          for x <= 0            (the ReLU part, fixed threshold 0)
//   y = i          for t_{i-1} < x <= t_i, i = 1 .. 2^B_a-2 (t_0 = 0)
//   y = 2^B_a - 1  for x >  t_{2^B_a-2}
// The paper's equation and its figure both give the two top intervals the
// same code 2^B_a-1, so the highest threshold of the trained set cannot change
// the output and is not stored: NT = 2^B_a - 2 thresholds are programmable.
// As the paper says, the hardware is a row of comparators (x <= t_i) feeding a
// priority MUX chain; the lowest interval that holds x wins. The thresholds
// must be loaded in increasing order for the codes to be monotonic.
//
// Interface: thr_we/thr_idx/thr_data write threshold t_{thr_idx+1}; thresholds
// reset to 0. in_valid/x enter the quantizer; out_valid/y follow one clock
// later (registered output). One sample per clock. Loading, reset values and
// the one-cycle latency are this design's choices.
module threshold_quantizer #(
  parameter int unsigned BA    = qnn_pkg::BA_DEF,
  parameter int unsigned XW    = qnn_pkg::ACC_W_DEF,
  parameter int unsigned NT    = (1 << BA) - 2,
  parameter int unsigned IDX_W = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 thr_we,
  input  logic [IDX_W-1:0]     thr_idx,
  input  logic signed [XW-1:0] thr_data,
  input  logic                 in_valid,
  input  logic signed [XW-1:0] x,
  output logic                 out_valid,
  output logic [BA-1:0]        y
);
  localparam logic [BA-1:0] YMAX = BA'((1 << BA) - 1);

  logic signed [XW-1:0] thr [NT];
  logic [NT-1:0]        le;      // comparator outputs: x <= t_{i+1}
  logic [BA-1:0]        y_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NT; i++) thr[i] <= '0;
    end else if (thr_we && (32'(thr_idx) < NT)) begin
      thr[thr_idx] <= thr_data;
    end
  end

  always_comb begin
    for (int i = 0; i < NT; i++) le[i] = (x <= thr[i]);
  end

  // Priority MUX chain, highest interval first so the lowest match wins.
  always_comb begin
    y_c = YMAX;
    for (int i = NT - 1; i >= 0; i--) begin
      if (le[i]) y_c = BA'(i + 1);
    end
    if (x <= 0) y_c = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= y_c;
    end
  end
endmodule
