// conv3x3_mac: 3x3 convolution multiply-accumulate unit.
//
// Each clock it takes one 3x3 window of one input channel (9 unsigned B_a-bit
// activations) and the matching 3x3 kernel (9 signed B_w-bit weights), forms
// the 9 products in parallel, sums them in an adder tree and adds the sum to
// an accumulator. in_first restarts the accumulator with this window's sum;
// in_last marks the last input channel of an output pixel, and one clock
// later out_valid pulses with the complete MAC result out_acc. A window may
// be first and last at once (a single input channel).
//
// The paper shows this unit only as the "3x3 Convolution MAC block"; the one
// window per clock organisation, the first/last framing and the 1-cycle
// latency are this design's choices. The accumulator wraps at ACC_W bits;
// ACC_W is chosen wide enough that a real layer cannot overflow it.
module conv3x3_mac #(
  parameter int unsigned BA    = qnn_pkg::BA_DEF,
  parameter int unsigned BW    = qnn_pkg::BW_DEF,
  parameter int unsigned ACC_W = qnn_pkg::ACC_W_DEF,
  parameter int unsigned TAPS  = qnn_pkg::TAPS
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           in_valid,
  input  logic                           in_first,
  input  logic                           in_last,
  input  logic [TAPS-1:0][BA-1:0]        act,
  input  logic [TAPS-1:0][BW-1:0]        wgt,
  output logic                           out_valid,
  output logic signed [ACC_W-1:0]        out_acc
);
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] win_sum;
  logic signed [ACC_W-1:0] acc_next;

  always_comb begin
    win_sum = '0;
    for (int k = 0; k < TAPS; k++) begin
      win_sum += ACC_W'($signed({1'b0, act[k]}) * $signed(wgt[k]));
    end
    acc_next = in_first ? win_sum : acc + win_sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      out_valid <= 1'b0;
      out_acc   <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        acc <= acc_next;
        if (in_last) out_acc <= acc_next;
      end
    end
  end
endmodule
