// residual_add: the adder that closes the residual path of the basic block.
//
// It adds the second convolution's MAC result (mac) to the block input taken
// before quantization (res), so both operands are in the same integer MAC
// scale, as the modified block requires. The sum saturates to the signed
// ACC_W-bit range instead of wrapping, and sat flags a saturated result.
// Registered: out_valid/sum/sat follow in_valid by one clock. Saturation and
// the register are this design's choices; the paper shows only the "+" node.
module residual_add #(
  parameter int unsigned ACC_W = qnn_pkg::ACC_W_DEF
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] mac,
  input  logic signed [ACC_W-1:0] res,
  output logic                    out_valid,
  output logic signed [ACC_W-1:0] sum,
  output logic                    sat
);
  localparam logic signed [ACC_W-1:0] MAXV = {1'b0, {(ACC_W-1){1'b1}}};
  localparam logic signed [ACC_W-1:0] MINV = {1'b1, {(ACC_W-1){1'b0}}};

  logic signed [ACC_W:0]   wide;
  logic signed [ACC_W-1:0] sum_c;
  logic                    sat_c;

  always_comb begin
    wide = (ACC_W+1)'(mac) + (ACC_W+1)'(res);
    if (wide > (ACC_W+1)'(MAXV)) begin
      sum_c = MAXV; sat_c = 1'b1;
    end else if (wide < (ACC_W+1)'(MINV)) begin
      sum_c = MINV; sat_c = 1'b1;
    end else begin
      sum_c = wide[ACC_W-1:0]; sat_c = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      sum       <= '0;
      sat       <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        sum <= sum_c;
        sat <= sat_c;
      end
    end
  end
endmodule
