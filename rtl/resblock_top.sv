// resblock_top: integer-only residual basic block with threshold quantizers.
//
// This is the modified ResNet basic block: the activation quantizer that a
// standard block applies after the residual sum is moved to the input of the
// block, so the residual path carries un-quantized MAC-scale integers and is
// added at the same scale as the second convolution's MAC result:
//
//   x --> Q1 --> conv3x3 (W1) --> Q2 --> conv3x3 (W2) --> (+) --> y
//   |                                                      ^
//   +------------------------------------------------------+
//
// Q1 and Q2 are threshold_quantizer instances (their own per-layer threshold
// sets), the convolutions share one conv3x3_mac, and residual_add forms y.
// y is again MAC-scale, ready for the Q1 of the next block. That structure
// follows the paper; the rest is this design's own: the whole block works
// on one CH x H x W feature map held on chip, in three passes run by a
// sequencer:
//   QIN   : Q1(x) for every word -> act1 buffer         (DEPTH clocks)
//   CONV1 : Q2(conv(act1, W1))   -> act2 buffer         (CH*DEPTH clocks)
//   CONV2 : conv(act2, W2) + x   -> output stream       (CH*DEPTH clocks)
// with a short drain between passes. A convolution pass visits output
// channel, row, column and, innermost, input channel; each clock one 3x3
// window of one input channel enters the MAC unit. Outside the map the
// window reads zero (zero padding, stride 1, CH in = CH out, no bias).
//
// Interface (all synchronous to clk, active-low asynchronous reset):
//   in_we/in_addr/in_data   load the block input x, word c*H*W + y*W + x
//   w_we/w_sel/w_addr/w_data load kernel (oc,ic) at word oc*CH + ic of W1
//                           (w_sel = 0) or W2 (w_sel = 1); tap k = 3*dy + dx
//   thr_we/thr_sel/thr_idx/thr_data  load threshold t_{idx+1} of Q1 (sel 0)
//                           or Q2 (sel 1)
//   start                   begins a run when idle; busy is high during it,
//                           done pulses for one clock at its end
//   out_valid/out_addr/out_data/out_sat  one output word per clock during
//                           CONV2 after each CH-clock accumulation, in
//                           address order; out_sat marks a saturated sum
// Loading is only allowed while the block is idle.
module resblock_top #(
  parameter int unsigned CH    = 64,
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned BA    = qnn_pkg::BA_DEF,
  parameter int unsigned BW    = qnn_pkg::BW_DEF,
  parameter int unsigned ACC_W = qnn_pkg::ACC_W_DEF,
  parameter int unsigned NPIX  = H * W,
  parameter int unsigned DEPTH = CH * NPIX,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned WAW   = (CH * CH > 1) ? $clog2(CH * CH) : 1,
  parameter int unsigned NT    = (1 << BA) - 2,
  parameter int unsigned TIW   = (NT > 1) ? $clog2(NT) : 1
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic                                  start,
  output logic                                  busy,
  output logic                                  done,
  input  logic                                  in_we,
  input  logic [AW-1:0]                         in_addr,
  input  logic signed [ACC_W-1:0]               in_data,
  input  logic                                  w_we,
  input  logic                                  w_sel,
  input  logic [WAW-1:0]                        w_addr,
  input  logic [qnn_pkg::TAPS-1:0][BW-1:0]      w_data,
  input  logic                                  thr_we,
  input  logic                                  thr_sel,
  input  logic [TIW-1:0]                        thr_idx,
  input  logic signed [ACC_W-1:0]               thr_data,
  output logic                                  out_valid,
  output logic [AW-1:0]                         out_addr,
  output logic signed [ACC_W-1:0]               out_data,
  output logic                                  out_sat
);
  import qnn_pkg::*;

  localparam int unsigned DRAIN_CYC = 4;

  seq_state_t state, next_after_drain;
  logic [2:0]  drain_cnt;

  // Pass counters.
  logic [AW-1:0] qaddr;
  int unsigned   ic, px, py, oc;

  // ---------------------------------------------------------------- sequencer
  wire conv_phase  = (state == ST_CONV1) || (state == ST_CONV2);
  wire conv_end    = (ic == CH - 1) && (px == W - 1) && (py == H - 1) && (oc == CH - 1);
  wire qin_end     = (32'(qaddr) == DEPTH - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= ST_IDLE;
      next_after_drain <= ST_IDLE;
      drain_cnt        <= '0;
      qaddr            <= '0;
      ic <= 0; px <= 0; py <= 0; oc <= 0;
    end else begin
      unique case (state)
        ST_IDLE: if (start) begin
          state <= ST_QIN;
          qaddr <= '0;
        end
        ST_QIN: begin
          qaddr <= qaddr + 1'b1;
          if (qin_end) begin
            state            <= ST_DRAIN;
            next_after_drain <= ST_CONV1;
            drain_cnt        <= '0;
          end
        end
        ST_CONV1, ST_CONV2: begin
          if (ic == CH - 1) begin
            ic <= 0;
            if (px == W - 1) begin
              px <= 0;
              if (py == H - 1) begin
                py <= 0;
                oc <= (oc == CH - 1) ? 0 : oc + 1;
              end else py <= py + 1;
            end else px <= px + 1;
          end else ic <= ic + 1;
          if (conv_end) begin
            state            <= ST_DRAIN;
            next_after_drain <= (state == ST_CONV1) ? ST_CONV2 : ST_DONE;
            drain_cnt        <= '0;
          end
        end
        ST_DRAIN: begin
          drain_cnt <= drain_cnt + 1'b1;
          if (32'(drain_cnt) == DRAIN_CYC - 1) state <= next_after_drain;
        end
        ST_DONE: state <= ST_IDLE;
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE);
  assign done = (state == ST_DONE);

  // ------------------------------------------------------------- issue stage
  // Window addresses and zero-padding flags of the current 3x3 window.
  logic [TAPS-1:0][AW-1:0] win_addr;
  logic [TAPS-1:0]         win_pad;
  logic [AW-1:0]           pix_addr;
  logic [WAW-1:0]          wrd_addr;

  always_comb begin
    for (int k = 0; k < TAPS; k++) begin
      int yy, xx;
      yy = int'(py) + k / 3 - 1;
      xx = int'(px) + k % 3 - 1;
      win_pad[k]  = (yy < 0) || (yy >= int'(H)) || (xx < 0) || (xx >= int'(W));
      win_addr[k] = win_pad[k] ? '0 : AW'(ic * NPIX + 32'(yy) * W + 32'(xx));
    end
    pix_addr = AW'(oc * NPIX + py * W + px);
    wrd_addr = WAW'(oc * CH + ic);
  end

  // Stage 1: buffer and weight reads are in flight.
  logic                s1_valid, s1_first, s1_last, s1_conv2;
  logic [TAPS-1:0]     s1_pad;
  logic [AW-1:0]       s1_pix;
  // Stage 2: MAC result available.
  logic [AW-1:0]       s2_pix;
  logic                s2_conv2;
  // Stage 3: quantized or residual-added result available.
  logic [AW-1:0]       s3_pix;
  // Input-quantization pass pipeline.
  logic                qv1;
  logic [AW-1:0]       qa1, qa2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_conv2 <= 1'b0;
      s1_pad   <= '0;   s1_pix   <= '0;
      s2_pix   <= '0;   s2_conv2 <= 1'b0; s3_pix <= '0;
      qv1 <= 1'b0; qa1 <= '0; qa2 <= '0;
    end else begin
      s1_valid <= conv_phase;
      s1_first <= (ic == 0);
      s1_last  <= (ic == CH - 1);
      s1_conv2 <= (state == ST_CONV2);
      s1_pad   <= win_pad;
      s1_pix   <= pix_addr;
      if (s1_valid && s1_last) begin
        s2_pix   <= s1_pix;
        s2_conv2 <= s1_conv2;
      end
      s3_pix <= s2_pix;
      qv1 <= (state == ST_QIN);
      qa1 <= qaddr;
      qa2 <= qa1;
    end
  end

  // ------------------------------------------------------------------ memories
  logic [AW-1:0]            in_raddr;
  logic signed [ACC_W-1:0]  in_rdata;
  logic [TAPS-1:0][BA-1:0]  act1_rdata, act2_rdata;
  logic [TAPS-1:0][BW-1:0]  w1_rdata, w2_rdata;
  logic                     q1_valid, q2_valid;
  logic [BA-1:0]            q1_y, q2_y;

  // The block input is read by the quantization pass and, in CONV2, as the
  // residual of the pixel whose accumulation is in the MAC unit.
  assign in_raddr = (state == ST_QIN) ? qaddr : s1_pix;

  fmap_buf #(.DW(ACC_W), .DEPTH(DEPTH), .NRD(1)) u_in_buf (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_data),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  fmap_buf #(.DW(BA), .DEPTH(DEPTH), .NRD(TAPS)) u_act1_buf (
    .clk, .we(q1_valid), .waddr(qa2), .wdata(q1_y),
    .raddr(win_addr), .rdata(act1_rdata)
  );

  fmap_buf #(.DW(BA), .DEPTH(DEPTH), .NRD(TAPS)) u_act2_buf (
    .clk, .we(q2_valid), .waddr(s3_pix), .wdata(q2_y),
    .raddr(win_addr), .rdata(act2_rdata)
  );

  weight_mem #(.BW(BW), .DEPTH(CH * CH)) u_w1 (
    .clk, .we(w_we && !w_sel), .waddr(w_addr), .wdata(w_data),
    .raddr(wrd_addr), .rdata(w1_rdata)
  );

  weight_mem #(.BW(BW), .DEPTH(CH * CH)) u_w2 (
    .clk, .we(w_we && w_sel), .waddr(w_addr), .wdata(w_data),
    .raddr(wrd_addr), .rdata(w2_rdata)
  );

  // ------------------------------------------------------------------ datapath
  logic [TAPS-1:0][BA-1:0] mac_act;
  logic                    mac_valid;
  logic signed [ACC_W-1:0] mac_acc;

  always_comb begin
    for (int k = 0; k < TAPS; k++) begin
      mac_act[k] = s1_pad[k] ? '0 : (s1_conv2 ? act2_rdata[k] : act1_rdata[k]);
    end
  end

  threshold_quantizer #(.BA(BA), .XW(ACC_W)) u_q1 (
    .clk, .rst_n,
    .thr_we(thr_we && !thr_sel), .thr_idx, .thr_data,
    .in_valid(qv1), .x(in_rdata),
    .out_valid(q1_valid), .y(q1_y)
  );

  conv3x3_mac #(.BA(BA), .BW(BW), .ACC_W(ACC_W)) u_mac (
    .clk, .rst_n,
    .in_valid(s1_valid), .in_first(s1_first), .in_last(s1_last),
    .act(mac_act), .wgt(s1_conv2 ? w2_rdata : w1_rdata),
    .out_valid(mac_valid), .out_acc(mac_acc)
  );

  threshold_quantizer #(.BA(BA), .XW(ACC_W)) u_q2 (
    .clk, .rst_n,
    .thr_we(thr_we && thr_sel), .thr_idx, .thr_data,
    .in_valid(mac_valid && !s2_conv2), .x(mac_acc),
    .out_valid(q2_valid), .y(q2_y)
  );

  residual_add #(.ACC_W(ACC_W)) u_add (
    .clk, .rst_n,
    .in_valid(mac_valid && s2_conv2), .mac(mac_acc), .res(in_rdata),
    .out_valid(out_valid), .sum(out_data), .sat(out_sat)
  );

  assign out_addr = s3_pix;

  // ---------------------------------------------------------------- checks
  // Nothing may be loaded while a run is using the buffers.
  a_no_load_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(in_we || w_we || thr_we));
  // The residual read in CONV2 must be the pixel the MAC result belongs to.
  a_res_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    (mac_valid && s2_conv2) |-> (s2_pix == $past(s1_pix)));
endmodule
