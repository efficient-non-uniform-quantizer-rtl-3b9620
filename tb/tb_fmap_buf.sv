// tb_fmap_buf: self-checking test of the multi-ported feature-map buffer.
//
// Fills a 4 x 5 x 6 buffer of 4-bit words, then reads 3x3-window-like address
// sets on all 9 read ports at once, random and back to back, and checks every
// port one clock after its address. Also checks that a write and reads of
// other words in the same clock do not disturb each other.
module tb_fmap_buf;
  localparam int unsigned DW = 4, DEPTH = 120, NRD = 9;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0;
  logic [DW-1:0] wdata = '0;
  logic [NRD-1:0][AW-1:0] raddr = '0;
  logic [NRD-1:0][DW-1:0] rdata;

  logic [DW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  fmap_buf #(.DW(DW), .DEPTH(DEPTH), .NRD(NRD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a [NRD];
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = DW'($urandom);
      we = 1'b1; waddr = AW'(i); wdata = model[i];
      @(negedge clk);
    end
    we = 1'b0;
    for (int n = 0; n < 3000; n++) begin
      for (int p = 0; p < NRD; p++) begin
        a[p] = int'($urandom_range(0, DEPTH - 1));
        raddr[p] = AW'(a[p]);
      end
      // Sometimes write a word no port reads in this clock.
      we = 1'b0;
      if (n % 5 == 0) begin
        int wa;
        bit clash;
        wa = int'($urandom_range(0, DEPTH - 1));
        clash = 1'b0;
        for (int p = 0; p < NRD; p++) if (a[p] == wa) clash = 1'b1;
        if (!clash) begin
          we = 1'b1; waddr = AW'(wa); wdata = DW'($urandom);
        end
      end
      @(negedge clk);
      for (int p = 0; p < NRD; p++) begin
        checks++;
        if (rdata[p] != model[a[p]]) begin
          failures++;
          $display("FAIL port %0d addr=%0d got=%h exp=%h", p, a[p], rdata[p], model[a[p]]);
        end
      end
      if (we) model[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
