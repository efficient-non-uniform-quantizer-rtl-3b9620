// tb_weight_mem: self-checking test of the kernel memory.
//
// Fills every word of a 64 x 64 kernel memory with random 9-tap kernels,
// then reads the words back in random order and sequentially, checking the
// data one clock after the address (synchronous read). Finally overwrites
// some words and checks that only those change.
module tb_weight_mem;
  localparam int unsigned BW = 4, TAPS = 9, DEPTH = 64 * 64;
  localparam int unsigned AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [TAPS-1:0][BW-1:0] wdata = '0;
  logic [TAPS-1:0][BW-1:0] rdata;

  logic [TAPS*BW-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_mem #(.BW(BW), .TAPS(TAPS), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(int a);
    raddr = AW'(a);
    @(negedge clk);
    checks++;
    if (rdata != model[a]) begin
      failures++;
      $display("FAIL addr=%0d got=%h exp=%h", a, rdata, model[a]);
    end
  endtask

  initial begin
    int a;
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      model[i] = {$urandom, $urandom};
      we = 1'b1; waddr = AW'(i); wdata = model[i];
      @(negedge clk);
    end
    we = 1'b0;
    for (int n = 0; n < 2000; n++) rd(int'($urandom_range(0, DEPTH - 1)));
    for (int i = 0; i < DEPTH; i += 7) rd(i);
    for (int n = 0; n < 50; n++) begin
      a = int'($urandom_range(0, DEPTH - 1));
      model[a] = ~model[a];
      we = 1'b1; waddr = AW'(a); wdata = model[a];
      @(negedge clk);
      we = 1'b0;
    end
    for (int i = 0; i < DEPTH; i++) rd(i);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
