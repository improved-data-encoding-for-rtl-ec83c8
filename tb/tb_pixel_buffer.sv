// tb_pixel_buffer: writes a full 784-pixel image of random values, reads it
// back in random order (one-clock read latency), overwrites a few pixels and
// reads again, comparing with a software copy.
module tb_pixel_buffer;
  localparam int unsigned NP = 784;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       we;
  logic [9:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  byte unsigned ref_mem [NP];

  pixel_buffer #(.N_POS(NP)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(input int a);
    @(negedge clk);
    raddr = 10'(a);
    @(negedge clk);
    checks++;
    if (rdata != ref_mem[a]) begin
      failures++;
      if (failures < 20) $display("FAIL: addr %0d read %0d expected %0d", a, rdata, ref_mem[a]);
    end
  endtask

  initial begin
    we = 0; waddr = '0; wdata = '0; raddr = '0;
    for (int a = 0; a < NP; a++) begin
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = 8'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int r = 0; r < 2000; r++) read_check(int'($urandom_range(NP - 1, 0)));
    for (int r = 0; r < 50; r++) begin
      automatic int a = int'($urandom_range(NP - 1, 0));
      @(negedge clk);
      we = 1; waddr = 10'(a); wdata = 8'($urandom); ref_mem[a] = wdata;
      @(negedge clk);
      we = 0;
      read_check(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
