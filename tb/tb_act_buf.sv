// tb_act_buf -- self-checking test of the input activation buffer.
//
// At the default size (64 entries of 8 bits) the buffer is filled with random
// values, read back in a scrambled order with the one-clock read latency, and
// refilled while being read (write and read in the same clock, different
// addresses); the output must hold while re is low.
module tb_act_buf;
  localparam int W = 8, DEPTH = 64;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         we, re;
  logic [5:0]   waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] shadow [DEPTH];

  act_buf dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  task automatic expect_val(logic [W-1:0] v, string what);
    checks++;
    if (rdata != v) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, rdata, v);
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 6'(a); wdata = W'($urandom); shadow[a] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k < DEPTH; k++) begin
      int a;
      a = (k * 29) % DEPTH;
      re = 1; raddr = 6'(a);
      @(negedge clk);
      expect_val(shadow[a], "read");
    end
    // read address a while writing address a+32
    for (int a = 0; a < 32; a++) begin
      re = 1; raddr = 6'(a);
      we = 1; waddr = 6'(a + 32); wdata = W'($urandom);
      @(negedge clk);
      expect_val(shadow[a], "read during write");
      shadow[a + 32] = wdata;
    end
    we = 0;
    for (int a = 32; a < DEPTH; a++) begin
      re = 1; raddr = 6'(a);
      @(negedge clk);
      expect_val(shadow[a], "read of rewritten entry");
    end
    re = 0; raddr = 6'd0;
    @(negedge clk);
    expect_val(shadow[DEPTH - 1], "hold with re low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
