// tb_weight_mem -- self-checking test of the lane-partitioned weight memory.
//
// At the default size (65 words of ten 6-bit lanes) every lane of every word
// is written with a random value, one lane per clock, in a random order of
// words; then every word is read back and all ten lanes compared with a
// shadow copy, checking the one-clock read latency and that a lane write
// leaves the other lanes of the word alone. A read with re low must hold the
// previous output.
module tb_weight_mem;
  localparam int WW = 6, LANES = 10, DEPTH = 65;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     we, re;
  logic [6:0]               waddr, raddr;
  logic [3:0]               wlane;
  logic [WW-1:0]            wdata;
  logic [LANES-1:0][WW-1:0] rdata;

  weight_mem dut (.clk, .we, .waddr, .wlane, .wdata, .re, .raddr, .rdata);

  logic [WW-1:0] shadow [DEPTH][LANES];

  task automatic read_check(int a);
    raddr = 7'(a);
    re    = 1;
    @(negedge clk);
    re    = 0;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rdata[l] != shadow[a][l]) begin
        failures++;
        $display("FAIL word %0d lane %0d: got %0d expected %0d", a, l, rdata[l], shadow[a][l]);
      end
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wlane = '0; wdata = '0;
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++) begin
      for (int k = 0; k < DEPTH; k++) begin
        int a;
        a = (k * 37 + pass * 11) % DEPTH;
        for (int l = 0; l < LANES; l++) begin
          we    = 1;
          waddr = 7'(a);
          wlane = 4'(l);
          wdata = WW'($urandom);
          shadow[a][l] = wdata;
          @(negedge clk);
        end
      end
      we = 0;
      for (int a = 0; a < DEPTH; a++) read_check(a);
    end
    // overwrite a single lane, the rest of the word must survive
    we = 1; waddr = 7'd9; wlane = 4'd4; wdata = ~shadow[9][4];
    shadow[9][4] = wdata;
    @(negedge clk);
    we = 0;
    read_check(9);
    // re low: output holds
    raddr = 7'd20;
    @(negedge clk);
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rdata[l] != shadow[9][l]) begin
        failures++;
        $display("FAIL output changed with re low");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
