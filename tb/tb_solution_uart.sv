// tb_solution_uart -- self-checking test of the solution UART.
//
// Random 20-bit assignments are sent (3 bytes, 8 clocks per bit).  A
// receiver in the testbench finds each start bit and samples every bit in
// its middle; it checks the start and stop bits, that byte k holds bits
// 8k..8k+7 LSB first with zero padding, that each frame lasts 10 bit times,
// that busy spans exactly 3 frames, and that a send while busy is ignored.
`timescale 1ns/1ps
module tb_solution_uart;

  localparam int NBITS  = 20;
  localparam int CPB    = 8;
  localparam int NBYTES = (NBITS + 7) / 8;

  logic clk = 0, rst_n = 0, send = 0;
  logic [NBITS-1:0] bits;
  logic txd, busy;

  solution_uart #(.NBITS(NBITS), .CLKS_PER_BIT(CPB)) dut (.clk, .rst_n, .send, .bits, .txd, .busy);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int busy_cycles;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (busy) busy_cycles++;

  // clock numbers of the falling edges of txd (start bits)
  int cyc = 0;
  int falls [$];
  logic txd_q = 1;
  always @(posedge clk) begin
    cyc++;
    if (txd_q && !txd) falls.push_back(cyc);
    txd_q <= txd;
  end

  task automatic receive(output logic [NBYTES*8-1:0] data);
    for (int b = 0; b < NBYTES; b++) begin
      while (txd) @(posedge clk);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 0, "start bit");
      for (int i = 0; i < 8; i++) begin
        repeat (CPB) @(posedge clk);
        data[8*b + i] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1, "stop bit");
    end
  endtask

  initial begin
    logic [NBYTES*8-1:0] rx, sent;
    bits = '0;
    repeat (2) @(posedge clk);
    #1 check(txd == 1 && !busy, "idle line after reset");
    rst_n = 1;
    for (int r = 0; r < 20; r++) begin
      @(negedge clk);
      bits = NBITS'($urandom);
      sent = (NBYTES*8)'(bits);
      busy_cycles = 0;
      falls.delete();
      send = 1;
      @(negedge clk);
      send = 0;
      fork
        receive(rx);
        begin
          // a second send during the transfer must be ignored
          repeat (3 * CPB) @(negedge clk);
          bits = ~bits;
          send = 1;
          @(negedge clk);
          send = 0;
        end
      join
      wait (!busy);
      @(posedge clk);
      // byte b's start bit begins exactly b frames (10 bit times each)
      // after the first one
      for (int b = 1; b < NBYTES; b++) begin
        int hit [$];
        hit = falls.find_index(x) with (x == falls[0] + b * 10 * CPB);
        check(hit.size() == 1, $sformatf("start bit of byte %0d on time", b));
      end
      check(rx == sent, $sformatf("data %h vs %h", rx, sent));
      check(busy_cycles == NBYTES * 10 * CPB, $sformatf("busy %0d clocks", busy_cycles));
      repeat (2 * CPB) @(posedge clk);
      check(txd == 1 && !busy, "no second transfer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
