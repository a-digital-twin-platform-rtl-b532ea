// tb_ble_pdu_buffer: self-checking testbench for ble_pdu_buffer.
//
// Writes random bytes to all 39 locations in random order, keeps a copy in a
// testbench array, and reads every location back, checking the data one clock
// after the address (registered read). Writes to addresses beyond the depth
// must not disturb stored bytes, and reading them must return 0.
`timescale 1ns/1ps
module tb_ble_pdu_buffer;
  logic       clk = 0, we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  logic [7:0] wdata = 0, rdata;
  logic [7:0] model [39];
  int checks = 0, failures = 0;

  ble_pdu_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    for (int round = 0; round < 20; round++) begin
      for (int a = 0; a < 39; a++) begin
        @(negedge clk);
        we = 1; waddr = 6'(a); wdata = 8'($urandom); model[a] = wdata;
      end
      repeat (40) begin        // overwrite random locations, some out of range
        @(negedge clk);
        waddr = 6'($urandom % 64); wdata = 8'($urandom);
        if (waddr < 39) model[waddr] = wdata;
      end
      @(negedge clk) we = 0;
      for (int a = 0; a < 64; a++) begin
        raddr = 6'(a);
        @(posedge clk); #1;
        checks++;
        if (rdata !== (a < 39 ? model[a] : 8'h00)) begin
          failures++;
          $display("FAIL: addr %0d got %h", a, rdata);
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
