// tb_ble_whitening: self-checking testbench for ble_whitening.
//
// For every channel 0..39 the block is seeded and 400 random bits are passed
// through it; each output bit must equal the input xor the reference whitening
// sequence of ble_tb_pkg. Idle clocks with bit_en low are mixed in and must not
// advance the sequence. Running the output through a second pass with the same
// seed must give back the input (dewhitening = whitening).
`timescale 1ns/1ps
module tb_ble_whitening;
  import ble_tb_pkg::*;

  logic       clk = 0, rst_n = 0, init = 0, bit_en = 0, data_in = 0, data_out;
  logic [5:0] channel = 0;
  int checks = 0, failures = 0;

  ble_whitening dut (.*);

  always #5 clk = ~clk;

  initial begin
    bits_t w, d, o;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int ch = 0; ch < 40; ch++) begin
      w = whiten_seq(ch, 400);
      d.delete(); o.delete();
      repeat (400) d.push_back(1'($urandom));
      channel = 6'(ch); init = 1;
      @(negedge clk) init = 0;
      foreach (d[i]) begin
        data_in = d[i]; bit_en = 1;
        #1;
        checks++;
        if (data_out !== (d[i] ^ w[i])) begin
          failures++;
          if (failures < 10) $display("FAIL: ch %0d bit %0d", ch, i);
        end
        o.push_back(data_out);
        @(negedge clk);
        if ($urandom % 4 == 0) begin bit_en = 0; @(negedge clk); end
      end
      bit_en = 0;
      // dewhiten
      init = 1;
      @(negedge clk) init = 0;
      foreach (o[i]) begin
        data_in = o[i]; bit_en = 1;
        #1;
        checks++;
        if (data_out !== d[i]) failures++;
        @(negedge clk);
      end
      bit_en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
