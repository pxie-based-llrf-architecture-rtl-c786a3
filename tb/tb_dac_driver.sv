// Testbench for dac_driver: pushes random I'/Q' words through a small FIFO
// model (the driver pops whenever the FIFO is not empty); each DAC code must
// equal round(v / 16) saturated to 14 bits, appear one cycle after the pop
// with an update pulse, hold between words, and be zero while rf_on is low.
module tb_dac_driver;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, rf_on = 1, in_empty = 1, in_rd, update;
  ctrl_word_t in_data;
  dac_t dac_i, dac_q;
  int checks = 0, failures = 0;

  dac_driver dut (.clk, .rst_n, .rf_on, .in_empty, .in_data, .in_rd, .dac_i, .dac_q, .update);
  always #10 clk = ~clk;

  function automatic longint ref_dac(iq_t v);
    longint r = (longint'(v) + 8) >>> 4;
    if (r > 8191) r = 8191;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    in_data = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      rf_on = (n % 100) < 90;
      in_data.i = iq_t'($urandom);
      in_data.q = iq_t'($urandom);
      if (n == 5) in_data.i = 131071;   // rounds above full scale: saturates
      in_empty = 0;
      #1;
      checks++;
      if (!in_rd) failures++;
      ei = rf_on ? ref_dac(in_data.i) : 0;
      eq = rf_on ? ref_dac(in_data.q) : 0;
      @(posedge clk); #1;
      in_empty = 1;
      checks += 3;
      if (!update) failures++;
      if (longint'(dac_i) != ei || longint'(dac_q) != eq) begin
        failures++; $display("n=%0d dac %0d %0d vs %0d %0d", n, dac_i, dac_q, ei, eq);
      end
      if (n == 5 && dac_i != 8191) failures++;
      // hold while empty
      repeat (2) @(posedge clk);
      #1;
      checks += 2;
      if (update || in_rd) failures++;
      if (longint'(dac_i) != ei) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
