// Testbench for boxcar_lpf: random inputs, compares against a reference
// moving average computed in the testbench (sum of the last LEN inputs,
// scaled by round(2^16*GAIN/LEN) >> 16, saturated), and checks the
// two-cycle latency and a sinusoid at F_S/5 being removed.
module tb_boxcar_lpf;
  localparam int LEN = 10;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [19:0] x;
  logic signed [11:0] y;
  int checks = 0, failures = 0;
  longint hist [$];

  boxcar_lpf #(.IN_W(20), .OUT_W(12), .LEN(LEN), .GAIN(2.0), .POST_SHIFT(8)) dut (
    .clk, .rst_n, .in_valid, .x, .out_valid, .y);
  always #10 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint model();
    longint s = 0, r;
    for (int k = 0; k < LEN; k++) s += (k < hist.size()) ? hist[hist.size()-1-k] : 0;
    r = (s * longint'(13107)) >>> (16 + 8);
    if (r > 2047) r = 2047;
    if (r < -2048) r = -2048;
    return r;
  endfunction

  initial begin
    longint expv;
    x = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      if (n < 300) x = 20'($signed($urandom_range(0, 400000)) - 200000);
      else         x = 20'($rtoi($floor(100000.0 * $cos(2.0 * 3.14159265358979 * 0.2 * n) + 0.5)) + 30000);
      in_valid = 1;
      hist.push_back(longint'(x));
      expv = model();
      @(negedge clk);
      in_valid = 0;
      @(posedge clk); #1;
      checks++;
      if (!out_valid || longint'(y) != expv) begin
        failures++;
        $display("n=%0d y=%0d exp=%0d v=%0b", n, y, expv, out_valid);
      end
      // tone at F_S/5 with an offset of 30000: output settles to the offset
      if (n > 320) begin
        checks++;
        if ((y > (30000 * 2 / 256) + 2) || (y < (30000 * 2 / 256) - 2)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
