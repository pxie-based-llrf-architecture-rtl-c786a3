// Testbench for iq_comp: random vectors and coefficients (gain 0.5..2,
// any angle); outputs must match round((c*I - s*Q)/2^14) and
// round((s*I + c*Q)/2^14) with saturation, computed here with integers,
// one cycle after in_valid. A 90-degree rotation and a saturating gain are
// included as directed cases.
module tb_iq_comp;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_t i_in, q_in, i_out, q_out;
  coef_t c, s;
  int checks = 0, failures = 0;
  localparam real PI = 3.14159265358979323846;

  iq_comp dut (.clk, .rst_n, .in_valid, .i_in, .q_in, .c, .s, .out_valid, .i_out, .q_out);
  always #10 clk = ~clk;

  function automatic longint sat18(longint v);
    if (v > 131071) return 131071;
    if (v < -131072) return -131072;
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ei, eq;
    i_in = '0; q_in = '0; c = '0; s = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      real g, a;
      @(negedge clk);
      g = 0.5 + 1.5 * real'($urandom_range(0, 1000)) / 1000.0;
      a = 2.0 * PI * real'($urandom_range(0, 1000)) / 1000.0;
      c = coef_t'($rtoi(g * $cos(a) * 16384.0));
      s = coef_t'($rtoi(g * $sin(a) * 16384.0));
      i_in = iq_t'($signed($urandom_range(0, 200000)) - 100000);
      q_in = iq_t'($signed($urandom_range(0, 200000)) - 100000);
      if (n == 0) begin c = 0; s = 16384; i_in = 1000; q_in = 0; end      // +90 degrees
      if (n == 1) begin c = 32767; s = 0; i_in = 120000; q_in = -120000; end  // saturates
      in_valid = 1;
      ei = sat18((longint'(c) * i_in - longint'(s) * q_in + 8192) >>> 14);
      eq = sat18((longint'(s) * i_in + longint'(c) * q_in + 8192) >>> 14);
      @(posedge clk); #1;
      in_valid = 0;
      checks += 3;
      if (!out_valid) failures++;
      if (longint'(i_out) != ei) begin failures++; $display("I %0d vs %0d", i_out, ei); end
      if (longint'(q_out) != eq) begin failures++; $display("Q %0d vs %0d", q_out, eq); end
      if (n == 0) begin
        checks++;
        if (i_out != 0 || q_out != 1000) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
