// Testbench for amp_calc: random and extreme vectors, one per clock; each
// output must equal floor(sqrt(I^2+Q^2)) (exact integer reference computed
// here) and arrive IQ_W + 1 = 19 cycles after its input.
module tb_amp_calc;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  iq_t i, q;
  amp_t amp;
  int checks = 0, failures = 0;
  longint expq [$];
  int tin [$];
  int cyc = 0;

  amp_calc dut (.clk, .rst_n, .in_valid, .i, .q, .out_valid, .amp);
  always #10 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic longint isqrt(longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction
  function automatic longint isqrt_fast(longint v);
    longint lo = 0, hi = 400000, mid;
    while (lo < hi) begin
      mid = (lo + hi + 1) / 2;
      if (mid * mid <= v) lo = mid; else hi = mid - 1;
    end
    return lo;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      longint e;
      int t0;
      e = expq.pop_front();
      t0 = tin.pop_front();
      checks += 2;
      if (longint'(amp) != e) begin failures++; $display("amp=%0d exp=%0d", amp, e); end
      if (cyc - t0 != 19) begin failures++; $display("latency %0d", cyc - t0); end
    end
  end

  initial begin
    i = '0; q = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    checks++;
    if (isqrt(1000) != isqrt_fast(1000)) failures++;
    for (int n = 0; n < 3000; n++) begin
      longint ii, qq;
      @(negedge clk);
      case (n)
        0: begin i = -131072; q = -131072; end
        1: begin i = 131071;  q = 131071;  end
        2: begin i = 0;       q = 0;       end
        3: begin i = 3;       q = 4;       end
        default: begin
          i = iq_t'($urandom);
          q = iq_t'($urandom);
          if (n % 4 == 0) begin i = i >>> 9; q = q >>> 9; end
        end
      endcase
      in_valid = (n % 5 != 4);
      ii = longint'(i); qq = longint'(q);
      if (in_valid) begin
        expq.push_back(isqrt_fast(ii * ii + qq * qq));
        tin.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (30) @(posedge clk);
    checks++;
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
