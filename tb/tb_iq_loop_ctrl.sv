// Testbench for iq_loop_ctrl: a queue of random measurement words stands for
// the input FIFO. An integer model of the chain written here (complex
// compensation with rounding, PID with clamped integral, lag state update
// y[n+1] = (A*y[n] >> 18) + B*u[n] with A = 261620, B = 524) predicts every
// (I', Q') word, which must come out in order. Also checked: one control
// sample per 4 cycles when nothing blocks, no pop and a stall flag while the
// output FIFO is full, and the dphi field passed on at each pop.
module tb_iq_loop_ctrl;
  import llrf_pkg::*;
  logic clk = 0, rst_n = 0, in_empty, in_rd, out_full = 0, out_wr, dphi_valid, sat_i, sat_q, stall;
  acq_word_t in_data;
  ctrl_word_t out_data;
  iq_t sp_i, sp_q, meas_i, meas_q;
  coef_t comp_c, comp_s, kp, ki, kd;
  phase_t dphi;
  logic signed [IQ_W:0] err_i, err_q;
  int checks = 0, failures = 0;
  acq_word_t inq [$];
  ctrl_word_t expq [$];
  phase_t dq [$];
  longint integ [2] = '{0, 0}, eprev [2] = '{0, 0}, st [2] = '{0, 0};
  int pops = 0, pushes = 0, stall_cycles = 0, pop_stall_err = 0;

  iq_loop_ctrl dut (.clk, .rst_n, .in_empty, .in_data, .in_rd, .out_full, .out_wr, .out_data,
    .sp_i, .sp_q, .comp_c, .comp_s, .kp, .ki, .kd, .dphi_valid, .dphi,
    .meas_i, .meas_q, .err_i, .err_q, .sat_i, .sat_q, .stall);
  always #10 clk = ~clk;

  assign in_empty = (inq.size() == 0);
  assign in_data  = in_empty ? '0 : inq[0];

  function automatic longint sat(longint v, longint lo, longint hi);
    return (v > hi) ? hi : ((v < lo) ? lo : v);
  endfunction

  function automatic longint pid(int ch, longint sp, longint m);
    longint e, u;
    e = sp - m;
    integ[ch] = sat(integ[ch] + longint'(ki) * e, -(longint'(131072) <<< 12), longint'(131071) <<< 12);
    u = (longint'(kp) * e + integ[ch] + longint'(kd) * (e - eprev[ch])) >>> 12;
    eprev[ch] = e;
    return sat(u, -131072, 131071);
  endfunction

  function automatic longint lag(int ch, longint x);
    longint y;
    y = st[ch] >>> 18;
    st[ch] = sat(((longint'(261620) * st[ch]) >>> 18) + longint'(524) * x,
                 -(longint'(131072) <<< 18), longint'(131071) <<< 18);
    return st[ch] >>> 18;
  endfunction

  function automatic void model(acq_word_t w);
    longint mi, mq;
    ctrl_word_t o;
    mi = sat((longint'(comp_c) * w.i - longint'(comp_s) * w.q + 8192) >>> 14, -131072, 131071);
    mq = sat((longint'(comp_s) * w.i + longint'(comp_c) * w.q + 8192) >>> 14, -131072, 131071);
    o.i = iq_t'(lag(0, pid(0, sp_i, mi)));
    o.q = iq_t'(lag(1, pid(1, sp_q, mq)));
    expq.push_back(o);
  endfunction

  always @(posedge clk) begin
    if (rst_n) begin
      if (in_rd) begin
        pops++;
        if (out_full) pop_stall_err++;
        model(inq[0]);
        dq.push_back(inq[0].dphi);
        void'(inq.pop_front());
      end
      if (stall) stall_cycles++;
      if (dphi_valid) begin
        checks++;
        if (dphi != dq.pop_front()) failures++;
      end
      if (out_wr) begin
        ctrl_word_t e;
        pushes++;
        e = expq.pop_front();
        checks++;
        if (out_data != e) begin
          failures++; $display("out %0d %0d vs %0d %0d", out_data.i, out_data.q, e.i, e.q);
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fill(int k);
    for (int j = 0; j < k; j++) begin
      acq_word_t w;
      w.i = iq_t'($signed($urandom_range(0, 160000)) - 80000);
      w.q = iq_t'($signed($urandom_range(0, 160000)) - 80000);
      w.amp = amp_t'($urandom); w.phase = phase_t'($urandom); w.dphi = phase_t'($urandom);
      inq.push_back(w);
    end
  endtask

  initial begin
    int t0, p0;
    sp_i = 50000; sp_q = -20000;
    comp_c = coef_t'(13000); comp_s = coef_t'(-9000);
    kp = coef_t'(3000); ki = coef_t'(400); kd = coef_t'(1000);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // throughput: 100 queued samples take 400 cycles
    @(negedge clk);
    fill(100);
    t0 = 0;
    while (inq.size() != 0) begin @(posedge clk); t0++; end
    checks++;
    if (t0 < 396 || t0 > 401) begin failures++; $display("100 samples in %0d cycles", t0); end
    repeat (10) @(posedge clk);
    // blocked output: no pops, stall raised
    @(negedge clk);
    out_full = 1;
    fill(20);
    p0 = pops;
    repeat (100) @(posedge clk);
    checks += 2;
    if (pops - p0 > 1) begin failures++; $display("popped while full"); end
    if (stall_cycles < 90) failures++;
    @(negedge clk);
    out_full = 0;
    for (int k = 0; k < 2000; k++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) fill(1);
      out_full = ($urandom_range(0, 9) == 0);
      if (k % 700 == 350 || k % 700 == 0) begin
        // setpoint step, applied while no sample is in the chain
        out_full = 1;
        repeat (6) @(negedge clk);
        sp_i = (k % 700 == 0) ? 60000 : -30000;
      end
    end
    @(negedge clk); out_full = 0;
    repeat (200) @(posedge clk);
    checks += 3;
    if (pop_stall_err != 0) failures++;
    if (pushes != pops) begin failures++; $display("pops %0d pushes %0d", pops, pushes); end
    if (expq.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
