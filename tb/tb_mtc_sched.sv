// tb_mtc_sched: starts a set of threads and completes their instructions after
// random delays (modelling misses). Checks against a reference round-robin
// picker that a thread is issued only when active and not in flight, that
// issue order is round robin, that a stall issues nothing and that with all
// threads ready and no misses the core issues every cycle.
module tb_mtc_sched;
  int checks = 0, failures = 0, stalls_seen = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NT = 8;
  logic stall, thread_start, thread_stop, complete_valid, issue_valid;
  logic [2:0] ctl_tid, complete_tid, issue_tid;
  logic [NT-1:0] inflight;
  mtc_sched #(.NTHREADS(NT)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NT-1:0] m_active = '0, m_infl = '0;
  int m_last = NT - 1;
  int due [NT];

  initial begin
    stall = 0; thread_start = 0; thread_stop = 0; complete_valid = 0; ctl_tid = 0; complete_tid = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // phase 1: all threads active, every instruction completes at once: full issue rate
    for (int t = 0; t < NT; t++) begin
      @(negedge clk); stall = 1; thread_start = 1; ctl_tid = 3'(t);
    end
    @(negedge clk); thread_start = 0; stall = 0;
    // complete every issued instruction immediately
    for (int c = 0; c < 40; c++) begin
      @(posedge clk); #1;
      checks++;
      if (!issue_valid) failures++;
      if (c > 0 && issue_valid && int'(issue_tid) != (m_last + 1) % NT) failures++;
      if (issue_valid) m_last = int'(issue_tid);
      @(negedge clk);
      complete_valid = issue_valid; complete_tid = issue_tid;
    end
    @(negedge clk); complete_valid = 0;
    repeat (3) @(posedge clk);
    // phase 2: random miss latencies, random stalls; reference model
    @(negedge clk);
    m_infl = inflight; m_active = '1;
    for (int t = 0; t < NT; t++) due[t] = m_infl[t] ? 3 : -1;
    for (int c = 0; c < 3000; c++) begin
      int exp_t;
      logic exp_v;
      // pick completion of one due thread
      complete_valid = 0;
      for (int t = 0; t < NT; t++) if (due[t] == 0 && !complete_valid) begin
        complete_valid = 1; complete_tid = 3'(t); due[t] = -1;
      end
      for (int t = 0; t < NT; t++) if (due[t] > 0) due[t]--;
      stall = ($urandom_range(0, 9) == 0);
      if (stall) stalls_seen++;
      // reference pick (uses state before this edge)
      exp_v = 0; exp_t = 0;
      for (int k = 1; k <= NT; k++) begin
        int t;
        t = (m_last + k) % NT;
        if (!exp_v && m_active[t] && !m_infl[t]) begin exp_v = 1; exp_t = t; end
      end
      if (stall) exp_v = 0;
      @(posedge clk); #1;
      checks++;
      if (issue_valid !== exp_v || (exp_v && int'(issue_tid) != exp_t)) begin
        failures++;
        if (failures < 5) $display("cycle %0d got %0d/%0d exp %0d/%0d", c, issue_valid, issue_tid, exp_v, exp_t);
      end
      if (complete_valid) m_infl[complete_tid] = 0;
      if (exp_v) begin
        m_infl[exp_t] = 1; m_last = exp_t; due[exp_t] = $urandom_range(0, 12);
      end
      @(negedge clk);
    end
    checks++;
    if (stalls_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
