// tb_queue_engine: random pushes and pops on four small queues kept in a
// behavioural memory, compared with queues modelled in the testbench,
// including pushes to full and pops from empty queues (which must fail).
module tb_queue_engine;
  import piuma_pkg::*;
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, op_valid, op_ready, op_push, resp_valid, resp_ok;
  logic [1:0] cfg_qid, op_qid;
  logic [ADDR_W-1:0] cfg_base;
  logic [15:0] cfg_cap;
  logic [63:0] op_data, resp_data;
  logic m_valid, m_ready, m_resp_valid;
  mreq_t m_req;
  logic [63:0] m_resp_data;

  queue_engine #(.NQUEUES(4)) dut (.*);
  mem_model #(.WORDS(1024)) u_mem (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] mq [4][$];
  int cap [4] = '{5, 8, 3, 12};

  initial begin
    cfg_we = 0; op_valid = 0; op_push = 0; cfg_qid = 0; op_qid = 0; cfg_base = 0; cfg_cap = 0;
    op_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int q = 0; q < 4; q++) begin
      @(negedge clk); cfg_we = 1; cfg_qid = 2'(q); cfg_base = ADDR_W'(q * 128 * 8);
      cfg_cap = 16'(cap[q]);
    end
    @(negedge clk); cfg_we = 0;
    for (int t = 0; t < 2000; t++) begin
      logic push;
      int q;
      logic [63:0] d;
      push = $urandom_range(0, 1);
      q = $urandom_range(0, 3);
      d = {$urandom, $urandom};
      @(negedge clk);
      op_valid = 1; op_push = push; op_qid = 2'(q); op_data = d;
      while (!op_ready) @(negedge clk);
      @(negedge clk); op_valid = 0;
      while (!resp_valid) @(negedge clk);
      checks++;
      if (push) begin
        if (mq[q].size() == cap[q]) begin
          fulls++;
          if (resp_ok) failures++;
        end else begin
          if (!resp_ok) failures++;
          mq[q].push_back(d);
        end
      end else begin
        if (mq[q].size() == 0) begin
          empties++;
          if (resp_ok) failures++;
        end else begin
          logic [63:0] e;
          e = mq[q].pop_front();
          if (!resp_ok || resp_data !== e) failures++;
        end
      end
    end
    checks++;
    if (fulls == 0 || empties == 0) failures++;
    $display("full %0d empty %0d", fulls, empties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
