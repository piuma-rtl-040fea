// tb_dma_engine: runs a strided copy, a gather and a scatter against a
// behavioural memory and compares the memory contents with the results
// worked out in the testbench.
module tb_dma_engine;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, busy, done;
  logic [1:0] cmd_mode;
  logic [ADDR_W-1:0] cmd_src, cmd_dst, cmd_idx, cmd_base, cmd_stride;
  logic [31:0] cmd_count;
  logic m_valid, m_ready, m_resp_valid;
  mreq_t m_req;
  logic [63:0] m_resp_data;

  dma_engine dut (.*);
  mem_model #(.WORDS(1024)) u_mem (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input logic [1:0] mode, input int src, dst, idx, base, stride, n);
    @(negedge clk);
    cmd_valid = 1; cmd_mode = mode; cmd_src = ADDR_W'(src * 8); cmd_dst = ADDR_W'(dst * 8);
    cmd_idx = ADDR_W'(idx * 8); cmd_base = ADDR_W'(base * 8); cmd_stride = ADDR_W'(stride * 8);
    cmd_count = n;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk); cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    int perm [16];
    cmd_valid = 0; cmd_mode = 0; cmd_src = 0; cmd_dst = 0; cmd_idx = 0; cmd_base = 0;
    cmd_stride = 0; cmd_count = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // strided copy: dst word 600+i <- word 10 + 3*i
    run(2'd0, 10, 600, 0, 0, 3, 20);
    for (int i = 0; i < 20; i++) begin
      checks++;
      if (u_mem.mem[600 + i] !== 64'(10 + 3 * i) * 3 + 1) failures++;
    end
    // gather: index list at words 700.., values 0..15 permuted; dst 800+i <- base 100 + idx
    for (int i = 0; i < 16; i++) perm[i] = (i * 7 + 3) % 16;
    for (int i = 0; i < 16; i++) u_mem.mem[700 + i] = 64'(perm[i]);
    run(2'd1, 0, 800, 700, 100, 0, 16);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[800 + i] !== 64'(100 + perm[i]) * 3 + 1) failures++;
    end
    // scatter: word 900 + perm[i] <- src word 200 + i
    run(2'd2, 200, 0, 700, 900, 0, 16);
    for (int i = 0; i < 16; i++) begin
      checks++;
      if (u_mem.mem[900 + perm[i]] !== 64'(200 + i) * 3 + 1) failures++;
    end
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
