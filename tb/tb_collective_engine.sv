// tb_collective_engine: random arrival orders for barriers, sums, minima and
// maxima over six participants; checks the result, that release comes exactly
// in the cycle after the last arrival and never earlier.
module tb_collective_engine;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int NP = 6;
  logic [1:0] op;
  logic [NP-1:0] arrive;
  logic [63:0] value [NP];
  logic release_o;
  logic [63:0] result;
  collective_engine #(.NPART(NP)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    arrive = '0; op = 0;
    for (int p = 0; p < NP; p++) value[p] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      logic [63:0] v [NP];
      logic [NP-1:0] done_set;
      longint e;
      op = 2'($urandom_range(0, 2));
      for (int p = 0; p < NP; p++) v[p] = 64'($signed($urandom_range(0, 2000)) - 1000);
      e = longint'(v[0]);
      for (int p = 1; p < NP; p++)
        case (op)
          2'd1: e = (longint'(v[p]) < e) ? longint'(v[p]) : e;
          2'd2: e = (longint'(v[p]) > e) ? longint'(v[p]) : e;
          default: e = e + longint'(v[p]);
        endcase
      done_set = '0;
      while (done_set != '1) begin
        @(negedge clk);
        arrive = '0;
        for (int p = 0; p < NP; p++)
          if (!done_set[p] && $urandom_range(0, 3) == 0) begin
            arrive[p] = 1; value[p] = v[p]; done_set[p] = 1;
          end
        if (done_set != '1) begin
          @(posedge clk); #1;
          checks++;
          if (release_o) failures++;
        end
      end
      @(posedge clk); #1;
      arrive = '0;
      checks++;
      if (!release_o || result !== 64'(e)) begin
        failures++;
        if (failures < 5) $display("op %0d got %0d exp %0d rel %0d", op, result, e, release_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
