// tb_regfile: random writes and reads of a 4-thread register file against a
// model array, including same-cycle write/read forwarding and 1-cycle read
// latency.
module tb_regfile;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  localparam int AW = $clog2(4 * 32);
  logic [AW-1:0] ra0, ra1, wa;
  logic [63:0]   rd0, rd1, wd;
  logic          we;
  logic [63:0]   model [4 * 32];
  regfile #(.NTHREADS(4), .NREGS(32), .XLEN(64)) dut (.clk, .ra0, .ra1, .rd0, .rd1, .we, .wa, .wd);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] e0, e1;
    we = 0; ra0 = 0; ra1 = 0; wa = 0; wd = 0;
    for (int i = 0; i < 128; i++) begin
      @(negedge clk); we = 1; wa = AW'(i); wd = {$urandom, $urandom}; model[i] = wd;
    end
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      we  = $urandom_range(0, 1);
      wa  = AW'($urandom_range(0, 127));
      wd  = {$urandom, $urandom};
      ra0 = AW'($urandom_range(0, 127));
      ra1 = (t % 4 == 0) ? wa : AW'($urandom_range(0, 127));
      e0  = (we && wa == ra0) ? wd : model[ra0];
      e1  = (we && wa == ra1) ? wd : model[ra1];
      if (we) model[wa] = wd;
      @(posedge clk); #1;
      checks += 2;
      if (rd0 !== e0) failures++;
      if (rd1 !== e1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
