// tb_att: programs a block-partitioned rule and an interleaved rule and
// compares random translations with the mapping formula computed here; also
// checks misses and that the lowest-numbered matching rule wins.
module tb_att;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic cfg_we, cfg_valid, cfg_mode, hit;
  logic [1:0] cfg_idx;
  logic [ADDR_W-1:0] cfg_base, cfg_size, va, pa;
  logic [2:0] cfg_blk;
  logic [5:0] cfg_gran;
  region_e cfg_region;
  logic [OFS_W-1:0] cfg_phys_base;
  att #(.NRULES(4)) dut (.*);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog(input int idx, input logic v, input longint base, size, input logic mode,
                      input int blk, gran, input region_e rg, input longint pb);
    @(negedge clk);
    cfg_we = 1; cfg_idx = 2'(idx); cfg_valid = v; cfg_base = ADDR_W'(base);
    cfg_size = ADDR_W'(size); cfg_mode = mode; cfg_blk = 3'(blk); cfg_gran = 6'(gran);
    cfg_region = rg; cfg_phys_base = OFS_W'(pb);
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_valid = 0; cfg_base = 0; cfg_size = 0; cfg_mode = 0;
    cfg_blk = 0; cfg_gran = 0; cfg_region = RG_DRAM; cfg_phys_base = 0; va = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // rule 1: 1 MB at 0x100000 block partitioned to block 6 SPAD at 0x2000
    prog(1, 1, 64'h10_0000, 64'h10_0000, 0, 6, 0, RG_SPAD, 64'h2000);
    // rule 2: 64 MB at 0x4000_0000 interleaved in 256-byte chunks over DRAM, phys base 0x1000
    prog(2, 1, 64'h4000_0000, 64'h400_0000, 1, 0, 8, RG_DRAM, 64'h1000);
    // rule 0: small override inside rule 1's range, block 2
    prog(0, 1, 64'h10_0000, 64'h100, 0, 2, 0, RG_DRAM, 64'h0);
    for (int t = 0; t < 500; t++) begin
      longint a, d, chunk;
      logic [ADDR_W-1:0] e;
      logic eh;
      case (t % 4)
        0: a = 64'h10_0000 + $urandom_range(0, 32'hF_FFFF);
        1: a = 64'h4000_0000 + {$urandom_range(0, 32'h3FF_FFFF)};
        2: a = 64'h10_0000 + $urandom_range(0, 255);
        default: a = 64'h2000_0000 + $urandom_range(0, 1000);
      endcase
      if (a >= 64'h10_0000 && a < 64'h10_0100) begin
        eh = 1; e = {RG_DRAM, 3'd2, OFS_W'(a - 64'h10_0000)};
      end else if (a >= 64'h10_0000 && a < 64'h20_0000) begin
        eh = 1; e = {RG_SPAD, 3'd6, OFS_W'(64'h2000 + a - 64'h10_0000)};
      end else if (a >= 64'h4000_0000 && a < 64'h4400_0000) begin
        d = a - 64'h4000_0000; chunk = d / 256;
        eh = 1; e = {RG_DRAM, 3'(chunk % 8), OFS_W'(64'h1000 + (chunk / 8) * 256 + d % 256)};
      end else begin
        eh = 0; e = '0;
      end
      va = ADDR_W'(a);
      #1;
      checks++;
      if (hit !== eh || (eh && pa !== e)) begin
        failures++;
        if (failures < 5) $display("va %h: got %0d %h exp %0d %h", a, hit, pa, eh, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
