// att: address translation table of the distributed global address space.
//
// Software programs up to NRULES rules through the cfg_* port. Each rule
// covers the application address range [base, base+size) and maps it either
//   block partitioned (mode 0): every address goes to block `blk`, at
//       phys_base + (va - base); or
//   interleaved (mode 1): consecutive 2^gran-byte chunks go round robin over
//       the NBLOCKS blocks, chunk k to block k mod NBLOCKS at
//       phys_base + (k / NBLOCKS) * 2^gran + (va - base) mod 2^gran.
// The output is a physical global address {region, block, offset}. The lowest
// numbered matching rule wins; `hit` is low when none matches. The lookup is
// combinational; configuration writes take effect on the next cycle.
//
// That translation is rule based and supports interleaved and block
// partitioned layouts follows the paper; the rule format, the number of rules
// and the address layout are this design's own.
module att
  import piuma_pkg::*;
#(
  parameter int NRULES = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [$clog2(NRULES)-1:0] cfg_idx,
  input  logic              cfg_valid,
  input  logic [ADDR_W-1:0] cfg_base,
  input  logic [ADDR_W-1:0] cfg_size,
  input  logic              cfg_mode,       // 0 block partitioned, 1 interleaved
  input  logic [2:0]        cfg_blk,
  input  logic [5:0]        cfg_gran,       // log2 of interleave chunk in bytes
  input  region_e           cfg_region,
  input  logic [OFS_W-1:0]  cfg_phys_base,
  input  logic [ADDR_W-1:0] va,
  output logic              hit,
  output logic [ADDR_W-1:0] pa
);
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] base;
    logic [ADDR_W-1:0] size;
    logic              mode;
    logic [2:0]        blk;
    logic [5:0]        gran;
    region_e           region;
    logic [OFS_W-1:0]  phys_base;
  } rule_t;

  rule_t rules [NRULES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NRULES; r++) rules[r] <= '0;
    end else if (cfg_we) begin
      rules[cfg_idx] <= '{valid: cfg_valid, base: cfg_base, size: cfg_size, mode: cfg_mode,
                          blk: cfg_blk, gran: cfg_gran, region: cfg_region,
                          phys_base: cfg_phys_base};
    end
  end

  always_comb begin
    hit = 1'b0;
    pa  = '0;
    for (int r = NRULES - 1; r >= 0; r--) begin
      logic [ADDR_W-1:0] d, chunk, inner;
      logic [2:0]        b;
      logic [OFS_W-1:0]  ofs;
      d      = va - rules[r].base;
      chunk  = '0;
      inner  = '0;
      b      = '0;
      ofs    = '0;
      if (rules[r].valid && va >= rules[r].base && d < rules[r].size) begin
        if (rules[r].mode) begin
          chunk  = d >> rules[r].gran;
          inner = d & ((ADDR_W'(1) << rules[r].gran) - 1'b1);
          b      = chunk[2:0];
          ofs    = rules[r].phys_base + OFS_W'(((chunk >> 3) << rules[r].gran) | inner);
        end else begin
          b   = rules[r].blk;
          ofs = rules[r].phys_base + OFS_W'(d);
        end
        hit = 1'b1;
        pa  = {rules[r].region, b, ofs};
      end
    end
  end
endmodule
