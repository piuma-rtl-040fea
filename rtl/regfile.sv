// regfile: register file of a multi-threaded core, 32 registers per thread.
//
// NTHREADS x NREGS words of XLEN bits, addressed by {thread, register}. Two
// read ports with registered outputs (data valid the cycle after the address)
// and one write port. A read of the word being written in the same cycle
// returns the new value. Register 0 is an ordinary register. The register
// count per thread follows the paper; width and port count are this design's.
module regfile #(
  parameter int NTHREADS = 16,
  parameter int NREGS    = 32,
  parameter int XLEN     = 64,
  localparam int AW = $clog2(NTHREADS * NREGS)
) (
  input  logic            clk,
  input  logic [AW-1:0]   ra0,
  input  logic [AW-1:0]   ra1,
  output logic [XLEN-1:0] rd0,
  output logic [XLEN-1:0] rd1,
  input  logic            we,
  input  logic [AW-1:0]   wa,
  input  logic [XLEN-1:0] wd
);
  logic [XLEN-1:0] mem [NTHREADS * NREGS];

  always_ff @(posedge clk) begin
    if (we) mem[wa] <= wd;
    rd0 <= (we && wa == ra0) ? wd : mem[ra0];
    rd1 <= (we && wa == ra1) ? wd : mem[ra1];
  end
endmodule
