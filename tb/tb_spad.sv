// tb_spad: random reads, writes and atomics on a small scratchpad against a
// model array; checks the data and that each answer comes one cycle after the
// request was taken.
module tb_spad;
  import piuma_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  localparam int BYTES = 2048;
  logic        req_valid, req_ready, resp_valid;
  mreq_t       req;
  logic [63:0] resp_data;
  logic [63:0] model [BYTES/8];
  spad #(.BYTES(BYTES)) dut (.clk, .rst_n, .req_valid, .req_ready, .req, .resp_valid, .resp_data);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] atom(input atop_e op, input logic [63:0] o, a, b);
    case (op)
      AT_ADD: return o + a;  AT_AND: return o & a;  AT_OR: return o | a;  AT_XOR: return o ^ a;
      AT_MIN: return (longint'(a) < longint'(o)) ? a : o;
      AT_MAX: return (longint'(a) > longint'(o)) ? a : o;
      AT_SWAP: return a;
      default: return (o == b) ? a : o;
    endcase
  endfunction

  task automatic access(input mreq_t r, output logic [63:0] d);
    int lat;
    @(negedge clk);
    req = r; req_valid = 1;
    while (!req_ready) @(negedge clk);
    @(posedge clk); #1;
    req_valid = 0;
    lat = 1;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    d = resp_data;
    checks++;
    if (lat != 1) begin failures++; $display("latency %0d", lat); end
  endtask

  initial begin
    logic [63:0] d;
    mreq_t r;
    req_valid = 0; req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < BYTES / 8; i++) begin
      r = '0; r.we = 1; r.addr = ADDR_W'(i * 8); r.wdata = {$urandom, $urandom};
      model[i] = r.wdata;
      access(r, d);
    end
    for (int t = 0; t < 1500; t++) begin
      int w;
      w = $urandom_range(0, BYTES / 8 - 1);
      r = '0; r.addr = ADDR_W'(w * 8);
      case ($urandom_range(0, 2))
        0: begin
          access(r, d);
          checks++; if (d !== model[w]) failures++;
        end
        1: begin
          r.we = 1; r.wdata = {$urandom, $urandom}; model[w] = r.wdata;
          access(r, d);
        end
        default: begin
          r.atomic = 1; r.atop = atop_e'($urandom_range(0, 7));
          r.wdata = {$urandom, $urandom};
          r.operand2 = ($urandom_range(0, 1) == 1) ? model[w] : 64'd5;
          access(r, d);
          checks++; if (d !== model[w]) failures++;
          model[w] = atom(r.atop, model[w], r.wdata, r.operand2);
        end
      endcase
    end
    for (int i = 0; i < BYTES / 8; i++) begin
      r = '0; r.addr = ADDR_W'(i * 8);
      access(r, d);
      checks++; if (d !== model[i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
