// mtc_sched: thread selection of a multi-threaded core (MTC).
//
// The MTC is a barrel pipeline: every cycle it issues from the next thread in
// round-robin order that is ready. A thread is ready when it has been started
// (thread_start) and has no instruction in flight: each thread may have only
// one instruction in the pipeline at a time, so a thread whose load missed
// simply stops being picked until its instruction completes (complete_valid
// with its id). This is stall-on-miss at thread level while the other threads
// keep the pipeline busy. The selection is registered: issue_valid/issue_tid
// are valid in the cycle after the choice. `stall` holds the whole pipeline
// (nothing is issued). thread_stop retires a thread.
//
// Round-robin barrel issue and one in-flight instruction per thread follow the
// paper. The 16 threads per MTC are derived from 66 threads per block with
// 4 MTCs and 2 single-threaded cores. The instruction set and the rest of the
// pipeline are not described in the paper and are not part of this module.
module mtc_sched #(
  parameter int NTHREADS = 16,
  localparam int TW = $clog2(NTHREADS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          stall,
  input  logic          thread_start,
  input  logic          thread_stop,
  input  logic [TW-1:0] ctl_tid,
  input  logic          complete_valid,
  input  logic [TW-1:0] complete_tid,
  output logic          issue_valid,
  output logic [TW-1:0] issue_tid,
  output logic [NTHREADS-1:0] inflight
);
  logic [NTHREADS-1:0] active;
  logic [TW-1:0]       last;     // last issued thread
  logic                pick_v;
  logic [TW-1:0]       pick;

  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = 1; k <= NTHREADS; k++) begin
      int t;
      t = (int'(last) + k) % NTHREADS;
      if (!pick_v && active[t] && !inflight[t]) begin
        pick_v = 1'b1;
        pick   = TW'(t);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= '0; inflight <= '0; last <= TW'(NTHREADS - 1);
      issue_valid <= 1'b0; issue_tid <= '0;
    end else begin
      issue_valid <= 1'b0;
      if (complete_valid) inflight[complete_tid] <= 1'b0;
      if (!stall && pick_v) begin
        issue_valid    <= 1'b1;
        issue_tid      <= pick;
        last           <= pick;
        inflight[pick] <= 1'b1;
      end
      if (thread_start) active[ctl_tid] <= 1'b1;
      if (thread_stop)  active[ctl_tid] <= 1'b0;
    end
  end

  a_complete_inflight: assert property (@(posedge clk) disable iff (!rst_n)
    complete_valid |-> inflight[complete_tid]);
endmodule
