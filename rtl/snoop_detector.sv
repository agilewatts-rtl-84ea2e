// snoop_detector: always-active snoop detection for a core in C6A/C6AE.
//
// While the core is idle its private caches are clock-gated and their data
// arrays sleep, yet coherence snoops from the uncore must still be answered.
// This small block stays powered and clocked. It accepts snoop requests into
// a DEPTH-entry queue, raises pending so that the C6A controller wakes the
// caches, and forwards the queued requests to the caches only while the
// controller reports them awake (clock running, data array out of sleep). It
// counts forwarded snoops until the caches signal completion; pending stays
// high until the queue is empty and no snoop is outstanding, which is the
// "all outstanding snoops serviced" condition that lets the controller put
// the caches back to sleep.
//
// Follows the design description: detection in an always-active domain, wake
// of the caches only for the time needed to respond. Own choices: the
// valid/ready handshakes, the queue depth (4), the outstanding counter, the
// payload width, and running the detector and the cache snoop port on the PMA
// clock.
//
// Timing: a request accepted in cycle t makes pending high from cycle t+1 (a
// request being offered already counts); one request is forwarded per cycle
// while awake.
`timescale 1ns/1ps
module snoop_detector #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned PW    = 48,   // snoop payload (address and type)
  parameter int unsigned MAX_OUT = 15  // outstanding snoops in the caches
) (
  input  logic          clk,
  input  logic          rst_n,
  // from the uncore
  input  logic          snp_valid,
  output logic          snp_ready,
  input  logic [PW-1:0] snp_payload,
  // to the private caches
  input  logic          l1l2_awake,
  output logic          fwd_valid,
  input  logic          fwd_ready,
  output logic [PW-1:0] fwd_payload,
  input  logic          snp_done,     // one snoop response completed
  // to the C6A controller
  output logic          pending
);

  localparam int unsigned PTRW = $clog2(DEPTH);
  localparam int unsigned CNTW = $clog2(DEPTH + 1);
  localparam int unsigned OUTW = $clog2(MAX_OUT + 1);

  logic [PW-1:0]   q_mem [DEPTH];
  logic [PTRW-1:0] wr_ptr, rd_ptr;
  logic [CNTW-1:0] count;
  logic [OUTW-1:0] outstanding;

  logic push, pop;

  assign snp_ready   = (count != CNTW'(DEPTH));
  assign push        = snp_valid && snp_ready;
  assign fwd_valid   = l1l2_awake && (count != '0) && (outstanding != OUTW'(MAX_OUT));
  assign fwd_payload = q_mem[rd_ptr];
  assign pop         = fwd_valid && fwd_ready;

  always_ff @(posedge clk) begin
    if (push) q_mem[wr_ptr] <= snp_payload;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr      <= '0;
      rd_ptr      <= '0;
      count       <= '0;
      outstanding <= '0;
    end else begin
      if (push) wr_ptr <= (wr_ptr == PTRW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)  rd_ptr <= (rd_ptr == PTRW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count       <= count + CNTW'(push) - CNTW'(pop);
      outstanding <= outstanding + OUTW'(pop) - OUTW'(snp_done);
    end
  end

  assign pending = snp_valid || (count != '0) || (outstanding != '0);

  a_no_spurious_done: assert property (@(posedge clk) disable iff (!rst_n)
                        snp_done |-> (outstanding != '0));
  a_fwd_only_awake:   assert property (@(posedge clk) disable iff (!rst_n)
                        fwd_valid |-> l1l2_awake);

endmodule
