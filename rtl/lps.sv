// lps: loop predication stack of the fetch stage.
//
// One stack of thread masks per warp, NUM_LOOPS entries deep. When a hardware
// loop starts, the thread mask in force at that instruction is pushed: the
// fetch-stage mask, or, for a nested loop, the mask of the enclosing loop's
// current iteration. While a loop runs, the mask sent to decode is
//   stack top AND loop predicate AND fetch-stage mask,
// where the loop predicate (per thread: bound > iteration counter, with the
// tail mask on the last iteration) comes from the hardware loop unit and the
// fetch-stage mask comes from the baseline divergence (IPDOM) stack, so an
// if-then-else inside the loop body still masks threads. When the loop
// completes its entry is popped. With no loop running the fetch-stage mask
// passes unchanged.
//
// Interface and timing: everything from the fetch inputs to dec_tmask_o is
// combinational; pushes and pops take effect at the clock edge when
// fetch_valid_i is high. A push and a pop in the same cycle (a one-instruction
// loop body that starts and ends at once) leave the stack unchanged.
//
// From the paper: push at loop start, AND with the loop predicate, AND with the
// fetch-stage mask for divergence, pop at loop end, bypass when no loop runs.
// This design's own choices: the pushed value for a nested loop is the mask of
// the enclosing loop's iteration, and the AND result is formed combinationally
// rather than written back into the stack entry.
module lps
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 8,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned NUM_LOOPS   = 4,
  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned SP_W  = $clog2(NUM_LOOPS + 1)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   fetch_valid_i,
  input  logic [WID_W-1:0]       fetch_wid_i,
  input  logic [NUM_THREADS-1:0] fetch_tmask_i,      // from the IPDOM stack
  input  logic                   hw_active_i,        // hwloop enable
  input  logic                   push_i,             // is loop start
  input  logic                   pop_i,              // is loop end
  input  logic [NUM_THREADS-1:0] cond_mask_i,        // innermost loop predicate
  input  logic [NUM_THREADS-1:0] outer_cond_mask_i,  // enclosing loop predicate
  output logic [NUM_THREADS-1:0] top_o,              // effective top (after a push)
  output logic [NUM_THREADS-1:0] raw_top_o,          // stored top
  output logic [NUM_THREADS-1:0] dec_tmask_o         // decode-stage thread mask
);

  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0] stack_q;
  logic [NUM_WARPS-1:0][SP_W-1:0]                       sp_q;

  logic [SP_W-1:0]        sp;
  logic [NUM_THREADS-1:0] push_val;

  always_comb begin
    sp        = sp_q[fetch_wid_i];
    raw_top_o = (sp != '0) ? stack_q[fetch_wid_i][SP_W'(sp - 1'b1)] : '1;
    push_val  = (sp != '0) ? (raw_top_o & outer_cond_mask_i & fetch_tmask_i) : fetch_tmask_i;
    top_o     = push_i ? push_val : raw_top_o;
    dec_tmask_o = hw_active_i ? (top_o & cond_mask_i & fetch_tmask_i) : fetch_tmask_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stack_q <= '0;
      sp_q    <= '0;
    end else if (fetch_valid_i) begin
      if (push_i && !pop_i) begin
        stack_q[fetch_wid_i][sp[$clog2(NUM_LOOPS)-1:0]] <= push_val;
        sp_q[fetch_wid_i] <= sp + 1'b1;
      end else if (pop_i && !push_i) begin
        sp_q[fetch_wid_i] <= sp - 1'b1;
      end
    end
  end

  // stack discipline
  assert property (@(posedge clk) disable iff (!rst_n)
    fetch_valid_i && pop_i && !push_i |-> sp != '0);
  assert property (@(posedge clk) disable iff (!rst_n)
    fetch_valid_i && push_i && !pop_i |-> sp < SP_W'(NUM_LOOPS));

endmodule
