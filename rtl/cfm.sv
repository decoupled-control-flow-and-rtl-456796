// cfm: Control Flow Manager, the fetch-stage half of the extensions.
//
// It joins the hardware loop unit (next-PC override and iteration counters)
// with the loop predication stack (thread mask per loop iteration). For the
// warp chosen by the wavefront scheduler it takes the fetched PC, the baseline
// next PC (PC+4 or a jump target) and the fetch-stage thread mask from the
// divergence stack, and returns the PC to fetch next for that warp and the
// thread mask that goes with the instruction to decode. Loops are configured
// through the CFM CSRs (unit type 0 of the extension CSR space), written in the
// execute stage; the loop nest (enables and per-thread bounds) is exported for
// the memory streaming lanes.
//
// Timing: combinational from fetch to next_pc_o / dec_tmask_o, state updated at
// the clock edge of a valid fetch. CSR writes land at the clock edge.
module cfm
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 8,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned NUM_LOOPS   = 4,
  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned LVL_W = $clog2(NUM_LOOPS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          fetch_valid_i,
  input  logic [WID_W-1:0]              fetch_wid_i,
  input  logic [XLEN-1:0]               fetch_pc_i,
  input  logic [XLEN-1:0]               base_next_pc_i,
  input  logic [NUM_THREADS-1:0]        fetch_tmask_i,
  output logic [XLEN-1:0]               next_pc_o,
  output logic [NUM_THREADS-1:0]        dec_tmask_o,
  output logic                          hw_active_o,
  output logic                          loop_jump_o,
  output logic                          loop_start_o,
  output logic                          loop_end_o,
  output logic [LVL_W-1:0]              depth_o,
  input  logic                          csr_we_i,
  input  logic [WID_W-1:0]              csr_wid_i,
  input  logic [CSR_ADDR_W-1:0]         csr_addr_i,
  input  logic [NUM_THREADS-1:0]        csr_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0] csr_wdata_i,
  input  logic [WID_W-1:0]              csr_rwid_i,
  input  logic [CSR_ADDR_W-1:0]         csr_raddr_i,
  output logic [NUM_THREADS-1:0][XLEN-1:0] csr_rdata_o,
  output logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                        loop_en_o,
  output logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] loop_bound_o
);

  logic                   push, pop;
  logic [NUM_THREADS-1:0] cond_mask, outer_cond_mask, top, raw_top;

  hwloop_ctrl #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LOOPS(NUM_LOOPS)
  ) u_hwloop (
    .clk, .rst_n,
    .fetch_valid_i, .fetch_wid_i, .fetch_pc_i, .base_next_pc_i,
    .next_pc_o, .hw_active_o, .loop_jump_o, .depth_o,
    .lps_push_o(push), .lps_pop_o(pop),
    .cond_mask_o(cond_mask), .outer_cond_mask_o(outer_cond_mask),
    .lps_top_i(top), .lps_raw_top_i(raw_top),
    .csr_we_i, .csr_wid_i, .csr_addr_i, .csr_tmask_i, .csr_wdata_i,
    .csr_rwid_i, .csr_raddr_i, .csr_rdata_o,
    .loop_en_o, .loop_bound_o
  );

  lps #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LOOPS(NUM_LOOPS)
  ) u_lps (
    .clk, .rst_n,
    .fetch_valid_i, .fetch_wid_i, .fetch_tmask_i,
    .hw_active_i(hw_active_o), .push_i(push), .pop_i(pop),
    .cond_mask_i(cond_mask), .outer_cond_mask_i(outer_cond_mask),
    .top_o(top), .raw_top_o(raw_top), .dec_tmask_o
  );

  assign loop_start_o = push;
  assign loop_end_o   = pop;

endmodule
