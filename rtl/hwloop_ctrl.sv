// hwloop_ctrl: zero-overhead hardware loop control for the fetch stage of a
// SIMT core, with up to NUM_LOOPS nested loops tracked separately per warp.
//
// For every warp and loop level the unit holds the configuration that software
// writes once before the hot loop: start PC, end PC, the tail thread mask used
// on the last iteration, a 31-bit iteration bound per thread and an enable flag,
// plus the iteration counter (the "loop state" register). Loops of one warp
// nest by level: level 0 is the outermost. When the fetched PC of the
// scheduled warp equals the start PC of the next enabled level, that loop starts
// (counter 0) and the LPS is told to push. When the fetched PC equals the end PC
// of the innermost running loop, the counter is incremented and, as long as some
// thread still active in the loop has bound > counter, the next PC is forced to
// the loop start PC; otherwise the loop falls through, its counter returns to 0
// and the LPS pops. The loop keeps iterating until every thread has met its end
// condition; the per-thread predicate (bound > counter) is handed to the LPS,
// which masks the threads that are done. On the last iteration the tail mask
// is applied as well.
//
// Interface and timing: the fetch inputs are combinational to next_pc_o,
// hw_active_o, push/pop and the masks; state changes at the clock edge when
// fetch_valid_i is high. CSR writes are applied at the clock edge; CSR reads are
// combinational. A CSR write carries one 32-bit value per thread: the bound
// register takes each active thread's own value, the other registers take the
// value of the lowest active thread.
//
// From the paper: the register set and bit fields, the start/end PC compare,
// the counter increment and next-PC override after the baseline jump mux, the
// innermost-running-loop selection and iteration until all threads finish.
// This design's own choices: bounds are per thread (the LPS figure draws
// T-wide loop bounds per warp), a loop whose start and end PC coincide is
// allowed (single-instruction body), an enable flag stays set after the loop
// completes so that an inner loop restarts on every outer iteration, and two
// nested loops must not share an end PC.
module hwloop_ctrl
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
  // fetch stage: the warp picked by the wavefront scheduler
  input  logic                          fetch_valid_i,
  input  logic [WID_W-1:0]              fetch_wid_i,
  input  logic [XLEN-1:0]               fetch_pc_i,
  input  logic [XLEN-1:0]               base_next_pc_i,   // PC+4 or jump target
  output logic [XLEN-1:0]               next_pc_o,
  output logic                          hw_active_o,      // a hardware loop covers this PC
  output logic                          loop_jump_o,      // next PC overridden to start PC
  output logic [LVL_W-1:0]              depth_o,          // running loops after this fetch
  // to / from the loop predication stack
  output logic                          lps_push_o,
  output logic                          lps_pop_o,
  output logic [NUM_THREADS-1:0]        cond_mask_o,      // innermost loop predicate
  output logic [NUM_THREADS-1:0]        outer_cond_mask_o,// predicate of the enclosing loop
  input  logic [NUM_THREADS-1:0]        lps_top_i,        // effective stack top
  input  logic [NUM_THREADS-1:0]        lps_raw_top_i,    // stored stack top
  // CSR access (unit type CFM already decoded by the caller)
  input  logic                          csr_we_i,
  input  logic [WID_W-1:0]              csr_wid_i,
  input  logic [CSR_ADDR_W-1:0]         csr_addr_i,
  input  logic [NUM_THREADS-1:0]        csr_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0] csr_wdata_i,
  input  logic [WID_W-1:0]              csr_rwid_i,
  input  logic [CSR_ADDR_W-1:0]         csr_raddr_i,
  output logic [NUM_THREADS-1:0][XLEN-1:0] csr_rdata_o,
  // loop nest description for the streaming lanes
  output logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                    loop_en_o,
  output logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] loop_bound_o
);

  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][XLEN-1:0]        start_pc_q, end_pc_q, cnt_q;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0] end_tmask_q;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] bound_q;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                  en_q;
  logic [NUM_WARPS-1:0][LVL_W-1:0]                      depth_q;

  assign loop_en_o    = en_q;
  assign loop_bound_o = bound_q;

  // ---------------------------------------------------------------- fetch path
  logic [LVL_W-1:0]       depth, eff_depth;
  logic [LVL_W-1:0]       lvl, olvl;
  logic                   starting, ending, cont;
  logic [XLEN-1:0]        cnt, cnt_inc;
  logic [NUM_THREADS-1:0] more_mask, live_mask, ocnt_mask, omore_mask;
  logic                   last_iter, outer_last;

  always_comb begin
    depth    = depth_q[fetch_wid_i];
    starting = 1'b0;
    if (depth < LVL_W'(NUM_LOOPS))
      starting = en_q[fetch_wid_i][depth[$clog2(NUM_LOOPS)-1:0]] &&
                 (fetch_pc_i == start_pc_q[fetch_wid_i][depth[$clog2(NUM_LOOPS)-1:0]]);
    eff_depth = depth + LVL_W'(starting);
    lvl       = (eff_depth != '0) ? eff_depth - 1'b1 : '0;
    olvl      = (lvl != '0) ? lvl - 1'b1 : '0;
    cnt       = starting ? '0 : cnt_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]];
    cnt_inc   = cnt + 1'b1;
    for (int t = 0; t < NUM_THREADS; t++) begin
      live_mask[t] = {1'b0, bound_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]][t]} > cnt;
      more_mask[t] = {1'b0, bound_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]][t]} > cnt_inc;
      ocnt_mask[t] = {1'b0, bound_q[fetch_wid_i][olvl[$clog2(NUM_LOOPS)-1:0]][t]} >
                     cnt_q[fetch_wid_i][olvl[$clog2(NUM_LOOPS)-1:0]];
      omore_mask[t] = {1'b0, bound_q[fetch_wid_i][olvl[$clog2(NUM_LOOPS)-1:0]][t]} >
                      (cnt_q[fetch_wid_i][olvl[$clog2(NUM_LOOPS)-1:0]] + 1'b1);
    end
    outer_last = ~|(omore_mask & lps_raw_top_i);
    last_iter = ~|(more_mask & lps_top_i);
    cond_mask_o = live_mask &
                  (last_iter ? end_tmask_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]] : '1);
    // predicate of the enclosing loop, needed when a nested loop starts and
    // pushes the mask in force around it (the stored top is then the
    // enclosing loop's own entry)
    outer_cond_mask_o = (depth != '0)
                      ? ocnt_mask & (outer_last ? end_tmask_q[fetch_wid_i][olvl[$clog2(NUM_LOOPS)-1:0]] : '1)
                      : '1;
    hw_active_o = (eff_depth != '0);
    ending   = hw_active_o &&
               (fetch_pc_i == end_pc_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]]);
    cont     = ending && !last_iter;
    loop_jump_o = cont;
    next_pc_o   = cont ? start_pc_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]] : base_next_pc_i;
    lps_push_o  = starting;
    lps_pop_o   = ending && last_iter;
    depth_o     = eff_depth - LVL_W'(lps_pop_o);
  end

  // ---------------------------------------------------------------- CSR write
  logic [XLEN-1:0] csr_scalar;
  always_comb begin
    csr_scalar = csr_wdata_i[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (csr_tmask_i[t]) csr_scalar = csr_wdata_i[t];
  end

  logic [$clog2(NUM_LOOPS)-1:0] csr_lvl;
  logic                         csr_lvl_ok;
  assign csr_lvl    = csr_id(csr_addr_i)[$clog2(NUM_LOOPS)-1:0];
  assign csr_lvl_ok = 32'(csr_id(csr_addr_i)) < NUM_LOOPS;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      start_pc_q  <= '0;
      end_pc_q    <= '0;
      cnt_q       <= '0;
      end_tmask_q <= '1;
      bound_q     <= '0;
      en_q        <= '0;
      depth_q     <= '0;
    end else begin
      if (fetch_valid_i) begin
        depth_q[fetch_wid_i] <= depth_o;
        if (ending) begin
          cnt_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]] <= cont ? cnt_inc : '0;
        end else if (starting) begin
          cnt_q[fetch_wid_i][lvl[$clog2(NUM_LOOPS)-1:0]] <= '0;
        end
      end
      if (csr_we_i && csr_lvl_ok) begin
        unique case (csr_reg(csr_addr_i))
          CFM_REG_START: start_pc_q[csr_wid_i][csr_lvl] <= csr_scalar;
          CFM_REG_END:   end_pc_q[csr_wid_i][csr_lvl]   <= csr_scalar;
          CFM_REG_TMASK: end_tmask_q[csr_wid_i][csr_lvl] <= csr_scalar[NUM_THREADS-1:0];
          CFM_REG_BOUND: begin
            en_q[csr_wid_i][csr_lvl] <= csr_scalar[31];
            for (int t = 0; t < NUM_THREADS; t++)
              if (csr_tmask_i[t]) bound_q[csr_wid_i][csr_lvl][t] <= csr_wdata_i[t][30:0];
          end
          CFM_REG_STATE: cnt_q[csr_wid_i][csr_lvl] <= csr_scalar;
          default: ;
        endcase
      end
    end
  end

  // ---------------------------------------------------------------- CSR read
  logic [$clog2(NUM_LOOPS)-1:0] rd_lvl;
  assign rd_lvl = csr_id(csr_raddr_i)[$clog2(NUM_LOOPS)-1:0];
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      unique case (csr_reg(csr_raddr_i))
        CFM_REG_START: csr_rdata_o[t] = start_pc_q[csr_rwid_i][rd_lvl];
        CFM_REG_END:   csr_rdata_o[t] = end_pc_q[csr_rwid_i][rd_lvl];
        CFM_REG_TMASK: csr_rdata_o[t] = XLEN'(end_tmask_q[csr_rwid_i][rd_lvl]);
        CFM_REG_BOUND: csr_rdata_o[t] = {en_q[csr_rwid_i][rd_lvl], bound_q[csr_rwid_i][rd_lvl][t]};
        CFM_REG_STATE: csr_rdata_o[t] = cnt_q[csr_rwid_i][rd_lvl];
        default:       csr_rdata_o[t] = '0;
      endcase
    end
  end

  // a running loop never exceeds the configured nesting depth
  assert property (@(posedge clk) disable iff (!rst_n)
    depth_q[fetch_wid_i] <= LVL_W'(NUM_LOOPS));

endmodule
