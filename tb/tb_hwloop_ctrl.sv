// tb_hwloop_ctrl: self-checking test of the hardware loop unit on its own.
//
// One warp runs a single loop with start PC 0x40 and end PC 0x4C; per-thread
// bounds 3, 5, 1, 4 and the stack top held at all ones, so the loop must
// iterate 5 times. The test checks the next-PC override (jump back at the end
// PC except on the last iteration), the push at the start PC, the pop at the
// last end PC, the per-thread predicate and the tail mask on the last
// iteration, the counter visible through the loop-state CSR, and that a
// second warp with the same PCs but no loop enabled passes untouched. It also
// checks that a one-instruction loop body (start PC = end PC) iterates.
module tb_hwloop_ctrl;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fetch_valid; logic [0:0] fetch_wid; logic [31:0] fetch_pc, base_next_pc, next_pc;
  logic hw_active, loop_jump, push, pop; logic [1:0] depth;
  logic [T-1:0] cond, ocond, top, raw_top;
  logic csr_we; logic [0:0] csr_wid, csr_rwid; logic [7:0] csr_addr, csr_raddr;
  logic [T-1:0] csr_tmask; logic [T-1:0][31:0] csr_wdata, csr_rdata;
  logic [W-1:0][L-1:0] loop_en; logic [W-1:0][L-1:0][T-1:0][30:0] loop_bound;

  hwloop_ctrl #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L)) dut (
    .clk, .rst_n, .fetch_valid_i(fetch_valid), .fetch_wid_i(fetch_wid), .fetch_pc_i(fetch_pc),
    .base_next_pc_i(base_next_pc), .next_pc_o(next_pc), .hw_active_o(hw_active),
    .loop_jump_o(loop_jump), .depth_o(depth), .lps_push_o(push), .lps_pop_o(pop),
    .cond_mask_o(cond), .outer_cond_mask_o(ocond), .lps_top_i(top), .lps_raw_top_i(raw_top),
    .csr_we_i(csr_we), .csr_wid_i(csr_wid), .csr_addr_i(csr_addr), .csr_tmask_i(csr_tmask),
    .csr_wdata_i(csr_wdata), .csr_rwid_i(csr_rwid), .csr_raddr_i(csr_raddr), .csr_rdata_o(csr_rdata),
    .loop_en_o(loop_en), .loop_bound_o(loop_bound));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int lvl, input int rg, input logic [T-1:0][31:0] d);
    @(negedge clk);
    csr_we = 1; csr_wid = 0; csr_addr = {1'b0, 3'(lvl), 4'(rg)}; csr_tmask = '1; csr_wdata = d;
    @(negedge clk) csr_we = 0;
  endtask
  function automatic logic [T-1:0][31:0] splat(input logic [31:0] v);
    for (int t = 0; t < T; t++) splat[t] = v;
  endfunction

  // fetch one instruction and return the outputs seen
  task automatic fetch(input int w, input logic [31:0] p);
    @(negedge clk);
    fetch_valid = 1; fetch_wid = 1'(w); fetch_pc = p; base_next_pc = p + 4;
    #1;
  endtask

  int bnd[T] = '{3, 5, 1, 4};
  initial begin
    logic [31:0] p; int iter; logic [T-1:0] exp_m;
    fetch_valid = 0; csr_we = 0; top = '1; raw_top = '1; fetch_wid = 0; fetch_pc = 0;
    base_next_pc = 0; csr_rwid = 0; csr_raddr = 0; csr_wid = 0; csr_addr = 0; csr_tmask = 0;
    csr_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    wr(0, 0, splat(32'h40));
    wr(0, 1, splat(32'h4C));
    wr(0, 2, splat(32'b0101));
    begin
      logic [T-1:0][31:0] d;
      for (int t = 0; t < T; t++) d[t] = 32'h8000_0000 | 32'(bnd[t]);
      wr(0, 3, d);
    end
    // warp 1 is not configured: the same PCs pass through
    fetch(1, 32'h4C);
    check(!hw_active && next_pc == 32'h50 && !loop_jump, "unconfigured warp untouched");
    p = 32'h3C; iter = 0;
    for (int n = 0; n < 40 && p != 32'h50; n++) begin
      fetch(0, p);
      if (p == 32'h40 && iter == 0) check(push && depth == 1, "push at loop start");
      else check(!push, "no push inside the loop");
      if (p >= 32'h40 && p <= 32'h4C) begin
        for (int t = 0; t < T; t++) exp_m[t] = iter < bnd[t];
        if (iter == 4) exp_m &= 4'b0101;
        check(hw_active, "active in the body");
        check(cond == exp_m, $sformatf("iter %0d pc %h cond %b exp %b", iter, p, cond, exp_m));
      end else check(!hw_active, "inactive outside the loop");
      if (p == 32'h4C) begin
        check(next_pc == ((iter < 4) ? 32'h40 : 32'h50), "next pc at the end PC");
        check(pop == (iter == 4), "pop only on the last iteration");
        csr_raddr = {1'b0, 3'd0, 4'd4};
        #1 check(csr_rdata[0] == 32'(iter), "loop state = iteration");
        iter++;
      end else check(next_pc == p + 4, "sequential next pc");
      p = next_pc;
      @(posedge clk); #1 fetch_valid = 0;
    end
    check(iter == 5, "five iterations");
    check(p == 32'h50, "fell through");
    // one-instruction body
    wr(0, 0, splat(32'h80));
    wr(0, 1, splat(32'h80));
    wr(0, 2, splat(32'hF));
    wr(0, 3, splat(32'h8000_0003));
    iter = 0; p = 32'h80;
    for (int n = 0; n < 10 && p == 32'h80; n++) begin
      fetch(0, p);
      check(hw_active, "single-instruction body active");
      if (iter == 0) check(push, "push on first");
      check(pop == (iter == 2), "pop on third");
      iter++;
      p = next_pc;
      @(posedge clk); #1 fetch_valid = 0;
    end
    check(iter == 3 && p == 32'h84, "single-instruction body runs 3 times");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
