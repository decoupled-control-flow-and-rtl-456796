// tb_cfm: self-checking test of the Control Flow Manager.
//
// Two warps each run a two-level loop nest (outer body 0x100..0x120 with an
// inner loop 0x108..0x118), fetched one instruction per cycle with the warp
// chosen at random each cycle. Every thread has its own outer and inner bound.
// A reference model written directly from the loop semantics (an instruction
// of iteration (i, j) is active in thread t when i < outer bound and
// j < inner bound; a loop repeats until every thread still active in it is
// done; the tail mask applies to the last iteration) gives the expected PC and
// decode thread mask of every fetched instruction. A third run checks the
// divergence mask from the fetch stage and the tail mask. The number of
// instructions fetched is checked as well: no branch or predication
// instruction is needed.
module tb_cfm;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              fetch_valid;
  logic [0:0]        fetch_wid;
  logic [31:0]       fetch_pc, base_next_pc, next_pc;
  logic [T-1:0]      fetch_tmask, dec_tmask;
  logic              hw_active, loop_jump, loop_start, loop_end;
  logic [1:0]        depth;
  logic              csr_we;
  logic [0:0]        csr_wid, csr_rwid;
  logic [7:0]        csr_addr, csr_raddr;
  logic [T-1:0]      csr_tmask;
  logic [T-1:0][31:0] csr_wdata, csr_rdata;
  logic [W-1:0][L-1:0] loop_en;
  logic [W-1:0][L-1:0][T-1:0][30:0] loop_bound;

  cfm #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L)) dut (
    .clk, .rst_n, .fetch_valid_i(fetch_valid), .fetch_wid_i(fetch_wid), .fetch_pc_i(fetch_pc),
    .base_next_pc_i(base_next_pc), .fetch_tmask_i(fetch_tmask), .next_pc_o(next_pc),
    .dec_tmask_o(dec_tmask), .hw_active_o(hw_active), .loop_jump_o(loop_jump),
    .loop_start_o(loop_start), .loop_end_o(loop_end), .depth_o(depth),
    .csr_we_i(csr_we), .csr_wid_i(csr_wid), .csr_addr_i(csr_addr), .csr_tmask_i(csr_tmask),
    .csr_wdata_i(csr_wdata), .csr_rwid_i(csr_rwid), .csr_raddr_i(csr_raddr), .csr_rdata_o(csr_rdata),
    .loop_en_o(loop_en), .loop_bound_o(loop_bound));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic csr_write(input int w, input int lvl, input int rg, input logic [T-1:0][31:0] d);
    @(negedge clk);
    csr_we = 1; csr_wid = 1'(w); csr_addr = {1'b0, 3'(lvl), 4'(rg)}; csr_tmask = '1; csr_wdata = d;
    @(negedge clk);
    csr_we = 0;
  endtask

  function automatic logic [T-1:0][31:0] splat(input logic [31:0] v);
    for (int t = 0; t < T; t++) splat[t] = v;
  endfunction

  // expected trace per warp
  typedef struct { logic [31:0] pc; logic [T-1:0] m; } ent_t;
  ent_t exp_q[W][$];
  int b0[W][T], b1[W][T];
  logic [T-1:0] tail0[W], tail1[W], divm[W];

  function automatic void build(input int w);
    int n0, n1; logic [T-1:0] m0, m1, top0;
    exp_q[w].delete();
    exp_q[w].push_back('{32'h0F8, divm[w]});
    exp_q[w].push_back('{32'h0FC, divm[w]});
    top0 = divm[w];
    n0 = 1;
    for (int t = 0; t < T; t++) if (top0[t] && b0[w][t] > n0) n0 = b0[w][t];
    for (int i = 0; i < n0; i++) begin
      logic [T-1:0] top1;
      for (int t = 0; t < T; t++) m0[t] = top0[t] && (i < b0[w][t]);
      if (i == n0 - 1) m0 &= tail0[w];
      exp_q[w].push_back('{32'h100, m0});
      exp_q[w].push_back('{32'h104, m0});
      top1 = m0;
      n1 = 1;
      for (int t = 0; t < T; t++) if (top1[t] && b1[w][t] > n1) n1 = b1[w][t];
      for (int j = 0; j < n1; j++) begin
        for (int t = 0; t < T; t++) m1[t] = top1[t] && (j < b1[w][t]);
        if (j == n1 - 1) m1 &= tail1[w];
        for (int pc = 'h108; pc <= 'h118; pc += 4) exp_q[w].push_back('{pc, m1});
      end
      exp_q[w].push_back('{32'h11C, m0});
      exp_q[w].push_back('{32'h120, m0});
    end
    exp_q[w].push_back('{32'h124, divm[w]});
  endfunction

  task automatic configure(input int w);
    logic [T-1:0][31:0] d;
    csr_write(w, 0, 0, splat(32'h100));
    csr_write(w, 0, 1, splat(32'h120));
    csr_write(w, 0, 2, splat(32'(tail0[w])));
    csr_write(w, 1, 0, splat(32'h108));
    csr_write(w, 1, 1, splat(32'h118));
    csr_write(w, 1, 2, splat(32'(tail1[w])));
    for (int t = 0; t < T; t++) d[t] = 32'h8000_0000 | 32'(b0[w][t]);
    csr_write(w, 0, 3, d);
    for (int t = 0; t < T; t++) d[t] = 32'h8000_0000 | 32'(b1[w][t]);
    csr_write(w, 1, 3, d);
  endtask

  logic [31:0] pc[W];
  int fetched[W], starts, ends_, jumps;

  task automatic run();
    bit done[W];
    int guard;
    for (int w = 0; w < W; w++) begin pc[w] = 32'h0F8; done[w] = 0; fetched[w] = 0; end
    guard = 0;
    while (!(done[0] && done[1]) && guard < 5000) begin
      int w;
      guard++;
      @(negedge clk);
      w = $urandom_range(0, W - 1);
      if (done[w]) w = 1 - w;
      fetch_valid = 1; fetch_wid = 1'(w); fetch_pc = pc[w]; base_next_pc = pc[w] + 4;
      fetch_tmask = divm[w];
      #1;
      if (exp_q[w].size() == 0) begin
        check(0, "trace longer than expected");
        done[w] = 1;
      end else begin
        ent_t e;
        e = exp_q[w].pop_front();
        check(fetch_pc == e.pc, $sformatf("w%0d pc %h expected %h", w, fetch_pc, e.pc));
        check(dec_tmask == e.m, $sformatf("w%0d pc %h mask %b expected %b", w, fetch_pc, dec_tmask, e.m));
        fetched[w]++;
        if (loop_start) starts++;
        if (loop_end) ends_++;
        if (loop_jump) jumps++;
        pc[w] = next_pc;
        if (e.pc == 32'h124) done[w] = 1;
      end
      @(posedge clk);
      #1 fetch_valid = 0;
    end
    check(guard < 5000, "run did not end");
  endtask

  int expected_len[W];
  initial begin
    fetch_valid = 0; csr_we = 0; fetch_wid = 0; fetch_pc = 0; base_next_pc = 0; fetch_tmask = 0;
    csr_wid = 0; csr_addr = 0; csr_tmask = 0; csr_wdata = '0; csr_rwid = 0; csr_raddr = 0;
    starts = 0; ends_ = 0; jumps = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // run 1 and 2: random bounds, no divergence, no tail mask
    for (int run_i = 0; run_i < 3; run_i++) begin
      for (int w = 0; w < W; w++) begin
        for (int t = 0; t < T; t++) begin
          b0[w][t] = $urandom_range(1, 4);
          b1[w][t] = $urandom_range(1, 5);
        end
        tail0[w] = '1; tail1[w] = '1; divm[w] = '1;
        if (run_i == 2) begin
          divm[w]  = 4'b1011;
          tail1[w] = 4'b0110;
          tail0[w] = 4'b1110;
        end
        configure(w);
        build(w);
        expected_len[w] = exp_q[w].size();
      end
      // CSR read-back of a bound and the loop state
      csr_rwid = 1; csr_raddr = {1'b0, 3'd1, 4'd3};
      #1;
      for (int t = 0; t < T; t++)
        check(csr_rdata[t] == (32'h8000_0000 | 32'(b1[1][t])), "bound read-back");
      check(loop_en[1] == 2'b11, "loop enables exported");
      check(loop_bound[0][0][2] == 31'(b0[0][2]), "bounds exported");
      run();
      for (int w = 0; w < W; w++) begin
        check(fetched[w] == expected_len[w], $sformatf("w%0d fetched %0d instructions, expected %0d",
                                                       w, fetched[w], expected_len[w]));
        check(exp_q[w].size() == 0, "trace shorter than expected");
      end
      csr_raddr = {1'b0, 3'd0, 4'd4};
      #1 check(csr_rdata[0] == 0, "loop state back to 0 after the loop");
    end
    check(starts > 0 && ends_ > 0 && jumps > 0, "loop start, end and jump all seen");
    $display("loop starts=%0d ends=%0d jumps=%0d", starts, ends_, jumps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
