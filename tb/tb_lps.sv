// tb_lps: self-checking test of the loop predication stack.
//
// Drives push, pop, loop predicates and fetch masks directly and compares the
// decode mask and the stack top with a queue model: push stores the fetch mask
// (or top AND enclosing predicate AND fetch mask when nested), the decode mask
// is top AND predicate AND fetch mask while a loop is active and the fetch
// mask otherwise. Random sequences on two warps check that each warp has its
// own stack.
module tb_lps;
  localparam int W = 2, T = 8, L = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic fetch_valid; logic [0:0] wid; logic [T-1:0] ftm, cond, ocond, top, raw_top, dec;
  logic active, push, pop;
  lps #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L)) dut (
    .clk, .rst_n, .fetch_valid_i(fetch_valid), .fetch_wid_i(wid), .fetch_tmask_i(ftm),
    .hw_active_i(active), .push_i(push), .pop_i(pop), .cond_mask_i(cond),
    .outer_cond_mask_i(ocond), .top_o(top), .raw_top_o(raw_top), .dec_tmask_o(dec));

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

  logic [T-1:0] stk[W][$];
  int pushes = 0, pops = 0;
  initial begin
    fetch_valid = 0; wid = 0; ftm = 0; cond = 0; ocond = 0; active = 0; push = 0; pop = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      int w; logic [T-1:0] pv, etop, edec;
      @(negedge clk);
      w = $urandom_range(0, 1);
      wid = 1'(w); ftm = T'($urandom); cond = T'($urandom); ocond = T'($urandom);
      push = (stk[w].size() < L) && ($urandom_range(0, 3) == 0);
      pop  = (stk[w].size() > 0 || push) && ($urandom_range(0, 3) == 0);
      active = push || stk[w].size() > 0;
      fetch_valid = 1;
      #1;
      pv   = (stk[w].size() > 0) ? (stk[w][$] & ocond & ftm) : ftm;
      etop = push ? pv : ((stk[w].size() > 0) ? stk[w][$] : '1);
      edec = active ? (etop & cond & ftm) : ftm;
      check(top == etop, $sformatf("top %b exp %b", top, etop));
      check(dec == edec, $sformatf("dec %b exp %b", dec, edec));
      if (push && !pop) begin stk[w].push_back(pv); pushes++; end
      else if (pop && !push) begin void'(stk[w].pop_back()); pops++; end
      @(posedge clk); #1 fetch_valid = 0;
    end
    check(pushes > 50 && pops > 50, "pushes and pops exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
