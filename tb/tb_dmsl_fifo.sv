// tb_dmsl_fifo: self-checking test of the credit FIFO.
//
// Read-stream use: random reserves; each reserved slot is filled after a
// random delay, possibly out of order and up to two in a cycle; random pops
// must return the data in reservation order and only when the head is filled.
// Write-stream use: reserves followed by in-order fills through the sequential
// fill port. Counts (used, filled) and the full condition (no reserve beyond
// DEPTH credits) are checked against a model; a flush empties the FIFO.
module tb_dmsl_fifo;
  localparam int D = 4, DW = 16, NF = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic flush, rsv, can_rsv, fseq, pop, hv; logic [1:0] ridx;
  logic [NF-1:0] fill; logic [NF-1:0][1:0] fidx; logic [NF-1:0][DW-1:0] fdata;
  logic [DW-1:0] fseq_d, hd; logic [2:0] used, nvalid;
  dmsl_fifo #(.DEPTH(D), .DW(DW), .NFILL(NF)) dut (
    .clk, .rst_n, .flush_i(flush), .reserve_i(rsv), .can_reserve_o(can_rsv), .rsv_idx_o(ridx),
    .fill_i(fill), .fill_idx_i(fidx), .fill_data_i(fdata), .fill_seq_i(fseq),
    .fill_seq_data_i(fseq_d), .pop_i(pop), .head_valid_o(hv), .head_data_o(hd),
    .used_o(used), .nvalid_o(nvalid));

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

  // model: queue of {filled, data, slot}
  typedef struct { bit filled; logic [DW-1:0] d; logic [1:0] idx; } e_t;
  e_t q[$];
  int full_seen = 0, ooo = 0, pops = 0;

  initial begin
    flush = 0; rsv = 0; fseq = 0; pop = 0; fill = 0; fidx = '0; fdata = '0; fseq_d = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- read-stream use
    for (int n = 0; n < 3000; n++) begin
      int nf; int unf[$];
      @(negedge clk);
      rsv = $urandom_range(0, 1); pop = $urandom_range(0, 1); fill = '0;
      // pick up to NF unfilled entries, any order
      unf.delete();
      foreach (q[i]) if (!q[i].filled) unf.push_back(i);
      unf.shuffle();
      nf = 0;
      for (int f = 0; f < NF; f++) begin
        if (unf.size() > f && $urandom_range(0, 1)) begin
          fill[f] = 1; fidx[f] = q[unf[f]].idx; fdata[f] = DW'($urandom);
          if (unf[f] != 0) ooo++;
        end
      end
      #1;
      check(used == 3'(q.size()), "used count");
      check(can_rsv == (q.size() < D), "can reserve");
      if (q.size() == D) full_seen++;
      check(hv == (q.size() > 0 && q[0].filled), "head valid");
      if (hv) check(hd == q[0].d, "head data in order");
      if (rsv && can_rsv) check(ridx == (q.size() > 0 ? q[$].idx + 2'd1 : ridx), "slot index");
      // update model
      for (int f = 0; f < NF; f++)
        if (fill[f]) foreach (q[i]) if (q[i].idx == fidx[f] && !q[i].filled) begin
          q[i].filled = 1; q[i].d = fdata[f];
        end
      if (pop && hv) begin void'(q.pop_front()); pops++; end
      if (rsv && can_rsv) q.push_back('{0, '0, ridx});
      @(posedge clk);
    end
    check(full_seen > 0 && ooo > 0 && pops > 100, "full, out-of-order fill and pops exercised");
    // ---- flush
    @(negedge clk); rsv = 0; pop = 0; fill = 0; flush = 1;
    @(negedge clk); flush = 0; q.delete();
    #1 check(used == 0 && !hv && nvalid == 0, "flush empties");
    // ---- write-stream use: reserve then in-order sequential fill, then pop
    for (int n = 0; n < 2000; n++) begin
      int nfilled;
      @(negedge clk);
      nfilled = 0;
      foreach (q[i]) if (q[i].filled) nfilled++;
      rsv = $urandom_range(0, 1); pop = $urandom_range(0, 1);
      fseq = (nfilled < q.size()) && $urandom_range(0, 1); fseq_d = DW'($urandom);
      #1;
      check(nvalid == 3'(nfilled), "filled count");
      check(hv == (q.size() > 0 && q[0].filled), "write head valid");
      if (hv) check(hd == q[0].d, "write head data");
      if (fseq) q[nfilled].filled = 1;
      if (fseq) q[nfilled].d = fseq_d;
      if (pop && hv) void'(q.pop_front());
      if (rsv && can_rsv) q.push_back('{0, '0, ridx});
      @(posedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
