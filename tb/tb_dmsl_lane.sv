// tb_dmsl_lane: self-checking test of one streaming lane.
//
// Warp 0 reads an 8-bit integer stream over a two-level loop nest (bounds 3
// and 2, per-level strides 4 and 100, base 0x1001): the test grants every
// request, answers out of order on two response ports and checks the
// addresses against the nest walk, the stop after exactly 6 elements, the FIFO
// order, the sign-extended byte and that requests stop while all 4 credits are
// used. Warp 1 writes a 16-bit stream with no loop enabled (stride 6): results
// reserved at issue and filled at writeback must leave as stores in order,
// with the half-word placed at the right byte offset.
module tb_dmsl_lane;
  import ext_pkg::*;
  localparam int W = 2, L = 2, C = 4, NR = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W-1:0] en, is_wr, is_fp; prec_e [W-1:0] prec;
  logic [W-1:0][L-1:0] len; logic [W-1:0][L-1:0][30:0] bnd; logic [W-1:0][L-1:0][31:0] str;
  logic base_we; logic [0:0] base_wid; logic [31:0] base;
  logic [W-1:0] can_req; logic [0:0] req_wid; logic [31:0] raddr, rdata; logic [3:0] rbe;
  logic [1:0] ridx; logic [2:0] rused, rnv; logic grant;
  logic [NR-1:0] rv; logic [NR-1:0][0:0] rwid; logic [NR-1:0][1:0] rix, roff; logic [NR-1:0][31:0] rdat;
  logic [0:0] iss_wid; logic hv, crsv, ipop, irsv; logic [31:0] hd;
  logic wbv; logic [0:0] wbw; logic [31:0] wbd;
  logic [31:0] ptr1;

  dmsl_lane #(.NUM_WARPS(W), .NUM_LOOPS(L), .CREDITS(C), .NRSP(NR)) dut (
    .clk, .rst_n, .stream_en_i(en), .is_write_i(is_wr), .prec_i(prec), .is_fp_i(is_fp),
    .loop_en_i(len), .bound_i(bnd), .stride_i(str), .base_we_i(base_we), .base_wid_i(base_wid),
    .base_i(base), .rd_wid_i(1'b1), .rd_ptr_o(ptr1), .can_req_o(can_req), .req_wid_i(req_wid), .req_addr_o(raddr),
    .req_data_o(rdata), .req_byteen_o(rbe), .req_idx_o(ridx), .req_used_o(rused),
    .req_nvalid_o(rnv), .grant_i(grant), .rsp_valid_i(rv), .rsp_wid_i(rwid), .rsp_idx_i(rix),
    .rsp_off_i(roff), .rsp_data_i(rdat), .iss_wid_i(iss_wid), .iss_head_valid_o(hv),
    .iss_head_data_o(hd), .iss_can_rsv_o(crsv), .iss_pop_i(ipop), .iss_rsv_i(irsv),
    .wb_valid_i(wbv), .wb_wid_i(wbw), .wb_data_i(wbd));

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

  function automatic logic [31:0] word_at(input logic [31:0] a);
    return {a[15:0] ^ 16'hA5C3, a[15:0] + 16'h8181};
  endfunction

  typedef struct { logic [1:0] idx; logic [1:0] off; logic [31:0] addr; int age; } p_t;
  p_t pend[$];
  logic [31:0] exp_addr[$], exp_val[$];
  int nreq = 0, stalled_full = 0, ooo = 0;

  initial begin
    logic [31:0] a;
    en = 0; is_wr = 2'b10; is_fp = 0; prec[0] = PREC_8; prec[1] = PREC_16;
    len = '0; bnd = '0; str = '0; base_we = 0; base_wid = 0; base = 0; req_wid = 0; grant = 0;
    rv = 0; rwid = '0; rix = '0; roff = '0; rdat = '0; iss_wid = 0; ipop = 0; irsv = 0;
    wbv = 0; wbw = 0; wbd = 0;
    len[0] = 2'b11; bnd[0][0] = 3; bnd[0][1] = 2; str[0][1] = 4; str[0][0] = 100;
    str[1][0] = 6;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); base_we = 1; base_wid = 0; base = 32'h1001;
    @(negedge clk); base_we = 0;
    // expected addresses by walking the nest
    a = 32'h1001;
    for (int i = 0; i < 3; i++)
      for (int j = 0; j < 2; j++) begin
        exp_addr.push_back(a);
        exp_val.push_back({{24{word_at(a)[15]}}, word_at(a)[15:8]});
        if (j == 0) a += 4; else a += 100;
      end
    en[0] = 1;
    // ---- read stream, pops start late so the credits fill up
    for (int n = 0; n < 120; n++) begin
      int k;
      @(negedge clk);
      req_wid = 0; iss_wid = 0;
      rv = '0;
      // respond to up to two pending requests, random choice
      for (int r = 0; r < NR; r++) begin
        if (pend.size() > 1 && $urandom_range(0, 2) == 0 || pend.size() > 0 && n > 60) begin
          k = $urandom_range(0, pend.size() - 1);
          if (k != 0) ooo++;
          rv[r] = 1; rwid[r] = 0; rix[r] = pend[k].idx; roff[r] = pend[k].off;
          rdat[r] = word_at({pend[k].addr[31:2], 2'b00});
          pend.delete(k);
        end
      end
      #1;
      grant = can_req[0];
      if (rused == 3'(C) && !can_req[0]) stalled_full++;
      if (grant) begin
        check(nreq < 6, "no request beyond the nest");
        if (nreq < 6) check(raddr == exp_addr[nreq], $sformatf("addr %h exp %h", raddr, exp_addr[nreq]));
        pend.push_back('{ridx, raddr[1:0], raddr, 0});
        nreq++;
      end
      ipop = (n > 30) && hv;
      if (ipop) begin
        check(hd == exp_val[0], $sformatf("data %h exp %h", hd, exp_val[0]));
        void'(exp_val.pop_front());
      end
      @(posedge clk);
      #1 grant = 0; ipop = 0;
    end
    check(nreq == 6 && exp_val.size() == 0, "six elements requested and consumed");
    check(stalled_full > 0, "requests held back when the credits are used up");
    check(ooo > 0, "out-of-order responses exercised");
    // ---- write stream on warp 1
    @(negedge clk); base_we = 1; base_wid = 1; base = 32'h2002;
    @(negedge clk); base_we = 0; en[1] = 1;
    check(ptr1 == 32'h2002, "pointer readback after a base write");
    begin
      logic [15:0] vals[$], wbq[$]; int nst; logic [31:0] wa;
      nst = 0; wa = 32'h2002;
      for (int n = 0; n < 100; n++) begin
        @(negedge clk);
        iss_wid = 1; req_wid = 1;
        irsv = crsv && (n < 40) && $urandom_range(0, 1);
        wbv = 0;
        if (wbq.size() > 0 && $urandom_range(0, 1)) begin
          wbv = 1; wbw = 1; wbd = 32'(wbq[0]);
          vals.push_back(wbq.pop_front());
        end
        #1;
        grant = can_req[1] && $urandom_range(0, 1);
        if (grant) begin
          check(vals.size() > 0, "store only with data");
          check(raddr == wa, $sformatf("store addr %h exp %h", raddr, wa));
          check(rbe == (4'b0011 << wa[1:0]), "half-word byte enables");
          check(rdata == (32'(vals[0]) << (8 * wa[1:0])), "half-word placed");
          void'(vals.pop_front());
          wa += 6; nst++;
        end
        if (irsv) wbq.push_back(16'($urandom));
        @(posedge clk);
        #1 grant = 0; irsv = 0; wbv = 0;
      end
      check(nst > 5 && vals.size() == 0, "all written elements stored");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
