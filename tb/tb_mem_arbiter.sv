// tb_mem_arbiter: self-checking test of the port arbiter.
//
// Random DMSL requests with random needs, a random LSU request and random port
// readiness. Checked every cycle: the LSU gets port 0 whenever it asks and
// port 0 is ready; every ready port not taken by the LSU carries a DMSL
// request while one is left; no DMSL is granted twice; every granted DMSL has
// at least the need of every refused one (ties to the lower index); each
// port's payload and tag prefix come from the granted source; responses are
// steered back by the tag prefix.
module tb_mem_arbiter;
  localparam int R = 4, P = 3, T = 2, TW = 6, NW = 3, SW = 3;
  logic [R-1:0] rv, rrw, rg; logic [R-1:0][T-1:0] rm; logic [R-1:0][T-1:0][31:0] ra, rd;
  logic [R-1:0][T-1:0][3:0] rbe; logic [R-1:0][TW-1:0] rt; logic [R-1:0][NW-1:0] rn;
  logic lv, lrw, lrdy; logic [T-1:0] lm; logic [T-1:0][31:0] la, ld; logic [T-1:0][3:0] lbe;
  logic [TW-1:0] lt;
  logic [P-1:0] mv, mrw, mrdy; logic [P-1:0][T-1:0] mm; logic [P-1:0][T-1:0][31:0] ma, md;
  logic [P-1:0][T-1:0][3:0] mbe; logic [P-1:0][SW+TW-1:0] mt;
  logic [P-1:0] sv; logic [P-1:0][T-1:0] sm; logic [P-1:0][T-1:0][31:0] sd; logic [P-1:0][SW+TW-1:0] st;
  logic [R-1:0][P-1:0] ov; logic [R-1:0][P-1:0][T-1:0] om; logic [R-1:0][P-1:0][T-1:0][31:0] od;
  logic [R-1:0][P-1:0][TW-1:0] ot;
  logic lsv; logic [T-1:0] lsm; logic [T-1:0][31:0] lsd; logic [TW-1:0] lst;

  mem_arbiter #(.NREQ(R), .NPORTS(P), .HAS_LSU(1'b1), .NUM_THREADS(T), .TAG_W(TW), .NEED_W(NW)) dut (
    .req_valid_i(rv), .req_rw_i(rrw), .req_mask_i(rm), .req_addr_i(ra), .req_data_i(rd),
    .req_byteen_i(rbe), .req_tag_i(rt), .req_need_i(rn), .req_grant_o(rg),
    .lsu_valid_i(lv), .lsu_rw_i(lrw), .lsu_mask_i(lm), .lsu_addr_i(la), .lsu_data_i(ld),
    .lsu_byteen_i(lbe), .lsu_tag_i(lt), .lsu_ready_o(lrdy),
    .mem_valid_o(mv), .mem_rw_o(mrw), .mem_mask_o(mm), .mem_addr_o(ma), .mem_data_o(md),
    .mem_byteen_o(mbe), .mem_tag_o(mt), .mem_ready_i(mrdy),
    .mem_rsp_valid_i(sv), .mem_rsp_mask_i(sm), .mem_rsp_data_i(sd), .mem_rsp_tag_i(st),
    .rsp_valid_o(ov), .rsp_mask_o(om), .rsp_data_o(od), .rsp_tag_o(ot),
    .lsu_rsp_valid_o(lsv), .lsu_rsp_mask_o(lsm), .lsu_rsp_data_o(lsd), .lsu_rsp_tag_o(lst));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int lsu_wins = 0, contested = 0;
  initial begin
    for (int n = 0; n < 3000; n++) begin
      int ngrant, nready_dmsl, nvalid;
      rv = R'($urandom); rrw = R'($urandom); rm = '1; rt = '0; rn = '0;
      for (int r = 0; r < R; r++) begin
        rn[r] = NW'($urandom_range(0, 7));
        rt[r] = TW'($urandom);
        for (int t = 0; t < T; t++) begin ra[r][t] = $urandom; rd[r][t] = $urandom; rbe[r][t] = 4'(r); end
      end
      lv = $urandom_range(0, 2) == 0; lrw = 0; lm = '1; lt = TW'($urandom);
      for (int t = 0; t < T; t++) begin la[t] = $urandom; ld[t] = $urandom; lbe[t] = 4'hF; end
      mrdy = P'($urandom) | P'($urandom);
      sv = P'($urandom);
      for (int p = 0; p < P; p++) begin
        st[p] = {SW'($urandom_range(0, R)), TW'($urandom)};
        for (int t = 0; t < T; t++) sd[p][t] = $urandom;
        sm[p] = T'($urandom);
      end
      #1;
      // LSU priority
      check(lrdy == (lv && mrdy[0]), "LSU ready iff asking and port 0 ready");
      if (lrdy) begin
        lsu_wins++;
        check(mv[0] && mt[0][SW+TW-1 -: SW] == SW'(R) && ma[0] == la && mt[0][TW-1:0] == lt,
              "LSU payload on port 0");
      end
      // count
      ngrant = 0; nvalid = 0; nready_dmsl = 0;
      for (int r = 0; r < R; r++) begin ngrant += rg[r]; nvalid += rv[r]; end
      for (int p = 0; p < P; p++) if (mrdy[p] && !(p == 0 && lv)) nready_dmsl++;
      check(ngrant == ((nvalid < nready_dmsl) ? nvalid : nready_dmsl), "grant count");
      check((rg & ~rv) == '0, "grant only to requesters");
      if (nvalid > nready_dmsl) contested++;
      // priority order
      for (int a = 0; a < R; a++)
        for (int b = 0; b < R; b++)
          if (rg[a] && rv[b] && !rg[b])
            check(rn[a] > rn[b] || (rn[a] == rn[b] && a < b), "higher need served first");
      // payloads
      for (int p = 0; p < P; p++)
        if (mv[p] && !(p == 0 && lrdy)) begin
          int s; s = int'(mt[p][SW+TW-1 -: SW]);
          check(s < R && rg[s] && ma[p] == ra[s] && md[p] == rd[s] && mt[p][TW-1:0] == rt[s] &&
                mrw[p] == rrw[s] && mbe[p] == rbe[s], "DMSL payload on its port");
        end
      // responses
      for (int p = 0; p < P; p++)
        for (int r = 0; r < R; r++) begin
          check(ov[r][p] == (sv[p] && st[p][SW+TW-1 -: SW] == SW'(r)), "response steering");
          if (ov[r][p]) check(od[r][p] == sd[p] && ot[r][p] == st[p][TW-1:0] && om[r][p] == sm[p],
                              "response payload");
        end
      #9;
    end
    check(lsu_wins > 100 && contested > 100, "LSU priority and contention exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
