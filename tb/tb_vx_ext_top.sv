// tb_vx_ext_top: end-to-end test of the extension subsystem inside a small
// behavioural SIMT pipeline.
//
// The pipeline model fetches one instruction per cycle for a round-robin warp
// through the CFM, keeps one decoded instruction per warp, and issues one per
// cycle from a warp whose instruction the DMSL unit reports ready; stream
// results are written back two cycles later. Register values of the loop body
// live in a small register-file model. Behavioural memories stand in for the
// multi-port data cache and the shared memory, and a load/store-unit model
// keeps issuing loads to port 0 during the run.
//
// Phase 1, vecadd: every warp runs "C[i] = A[i] + B[i]" as a one-instruction
// hardware loop (start PC = end PC = 0x104) whose per-thread bound differs
// between threads; A and C are streams through the data cache, B through the
// shared memory. Phase 2, a matrix-vector product: an outer hardware loop over
// rows (per-thread bounds) with an inner one-instruction loop
// "f10 += f14 * f15" over 3 columns, the sum sent to a write stream at the end
// of each row. Checked: every result in memory, that nothing is stored past a
// thread's bound, the number of instructions each warp issued (no loop or
// predication instructions), LSU load data, and that each mechanism happened:
// loop start, jump back, loop end, nested loop, per-thread masking, divergence
// mask, issue held for stream data, credits exhausted, several data-cache
// ports in one cycle, LSU priority on port 0, shared-memory traffic.
module tb_vx_ext_top;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 2, R = 3, P = 3, C = 4;
  localparam int IW = $clog2(C), TAG_W = ((W > 1) ? $clog2(W) : 1) + T * (IW + 2);
  localparam int MTAG_W = $clog2(R + 1) + TAG_W;
  localparam int WW = (W > 1) ? $clog2(W) : 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------------------------------------------------------- DUT
  logic fetch_valid; logic [WW-1:0] fetch_wid; logic [31:0] fetch_pc, base_next_pc, next_pc;
  logic [T-1:0] fetch_tmask, dec_tmask; logic hw_active, loop_jump, loop_start, loop_end;
  logic [$clog2(L+1)-1:0] depth;
  logic csr_we; logic [WW-1:0] csr_wid, csr_rwid; logic [7:0] csr_addr, csr_raddr;
  logic [T-1:0] csr_tmask; logic [T-1:0][31:0] csr_wdata, csr_rdata;
  logic [WW-1:0] iss_wid; logic [T-1:0] iss_tm; logic [2:0] rs_used; logic [2:0][5:0] rs;
  logic rd_used; logic [5:0] rd; logic iss_rdy, rd_redir, fire; logic [2:0] byp;
  logic [2:0][T-1:0][31:0] sdata;
  logic wbv; logic [WW-1:0] wbw; logic [5:0] wbrd; logic [T-1:0] wbm; logic [T-1:0][31:0] wbd;
  logic wb_redir;
  logic lv, lrw, lrdy, lrv; logic [T-1:0] lm, lrm; logic [T-1:0][31:0] la, ld, lrd;
  logic [T-1:0][3:0] lbe; logic [TAG_W-1:0] lt, lrt;
  logic [P-1:0] dv, drw, drdy, drv; logic [P-1:0][T-1:0] dm, drm;
  logic [P-1:0][T-1:0][31:0] da, dd, drd; logic [P-1:0][T-1:0][3:0] dbe;
  logic [P-1:0][MTAG_W-1:0] dt, drt;
  logic sv_, srw, srdy, srv; logic [T-1:0] sm_, srm; logic [T-1:0][31:0] sa, sd_, srd;
  logic [T-1:0][3:0] sbe; logic [MTAG_W-1:0] st_, srt;

  vx_ext_top #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L), .NUM_DMSL(R), .NUM_DPORTS(P),
               .CREDITS(C)) dut (
    .clk, .rst_n,
    .fetch_valid_i(fetch_valid), .fetch_wid_i(fetch_wid), .fetch_pc_i(fetch_pc),
    .base_next_pc_i(base_next_pc), .fetch_tmask_i(fetch_tmask), .next_pc_o(next_pc),
    .dec_tmask_o(dec_tmask), .hw_active_o(hw_active), .loop_jump_o(loop_jump),
    .loop_start_o(loop_start), .loop_end_o(loop_end), .loop_depth_o(depth),
    .csr_we_i(csr_we), .csr_wid_i(csr_wid), .csr_addr_i(csr_addr), .csr_tmask_i(csr_tmask),
    .csr_wdata_i(csr_wdata), .csr_rwid_i(csr_rwid), .csr_raddr_i(csr_raddr), .csr_rdata_o(csr_rdata),
    .iss_wid_i(iss_wid), .iss_tmask_i(iss_tm), .iss_rs_used_i(rs_used), .iss_rs_i(rs),
    .iss_rd_used_i(rd_used), .iss_rd_i(rd), .iss_ready_o(iss_rdy), .iss_src_bypass_o(byp),
    .iss_src_data_o(sdata), .iss_rd_redirect_o(rd_redir), .iss_fire_i(fire),
    .wb_valid_i(wbv), .wb_wid_i(wbw), .wb_rd_i(wbrd), .wb_tmask_i(wbm), .wb_data_i(wbd),
    .wb_redirect_o(wb_redir),
    .lsu_valid_i(lv), .lsu_rw_i(lrw), .lsu_mask_i(lm), .lsu_addr_i(la), .lsu_data_i(ld),
    .lsu_byteen_i(lbe), .lsu_tag_i(lt), .lsu_ready_o(lrdy), .lsu_rsp_valid_o(lrv),
    .lsu_rsp_mask_o(lrm), .lsu_rsp_data_o(lrd), .lsu_rsp_tag_o(lrt),
    .dc_valid_o(dv), .dc_rw_o(drw), .dc_mask_o(dm), .dc_addr_o(da), .dc_data_o(dd),
    .dc_byteen_o(dbe), .dc_tag_o(dt), .dc_ready_i(drdy), .dc_rsp_valid_i(drv),
    .dc_rsp_mask_i(drm), .dc_rsp_data_i(drd), .dc_rsp_tag_i(drt),
    .sm_valid_o(sv_), .sm_rw_o(srw), .sm_mask_o(sm_), .sm_addr_o(sa), .sm_data_o(sd_),
    .sm_byteen_o(sbe), .sm_tag_o(st_), .sm_ready_i(srdy), .sm_rsp_valid_i(srv),
    .sm_rsp_mask_i(srm), .sm_rsp_data_i(srd), .sm_rsp_tag_i(srt));

  mem_model #(.NPORTS(P), .NUM_THREADS(T), .MTAG_W(MTAG_W)) dmem (
    .clk, .rst_n, .valid_i(dv), .rw_i(drw), .mask_i(dm), .addr_i(da), .data_i(dd),
    .byteen_i(dbe), .tag_i(dt), .ready_o(drdy), .rsp_valid_o(drv), .rsp_mask_o(drm),
    .rsp_data_o(drd), .rsp_tag_o(drt));
  mem_model #(.NPORTS(1), .NUM_THREADS(T), .MTAG_W(MTAG_W), .LAT(1), .JIT(0)) smem (
    .clk, .rst_n, .valid_i(sv_), .rw_i(srw), .mask_i(sm_), .addr_i(sa), .data_i(sd_),
    .byteen_i(sbe), .tag_i(st_), .ready_o(srdy), .rsp_valid_o(srv), .rsp_mask_o(srm),
    .rsp_data_o(srd), .rsp_tag_o(srt));

  int checks = 0, failures = 0;
  task automatic check(input logic ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- helpers
  function automatic logic [T-1:0][31:0] splat(input logic [31:0] v);
    for (int t = 0; t < T; t++) splat[t] = v;
  endfunction
  task automatic csrw(input int w, input logic [7:0] a, input logic [T-1:0][31:0] d);
    @(negedge clk);
    csr_we = 1; csr_wid = WW'(w); csr_addr = a; csr_tmask = '1; csr_wdata = d;
    @(negedge clk) csr_we = 0;
  endtask
  function automatic logic [7:0] cfm_a(input int lvl, input int rg);
    return {1'b0, 3'(lvl), 4'(rg)};
  endfunction
  function automatic logic [7:0] dm_a(input int id, input int rg);
    return {1'b1, 3'(id), 4'(rg)};
  endfunction
  function automatic logic [31:0] rd_init(input logic [31:0] a);
    return (a >= 32'hFF00_0000) ? smem.read_word(a) : dmem.read_word(a);
  endfunction

  localparam logic [31:0] A0 = 32'h0001_0000, B0 = 32'hFF00_0000, C0 = 32'h0003_0000;
  localparam logic [31:0] M0 = 32'h0005_0000, X0 = 32'h0006_0000, Y0 = 32'h0007_0000;
  function automatic logic [31:0] abase(input logic [31:0] b, input int w, input int t);
    return b + 32'(w * T * 128 + t * 128);
  endfunction

  // ---------------------------------------------------------------- pipeline model
  typedef struct { bit full; logic [31:0] pc; logic [T-1:0] m; } ib_t;
  ib_t ib[W];
  logic [31:0] pc[W];
  bit halted[W];
  logic [T-1:0] wmask[W];
  logic [T-1:0][31:0] f10[W];
  int issued[W];
  typedef struct { int w; logic [T-1:0] m; logic [T-1:0][31:0] d; int due; } wb_t;
  wb_t wbq[$];
  int cyc = 0;
  int frr = 0, irr = 0;
  // mechanism counters
  int n_start = 0, n_jump = 0, n_end = 0, n_nested = 0, n_masked = 0, n_div = 0, n_held = 0;
  int n_full = 0, n_multi = 0, n_lsu_pri = 0, n_smem = 0;

  // instruction table (0x100 and 0x1FC write DMSL 0's base address, see issue)
  task automatic decode(input logic [31:0] p, output logic [2:0] u, output logic [2:0][5:0] r,
                        output logic du, output logic [5:0] d, output bit halt);
    u = '0; r = '0; du = 0; d = 0; halt = 0;
    unique case (p)
      32'h104: begin u = 3'b011; r[0] = 6'h2E; r[1] = 6'h2F; du = 1; d = 6'h30; end // f16=f14+f15
      32'h108, 32'h210: halt = 1;
      32'h200: begin du = 1; d = 6'h2A; end                                        // f10 = 0
      32'h204: begin u = 3'b111; r[0] = 6'h2E; r[1] = 6'h2F; r[2] = 6'h2A; du = 1; d = 6'h2A; end
      32'h208: begin u = 3'b001; r[0] = 6'h2A; du = 1; d = 6'h30; end              // f16 = f10
      default: ;
    endcase
  endtask

  task automatic run_pipeline(input logic [31:0] entry);
    int guard;
    for (int w = 0; w < W; w++) begin
      pc[w] = entry; halted[w] = 0; ib[w].full = 0; issued[w] = 0; f10[w] = '0;
    end
    guard = 0;
    while (guard < 20000) begin
      bit all_halted;
      all_halted = 1;
      for (int w = 0; w < W; w++) all_halted &= halted[w];
      if (all_halted && wbq.size() == 0) break;
      guard++;
      @(negedge clk);
      cyc++;
      // ---- writeback of stream results
      wbv = 0;
      if (wbq.size() > 0 && wbq[0].due <= cyc) begin
        wbv = 1; wbw = WW'(wbq[0].w); wbrd = 6'h30; wbm = wbq[0].m; wbd = wbq[0].d;
        void'(wbq.pop_front());
      end
      // ---- fetch
      fetch_valid = 0;
      for (int k = 0; k < W; k++) begin
        int w; w = (frr + k) % W;
        if (!halted[w] && !ib[w].full) begin
          fetch_valid = 1; fetch_wid = WW'(w); fetch_pc = pc[w]; base_next_pc = pc[w] + 4;
          fetch_tmask = wmask[w];
          frr = w + 1;
          break;
        end
      end
      // ---- issue
      fire = 0; rs_used = 0; rd_used = 0;
      begin
        int sel; sel = -1;
        for (int k = 0; k < W; k++) begin
          int w; logic [2:0] u; logic [2:0][5:0] r; logic du; logic [5:0] d; bit h;
          w = (irr + k) % W;
          if (ib[w].full) begin
            decode(ib[w].pc, u, r, du, d, h);
            iss_wid = WW'(w); iss_tm = ib[w].m; rs_used = u; rs = r; rd_used = du; rd = d;
            #1;
            if (iss_rdy) begin sel = w; break; end
            n_held++;
          end
        end
        if (sel >= 0) begin
          logic [2:0] u; logic [2:0][5:0] r; logic du; logic [5:0] d; bit h;
          logic [T-1:0][31:0] res;
          decode(ib[sel].pc, u, r, du, d, h);
          irr = sel + 1;
          fire = 1;
          issued[sel]++;
          res = '0;
          unique case (ib[sel].pc)
            32'h104: for (int t = 0; t < T; t++) res[t] = sdata[0][t] + sdata[1][t];
            32'h200: for (int t = 0; t < T; t++) if (ib[sel].m[t]) f10[sel][t] = 0;
            32'h204: for (int t = 0; t < T; t++)
                       if (ib[sel].m[t]) f10[sel][t] = f10[sel][t] + sdata[0][t] * sdata[1][t];
            32'h208: res = f10[sel];
            default: ;
          endcase
          // the instruction before each loop writes DMSL 0's base address, so
          // the first loop iteration finds its stream still empty
          if (ib[sel].pc == 32'h100 || ib[sel].pc == 32'h1FC) begin
            csr_we = 1; csr_wid = WW'(sel); csr_addr = dm_a(0, 0); csr_tmask = '1;
            for (int t = 0; t < T; t++) csr_wdata[t] = abase((ib[sel].pc == 32'h100) ? A0 : M0, sel, t);
          end
          if (h) halted[sel] = 1;
          if (rd_redir) wbq.push_back('{sel, ib[sel].m, res, cyc + 2});
          ib[sel].full = 0;
        end
      end
      #1;
      if (fetch_valid) begin
        int w; w = int'(fetch_wid);
        ib[w] = '{1, fetch_pc, dec_tmask};
        pc[w] = next_pc;
        if (loop_start) n_start++;
        if (loop_jump) n_jump++;
        if (loop_end) n_end++;
        if (int'(depth) >= 2) n_nested++;
        if (hw_active && dec_tmask != fetch_tmask) n_masked++;
        if (fetch_tmask != '1) n_div++;
      end
      if (wbv) check(wb_redir, "stream result redirected");
      @(posedge clk);
      #1 fire = 0; wbv = 0; fetch_valid = 0; csr_we = 0;
    end
    check(guard < 20000, "pipeline run ended");
  endtask

  // ---------------------------------------------------------------- LSU model
  logic [31:0] lsu_exp[$];
  int lsu_sent = 0, lsu_got = 0;
  bit lsu_on = 1;
  always @(negedge clk) begin
    if (rst_n) begin
      if (lrv) begin
        check(lsu_exp.size() > 0 && lrd[0] == lsu_exp[0], "LSU load data");
        if (lsu_exp.size() > 0) void'(lsu_exp.pop_front());
        lsu_got++;
      end
      if (!(lv && !lrdy)) begin
        lv = lsu_on && ($urandom_range(0, 5) == 0);
        lrw = 0; lm = 1; lt = '0; ld = '0; lbe = '1;
        la = splat(32'h0009_0000 + 4 * 32'($urandom_range(0, 255)));
      end
    end
  end
  always @(posedge clk) if (rst_n && lv && lrdy) begin
    lsu_exp.push_back(dmem.read_word(la[0]));
    lsu_sent++;
  end
  // mechanism observation
  always @(posedge clk) if (rst_n) begin
    int nd; nd = 0;
    for (int p = 0; p < P; p++) nd += dv[p];
    if (nd >= 2) n_multi++;
    // the LSU wins port 0 while a stream also asks for the data cache
    if (lv && lrdy && !dut.lsu_to_sm && (dut.rq_valid & ~dut.to_sm) != 0) n_lsu_pri++;
    if (sv_) n_smem++;
    // requests reach the memory their first active address belongs to
    for (int p = 0; p < P; p++)
      if (dv[p]) begin
        logic [31:0] fa; fa = 0;
        for (int t = T - 1; t >= 0; t--) if (dm[p][t]) fa = da[p][t];
        check(fa < 32'hFF00_0000, "data-cache request outside the shared-memory window");
      end
    if (sv_) begin
      logic [31:0] fa; fa = 0;
      for (int t = T - 1; t >= 0; t--) if (sm_[t]) fa = sa[t];
      check(fa >= 32'hFF00_0000 && fa < 32'hFF00_4000, "shared-memory request inside its window");
    end
    // DMSL 1 (B) fills all its credits while the other warps are configured
    for (int w = 0; w < W; w++)
      if (dut.u_dmsl_unit.g_dmsl[1].u_dmsl.g_lane[0].u_lane.f_used[w] == ($clog2(C+1))'(C)) n_full++;
  end

  // ---------------------------------------------------------------- test
  int nb[W][T], kb[W][T];
  localparam int J = 3;
  initial begin
    logic [T-1:0][31:0] d;
    fetch_valid = 0; fetch_wid = 0; fetch_pc = 0; base_next_pc = 0; fetch_tmask = '1;
    csr_we = 0; csr_wid = 0; csr_addr = 0; csr_tmask = 0; csr_wdata = '0; csr_rwid = 0; csr_raddr = 0;
    iss_wid = 0; iss_tm = 0; rs_used = 0; rs = '0; rd_used = 0; rd = 0; fire = 0;
    wbv = 0; wbw = 0; wbrd = 0; wbm = 0; wbd = '0;
    lv = 0; lrw = 0; lm = 0; la = '0; ld = '0; lbe = '0; lt = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ======== phase 1: vecadd
    for (int w = 0; w < W; w++) begin
      wmask[w] = (w == 1) ? ~T'(1) : '1;   // warp 1: thread 0 diverged away
      for (int t = 0; t < T; t++) nb[w][t] = C + ((t * 3 + w) % 7);
      // hardware loop 0: start = end = 0x104, per-thread bound
      csrw(w, cfm_a(0, 0), splat(32'h104));
      csrw(w, cfm_a(0, 1), splat(32'h104));
      for (int t = 0; t < T; t++) d[t] = 32'h8000_0000 | 32'(nb[w][t]);
      csrw(w, cfm_a(0, 3), d);
      // strides and configuration first; the base-address write starts the stream
      // DMSL 0: A -> f14 (base written by the program), DMSL 1: B (shared memory) -> f15, DMSL 2: f16 -> C
      csrw(w, dm_a(0, 5), splat(4)); csrw(w, dm_a(0, 1), splat(32'h0C2E));
      csrw(w, dm_a(1, 5), splat(4)); csrw(w, dm_a(1, 1), splat(32'h0C2F));
      for (int t = 0; t < T; t++) d[t] = abase(B0, w, t);
      csrw(w, dm_a(1, 0), d);
      csrw(w, dm_a(2, 5), splat(4)); csrw(w, dm_a(2, 1), splat(32'h1C30));
      for (int t = 0; t < T; t++) d[t] = abase(C0, w, t);
      csrw(w, dm_a(2, 0), d);
    end
    run_pipeline(32'h100);
    repeat (40) @(posedge clk);
    for (int w = 0; w < W; w++) begin
      int mx; mx = 0;
      for (int t = 0; t < T; t++) if (wmask[w][t] && nb[w][t] > mx) mx = nb[w][t];
      check(issued[w] == mx + 2, $sformatf("warp %0d issued %0d instructions, expected %0d",
                                           w, issued[w], mx + 2));
      for (int t = 0; t < T; t++) begin
        for (int i = 0; i < nb[w][t]; i++) begin
          logic [31:0] e;
          e = rd_init(abase(A0, w, t) + 4 * i) + rd_init(abase(B0, w, t) + 4 * i);
          if (wmask[w][t])
            check(dmem.read_word(abase(C0, w, t) + 4 * i) == e,
                  $sformatf("vecadd w%0d t%0d i%0d", w, t, i));
        end
        check(dmem.read_word(abase(C0, w, t) + 4 * nb[w][t]) ==
              dmem.init_word(abase(C0, w, t) + 4 * nb[w][t]), "nothing stored past the bound");
      end
    end

    // ======== phase 2: y[k] = sum_j M[k][j] * x[j], rows per thread
    for (int w = 0; w < W; w++) begin
      wmask[w] = '1;
      for (int t = 0; t < T; t++) kb[w][t] = 2 + ((t + w) % 3);
      csrw(w, cfm_a(0, 0), splat(32'h200));
      csrw(w, cfm_a(0, 1), splat(32'h208));
      for (int t = 0; t < T; t++) d[t] = 32'h8000_0000 | 32'(kb[w][t]);
      csrw(w, cfm_a(0, 3), d);
      csrw(w, cfm_a(1, 0), splat(32'h204));
      csrw(w, cfm_a(1, 1), splat(32'h204));
      csrw(w, cfm_a(1, 3), splat(32'h8000_0000 | J));
      // M row-major per thread: inner +4, outer +4 (base written by the program)
      csrw(w, dm_a(0, 5), splat(4)); csrw(w, dm_a(0, 6), splat(4));
      csrw(w, dm_a(0, 1), splat(32'h0C2E));
      // x: inner +4, back to x[0] on the next row
      csrw(w, dm_a(1, 5), splat(-4 * (J - 1))); csrw(w, dm_a(1, 6), splat(4));
      csrw(w, dm_a(1, 1), splat(32'h0C2F));
      for (int t = 0; t < T; t++) d[t] = abase(X0, w, t);
      csrw(w, dm_a(1, 0), d);
      // y: one element per row, consecutive words
      csrw(w, dm_a(2, 5), splat(4)); csrw(w, dm_a(2, 6), splat(4));
      csrw(w, dm_a(2, 1), splat(32'h1C30));
      for (int t = 0; t < T; t++) d[t] = abase(Y0, w, t);
      csrw(w, dm_a(2, 0), d);
    end
    run_pipeline(32'h1FC);
    repeat (40) @(posedge clk);
    for (int w = 0; w < W; w++) begin
      int mk; mk = 0;
      for (int t = 0; t < T; t++) if (kb[w][t] > mk) mk = kb[w][t];
      check(issued[w] == 3 + mk * (J + 2), $sformatf("warp %0d phase 2 issued %0d", w, issued[w]));
      for (int t = 0; t < T; t++)
        for (int k = 0; k < kb[w][t]; k++) begin
          logic [31:0] e; e = 0;
          for (int j = 0; j < J; j++)
            e += dmem.read_word(abase(M0, w, t) + 4 * (k * J + j)) *
                 dmem.read_word(abase(X0, w, t) + 4 * j);
          check(dmem.read_word(abase(Y0, w, t) + 4 * k) == e,
                $sformatf("sgemv w%0d t%0d row %0d got %h exp %h", w, t, k, dmem.read_word(abase(Y0, w, t) + 4 * k), e));
        end
    end
    lsu_on = 0;
    repeat (20) @(posedge clk);
    check(lsu_sent > 10 && lsu_got == lsu_sent, $sformatf("LSU loads answered: %0d of %0d", lsu_got, lsu_sent));

    $display("mechanisms: loop_start=%0d jump_back=%0d loop_end=%0d nested=%0d masked=%0d divergent=%0d",
             n_start, n_jump, n_end, n_nested, n_masked, n_div);
    $display("            issue_held=%0d credits_full=%0d multi_port=%0d lsu_priority=%0d smem=%0d",
             n_held, n_full, n_multi, n_lsu_pri, n_smem);
    check(n_start > 0, "loop start happened");
    check(n_jump > 0, "jump back happened");
    check(n_end > 0, "loop end happened");
    check(n_nested > 0, "nested loop happened");
    check(n_masked > 0, "per-thread predication happened");
    check(n_div > 0, "divergence mask happened");
    check(n_held > 0, "issue held for stream data happened");
    check(n_full > 0, "credits exhausted happened");
    check(n_multi > 0, "multi-port access happened");
    check(n_lsu_pri > 0, "LSU priority happened");
    check(n_smem > 0, "shared-memory stream happened");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
