// tb_workloads: kernels of the benchmark set run end to end on the extension
// subsystem (2 warps of 4 threads, 4 loop levels, 3 DMSLs, 3 data-cache ports,
// 4 credits), with the same behavioural pipeline, memories and LSU model as
// tb_vx_ext_top.
//
// saxpy   y[i] = 3 * x[i] + y[i]: one loop, x and y read streams, y written
//         back through a write stream over the same addresses.
// knn     d[i] = (lat[i] - 7)^2 + (lng[i] - 11)^2: one loop, two read streams
//         and a write stream (integer arithmetic).
// sgemm   C[t][j] = sum_k A[t][k] * B[k][j]: two loops (columns j with a
//         per-thread count, then k), A read along a row, B down a column, one
//         result per column.
// conv2d  out[t][k] = sum_{c,fy,fx} in[c][y+fy][x+fx] * w[k][c][fy][fx] for
//         the pixel (x, y) = (thread, warp): four nested loops (k, c, fy, fx),
//         the full nesting depth, with per-level strides walking the 3x3
//         window across channels.
// Loop and stream counts follow the kernels; the sizes are reduced so that
// the run takes a few thousand cycles. Every result in memory is checked
// against a model computed here, and so is the number of instructions each
// warp issued. Nested loops need distinct start and end PCs, so conv2d has
// placeholder instructions at the starts and ends of its inner loops.
module tb_workloads;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 4, R = 3, P = 3, C = 4;
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
    repeat (400000) @(posedge clk);
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

  // ---------------------------------------------------------------- programs
  typedef enum int {K_SAXPY, K_KNN, K_SGEMM, K_CONV} kern_e;
  kern_e kern;
  logic [31:0] b0[W][T];      // base of DMSL 0, written by the program
  localparam logic [31:0] PC_BASE = 32'h100;
  function automatic logic [31:0] pc_of(input int i); return PC_BASE + 32'(4 * i); endfunction

  // instruction i of the current kernel: {sources used, destination stream}
  task automatic decode(input logic [31:0] p, output logic [2:0] u, output logic [2:0][5:0] r,
                        output logic du, output logic [5:0] d, output bit halt);
    int i; i = int'((p - PC_BASE) >> 2);
    u = '0; r = '0; du = 0; d = 0; halt = 0;
    unique case (kern)
      K_SAXPY, K_KNN: unique case (i)
        1: begin u = 3'b011; r[0] = 6'h2E; r[1] = 6'h2F; du = 1; d = 6'h30; end
        2: halt = 1;
        default: ;
      endcase
      K_SGEMM: unique case (i)
        1: begin du = 1; d = 6'h2A; end
        2: begin u = 3'b111; r[0] = 6'h2E; r[1] = 6'h2F; r[2] = 6'h2A; du = 1; d = 6'h2A; end
        3: begin u = 3'b001; r[0] = 6'h2A; du = 1; d = 6'h30; end
        5: halt = 1;
        default: ;
      endcase
      K_CONV: unique case (i)
        1: begin du = 1; d = 6'h2A; end
        4: begin u = 3'b111; r[0] = 6'h2E; r[1] = 6'h2F; r[2] = 6'h2A; du = 1; d = 6'h2A; end
        7: begin u = 3'b001; r[0] = 6'h2A; du = 1; d = 6'h30; end
        8: halt = 1;
        default: ;
      endcase
    endcase
  endtask

  task automatic execute(input int w, input logic [31:0] p, input logic [T-1:0] m,
                         output logic [T-1:0][31:0] res);
    int i; i = int'((p - PC_BASE) >> 2);
    res = '0;
    for (int t = 0; t < T; t++) begin
      unique case (kern)
        K_SAXPY: if (i == 1) res[t] = 3 * sdata[0][t] + sdata[1][t];
        K_KNN:   if (i == 1) res[t] = (sdata[0][t] - 7) * (sdata[0][t] - 7) +
                                      (sdata[1][t] - 11) * (sdata[1][t] - 11);
        K_SGEMM: begin
          if (i == 1 && m[t]) f10[w][t] = 0;
          if (i == 2 && m[t]) f10[w][t] = f10[w][t] + sdata[0][t] * sdata[1][t];
          if (i == 3) res[t] = f10[w][t];
        end
        K_CONV: begin
          if (i == 1 && m[t]) f10[w][t] = 0;
          if (i == 4 && m[t]) f10[w][t] = f10[w][t] + sdata[0][t] * sdata[1][t];
          if (i == 7) res[t] = f10[w][t];
        end
      endcase
    end
  endtask

  task automatic run_pipeline();
    int guard;
    for (int w = 0; w < W; w++) begin
      pc[w] = PC_BASE; halted[w] = 0; ib[w].full = 0; issued[w] = 0; f10[w] = '0;
    end
    guard = 0;
    while (guard < 50000) begin
      bit all_halted;
      all_halted = 1;
      for (int w = 0; w < W; w++) all_halted &= halted[w];
      if (all_halted && wbq.size() == 0) break;
      guard++;
      @(negedge clk);
      cyc++;
      wbv = 0;
      if (wbq.size() > 0 && wbq[0].due <= cyc) begin
        wbv = 1; wbw = WW'(wbq[0].w); wbrd = 6'h30; wbm = wbq[0].m; wbd = wbq[0].d;
        void'(wbq.pop_front());
      end
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
          execute(sel, ib[sel].pc, ib[sel].m, res);
          // the first instruction of every program writes DMSL 0's base
          if (ib[sel].pc == PC_BASE) begin
            csr_we = 1; csr_wid = WW'(sel); csr_addr = dm_a(0, 0); csr_tmask = '1;
            for (int t = 0; t < T; t++) csr_wdata[t] = b0[sel][t];
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
        if (int'(depth) >= 4) n_nested++;
      end
      if (wbv) check(wb_redir, "stream result redirected");
      @(posedge clk);
      #1 fire = 0; wbv = 0; fetch_valid = 0; csr_we = 0;
    end
    check(guard < 50000, "pipeline run ended");
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

  // ---------------------------------------------------------------- setup helpers
  task automatic set_loop(input int w, input int lvl, input logic [31:0] spc, input logic [31:0] epc,
                          input logic [T-1:0][31:0] bnd);
    logic [T-1:0][31:0] d;
    csrw(w, cfm_a(lvl, 0), splat(spc));
    csrw(w, cfm_a(lvl, 1), splat(epc));
    for (int t = 0; t < T; t++) d[t] = (bnd[t] == 0) ? 32'h0 : (32'h8000_0000 | bnd[t]);
    csrw(w, cfm_a(lvl, 3), d);
  endtask
  task automatic set_stream(input int w, input int id, input logic [31:0] cfg,
                            input int s0, input int s1, input int s2, input int s3,
                            input logic [T-1:0][31:0] base, input bit write_base);
    csrw(w, dm_a(id, 5), splat(s0)); csrw(w, dm_a(id, 6), splat(s1));
    csrw(w, dm_a(id, 7), splat(s2)); csrw(w, dm_a(id, 8), splat(s3));
    csrw(w, dm_a(id, 1), splat(cfg));
    if (write_base) csrw(w, dm_a(id, 0), base);
  endtask
  task automatic clear_loops(input int w);
    for (int l = 0; l < L; l++) csrw(w, cfm_a(l, 3), splat(0));
  endtask
  localparam logic [31:0] RD14 = 32'h0C2E, RD15 = 32'h0C2F, WR16 = 32'h1C30;

  // ---------------------------------------------------------------- test
  localparam logic [31:0] X0 = 32'h0001_0000, Y0 = 32'h0002_0000, D0 = 32'h0003_0000;
  localparam logic [31:0] A0 = 32'h0004_0000, B0 = 32'hFF00_0000, C0 = 32'h0005_0000;
  localparam logic [31:0] I0 = 32'h0006_0000, WT0 = 32'h0007_0000, O0 = 32'h0008_0000;
  localparam int KK = 3, NJ = 4;                     // sgemm: k extent, B columns
  localparam int CI = 2, KO = 2, F = 3, IW_ = 6, IH = 4;  // conv2d sizes
  int nb[W][T];
  initial begin
    logic [T-1:0][31:0] d, bnd;
    fetch_valid = 0; fetch_wid = 0; fetch_pc = 0; base_next_pc = 0; fetch_tmask = '1;
    csr_we = 0; csr_wid = 0; csr_addr = 0; csr_tmask = 0; csr_wdata = '0; csr_rwid = 0; csr_raddr = 0;
    iss_wid = 0; iss_tm = 0; rs_used = 0; rs = '0; rd_used = 0; rd = 0; fire = 0;
    wbv = 0; wbw = 0; wbrd = 0; wbm = 0; wbd = '0;
    lv = 0; lrw = 0; lm = 0; la = '0; ld = '0; lbe = '0; lt = '0;
    for (int w = 0; w < W; w++) wmask[w] = '1;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ======== saxpy and knn: one loop, per-thread lengths
    for (int kk = 0; kk < 2; kk++) begin
      kern = (kk == 0) ? K_SAXPY : K_KNN;
      for (int w = 0; w < W; w++) begin
        for (int t = 0; t < T; t++) begin
          nb[w][t] = 2 + ((t * 5 + w + kk) % 9);
          bnd[t] = 32'(nb[w][t]);
          b0[w][t] = abase((kk == 0) ? X0 : A0, w, t);
        end
        clear_loops(w);
        set_loop(w, 0, pc_of(1), pc_of(1), bnd);
        set_stream(w, 0, RD14, 4, 0, 0, 0, '0, 0);
        for (int t = 0; t < T; t++) d[t] = abase((kk == 0) ? Y0 : B0, w, t);
        set_stream(w, 1, RD15, 4, 0, 0, 0, d, 1);
        for (int t = 0; t < T; t++) d[t] = abase((kk == 0) ? Y0 : D0, w, t);
        set_stream(w, 2, WR16, 4, 0, 0, 0, d, 1);
      end
      run_pipeline();
      repeat (40) @(posedge clk);
      for (int w = 0; w < W; w++) begin
        int mx; mx = 0;
        for (int t = 0; t < T; t++) if (nb[w][t] > mx) mx = nb[w][t];
        check(issued[w] == mx + 2, $sformatf("%s warp %0d issued %0d", kern.name(), w, issued[w]));
        for (int t = 0; t < T; t++) begin
          for (int i = 0; i < nb[w][t]; i++) begin
            logic [31:0] e, a, b;
            if (kk == 0) begin
              a = dmem.init_word(abase(X0, w, t) + 4 * i); b = dmem.init_word(abase(Y0, w, t) + 4 * i);
              e = 3 * a + b;
              check(dmem.read_word(abase(Y0, w, t) + 4 * i) == e, $sformatf("saxpy w%0d t%0d i%0d", w, t, i));
            end else begin
              a = dmem.init_word(abase(A0, w, t) + 4 * i); b = smem.read_word(abase(B0, w, t) + 4 * i);
              e = (a - 7) * (a - 7) + (b - 11) * (b - 11);
              check(dmem.read_word(abase(D0, w, t) + 4 * i) == e, $sformatf("knn w%0d t%0d i%0d", w, t, i));
            end
          end
          if (kk == 0)
            check(dmem.read_word(abase(Y0, w, t) + 4 * nb[w][t]) ==
                  dmem.init_word(abase(Y0, w, t) + 4 * nb[w][t]), "saxpy stops at the bound");
        end
      end
    end

    // ======== sgemm: row t of A (per thread) times B (KK x NJ, shared), nb[w][t] columns
    kern = K_SGEMM;
    for (int w = 0; w < W; w++) begin
      for (int t = 0; t < T; t++) begin
        nb[w][t] = 1 + ((t + 2 * w) % NJ);
        bnd[t] = 32'(nb[w][t]);
        b0[w][t] = abase(A0, w, t);
      end
      clear_loops(w);
      set_loop(w, 0, pc_of(1), pc_of(3), bnd);
      set_loop(w, 1, pc_of(2), pc_of(2), splat(KK));
      // A row: along k +4, back to the row start for the next column
      set_stream(w, 0, RD14, -4 * (KK - 1), 4, 0, 0, '0, 0);
      // B column j: along k +4*NJ, next column: back to row 0, one word right
      set_stream(w, 1, RD15, 4 - 4 * NJ * (KK - 1), 4 * NJ, 0, 0, splat(WT0), 1);
      for (int t = 0; t < T; t++) d[t] = abase(C0, w, t);
      set_stream(w, 2, WR16, 4, 4, 0, 0, d, 1);
    end
    run_pipeline();
    repeat (40) @(posedge clk);
    for (int w = 0; w < W; w++) begin
      int mx; mx = 0;
      for (int t = 0; t < T; t++) if (nb[w][t] > mx) mx = nb[w][t];
      check(issued[w] == 3 + mx * (KK + 2), $sformatf("sgemm warp %0d issued %0d", w, issued[w]));
      for (int t = 0; t < T; t++)
        for (int j = 0; j < nb[w][t]; j++) begin
          logic [31:0] e; e = 0;
          for (int k = 0; k < KK; k++)
            e += dmem.init_word(abase(A0, w, t) + 4 * k) * dmem.init_word(WT0 + 4 * (k * NJ + j));
          check(dmem.read_word(abase(C0, w, t) + 4 * j) == e, $sformatf("sgemm w%0d t%0d j%0d", w, t, j));
        end
    end

    // ======== conv2d: pixel (x, y) = (t, w), KO output channels, CI input channels, FxF
    kern = K_CONV;
    for (int w = 0; w < W; w++) begin
      for (int t = 0; t < T; t++) b0[w][t] = I0 + 32'(4 * (w * IW_ + t));
      clear_loops(w);
      set_loop(w, 0, pc_of(1), pc_of(7), splat(KO));
      set_loop(w, 1, pc_of(2), pc_of(6), splat(CI));
      set_loop(w, 2, pc_of(3), pc_of(5), splat(F));
      set_loop(w, 3, pc_of(4), pc_of(4), splat(F));
      // input: fx +4, fy next row, c next channel, k back to the window start
      set_stream(w, 0, RD14, -4 * ((CI - 1) * IH * IW_ + (F - 1) * IW_ + (F - 1)),
                 4 * (IH * IW_ - (F - 1) * IW_ - (F - 1)), 4 * (IW_ - (F - 1)), 4, '0, 0);
      // weights [k][c][fy][fx]: contiguous
      set_stream(w, 1, RD15, 4, 4, 4, 4, splat(WT0), 1);
      // output [pixel][k]: one element per k
      for (int t = 0; t < T; t++) d[t] = O0 + 32'(16 * (w * T + t));
      set_stream(w, 2, WR16, 4, 4, 4, 4, d, 1);
    end
    run_pipeline();
    repeat (40) @(posedge clk);
    for (int w = 0; w < W; w++) begin
      check(issued[w] == 2 + KO * (2 + CI * (2 + F * (2 + F))),
            $sformatf("conv2d warp %0d issued %0d", w, issued[w]));
      for (int t = 0; t < T; t++)
        for (int k = 0; k < KO; k++) begin
          logic [31:0] e; e = 0;
          for (int c = 0; c < CI; c++)
            for (int fy = 0; fy < F; fy++)
              for (int fx = 0; fx < F; fx++)
                e += dmem.init_word(I0 + 32'(4 * ((c * IH + w + fy) * IW_ + t + fx))) *
                     dmem.init_word(WT0 + 32'(4 * (((k * CI + c) * F + fy) * F + fx)));
          check(dmem.read_word(O0 + 32'(16 * (w * T + t) + 4 * k)) == e,
                $sformatf("conv2d w%0d t%0d k%0d got %h exp %h", w, t, k,
                          dmem.read_word(O0 + 32'(16 * (w * T + t) + 4 * k)), e));
        end
    end

    lsu_on = 0;
    repeat (20) @(posedge clk);
    check(lsu_sent > 10 && lsu_got == lsu_sent, "LSU loads answered");
    $display("loop_start=%0d jump_back=%0d loop_end=%0d depth4=%0d issue_held=%0d",
             n_start, n_jump, n_end, n_nested, n_held);
    check(n_nested > 0, "four nested loops ran");
    $display("cycles=%0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
