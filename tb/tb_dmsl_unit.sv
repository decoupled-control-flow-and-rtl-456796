// tb_dmsl_unit: self-checking test of the issue-stage DMSL unit.
//
// Three DMSLs are bound, for each of two warps, to the operands of
// "fadd f16, f14, f15": f14 and f15 are read streams over arrays A and B,
// f16 a write stream into C, inside one loop of 6 iterations per thread.
// Memory is a two-port behavioural model reached through the port arbiter.
// An issue model offers the instruction of a random warp every cycle and
// issues it only when iss_ready is high; the bypass flags, the operand values
// (checked against A and B), the redirect of the result at writeback and, at
// the end, C = A + B in memory are checked. Instructions on unbound registers
// must be ready at once and never redirected. The number of cycles in which an
// instruction was held back for missing data is reported and must be non-zero.
module tb_dmsl_unit;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 2, R = 3, C = 4, P = 2;
  localparam int TAG_W = 1 + T * 4, MTAG_W = 2 + TAG_W;
  localparam int N = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we; logic [0:0] csr_wid; logic [7:0] csr_addr; logic [T-1:0] csr_tmask;
  logic [T-1:0][31:0] csr_wdata;
  logic [W-1:0][L-1:0] len; logic [W-1:0][L-1:0][T-1:0][30:0] bnd;
  logic [0:0] iss_wid; logic [T-1:0] iss_tm; logic [2:0] rs_used; logic [2:0][5:0] rs;
  logic rd_used; logic [5:0] rd; logic iss_rdy, rd_redir, fire; logic [2:0] byp;
  logic [2:0][T-1:0][31:0] sdata;
  logic wbv; logic [0:0] wbw; logic [5:0] wbrd; logic [T-1:0] wbm; logic [T-1:0][31:0] wbd;
  logic wb_redir;
  logic [R-1:0] qv, qrw, qg; logic [R-1:0][T-1:0] qm; logic [R-1:0][T-1:0][31:0] qa, qd;
  logic [R-1:0][T-1:0][3:0] qbe; logic [R-1:0][TAG_W-1:0] qt; logic [R-1:0][2:0] qn;
  logic [R-1:0][P-1:0] sv; logic [R-1:0][P-1:0][T-1:0] sm;
  logic [R-1:0][P-1:0][T-1:0][31:0] sd; logic [R-1:0][P-1:0][TAG_W-1:0] st;

  dmsl_unit #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L), .NUM_DMSL(R), .CREDITS(C), .NRSP(P)) dut (
    .clk, .rst_n, .csr_we_i(csr_we), .csr_wid_i(csr_wid), .csr_addr_i(csr_addr),
    .csr_tmask_i(csr_tmask), .csr_wdata_i(csr_wdata), .csr_rwid_i(csr_wid), .csr_raddr_i(raddr),
    .csr_rdata_o(rdata), .loop_en_i(len), .loop_bound_i(bnd),
    .iss_wid_i(iss_wid), .iss_tmask_i(iss_tm), .iss_rs_used_i(rs_used), .iss_rs_i(rs),
    .iss_rd_used_i(rd_used), .iss_rd_i(rd), .iss_ready_o(iss_rdy), .iss_src_bypass_o(byp),
    .iss_src_data_o(sdata), .iss_rd_redirect_o(rd_redir), .iss_fire_i(fire),
    .wb_valid_i(wbv), .wb_wid_i(wbw), .wb_rd_i(wbrd), .wb_tmask_i(wbm), .wb_data_i(wbd),
    .wb_redirect_o(wb_redir),
    .req_valid_o(qv), .req_rw_o(qrw), .req_mask_o(qm), .req_addr_o(qa), .req_data_o(qd),
    .req_byteen_o(qbe), .req_tag_o(qt), .req_need_o(qn), .grant_i(qg),
    .rsp_valid_i(sv), .rsp_mask_i(sm), .rsp_data_i(sd), .rsp_tag_i(st));

  logic [P-1:0] mv, mrw, mrdy, mrv; logic [P-1:0][T-1:0] mm, mrm; logic [P-1:0][T-1:0][31:0] ma, md, mrd;
  logic [P-1:0][T-1:0][3:0] mbe; logic [P-1:0][MTAG_W-1:0] mt, mrt;
  mem_arbiter #(.NREQ(R), .NPORTS(P), .HAS_LSU(1'b0), .NUM_THREADS(T), .TAG_W(TAG_W), .NEED_W(3)) arb (
    .req_valid_i(qv), .req_rw_i(qrw), .req_mask_i(qm), .req_addr_i(qa), .req_data_i(qd),
    .req_byteen_i(qbe), .req_tag_i(qt), .req_need_i(qn), .req_grant_o(qg),
    .lsu_valid_i(1'b0), .lsu_rw_i(1'b0), .lsu_mask_i('0), .lsu_addr_i('0), .lsu_data_i('0),
    .lsu_byteen_i('0), .lsu_tag_i('0), .lsu_ready_o(),
    .mem_valid_o(mv), .mem_rw_o(mrw), .mem_mask_o(mm), .mem_addr_o(ma), .mem_data_o(md),
    .mem_byteen_o(mbe), .mem_tag_o(mt), .mem_ready_i(mrdy),
    .mem_rsp_valid_i(mrv), .mem_rsp_mask_i(mrm), .mem_rsp_data_i(mrd), .mem_rsp_tag_i(mrt),
    .rsp_valid_o(sv), .rsp_mask_o(sm), .rsp_data_o(sd), .rsp_tag_o(st),
    .lsu_rsp_valid_o(), .lsu_rsp_mask_o(), .lsu_rsp_data_o(), .lsu_rsp_tag_o());
  mem_model #(.NPORTS(P), .NUM_THREADS(T), .MTAG_W(MTAG_W)) mem (
    .clk, .rst_n, .valid_i(mv), .rw_i(mrw), .mask_i(mm), .addr_i(ma), .data_i(md),
    .byteen_i(mbe), .tag_i(mt), .ready_o(mrdy), .rsp_valid_o(mrv), .rsp_mask_o(mrm),
    .rsp_data_o(mrd), .rsp_tag_o(mrt));

  int checks = 0, failures = 0;
  logic [7:0] raddr = 0; logic [T-1:0][31:0] rdata;
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

  task automatic wr(input int w, input int id, input int rg, input logic [T-1:0][31:0] d);
    @(negedge clk);
    csr_we = 1; csr_wid = 1'(w); csr_addr = {1'b1, 3'(id), 4'(rg)}; csr_tmask = '1; csr_wdata = d;
    @(negedge clk) csr_we = 0;
  endtask
  function automatic logic [T-1:0][31:0] splat(input logic [31:0] v);
    for (int t = 0; t < T; t++) splat[t] = v;
  endfunction
  function automatic logic [31:0] A(input int w, input int t, input int i);
    return 32'h1_0000 + 32'h1000 * w + 32'h100 * t + 4 * i;
  endfunction
  function automatic logic [31:0] B(input int w, input int t, input int i);
    return 32'h2_0000 + 32'h1000 * w + 32'h100 * t + 4 * i;
  endfunction
  function automatic logic [31:0] Cadr(input int w, input int t, input int i);
    return 32'h3_0000 + 32'h1000 * w + 32'h100 * t + 4 * i;
  endfunction

  // writeback pipeline of 3 cycles
  typedef struct { int w; logic [T-1:0][31:0] d; int due; } wb_t;
  wb_t wbq[$];
  int cyc = 0, held = 0, plain = 0;
  int it[W];

  initial begin
    logic [T-1:0][31:0] d;
    csr_we = 0; csr_wid = 0; csr_addr = 0; csr_tmask = 0; csr_wdata = '0;
    iss_wid = 0; iss_tm = '1; rs_used = 0; rs = '0; rd_used = 0; rd = 0; fire = 0;
    wbv = 0; wbw = 0; wbrd = 0; wbm = '1; wbd = '0;
    len = '0; bnd = '0;
    for (int w = 0; w < W; w++) begin
      len[w][0] = 1;
      for (int t = 0; t < T; t++) bnd[w][0][t] = N;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < W; w++) begin
      for (int t = 0; t < T; t++) d[t] = A(w, t, 0);
      wr(w, 0, 0, d); wr(w, 0, 5, splat(4)); wr(w, 0, 1, splat(32'h0000_0C2E)); // f14 read
      for (int t = 0; t < T; t++) d[t] = B(w, t, 0);
      wr(w, 1, 0, d); wr(w, 1, 5, splat(4)); wr(w, 1, 1, splat(32'h0000_0C2F)); // f15 read
      for (int t = 0; t < T; t++) d[t] = Cadr(w, t, 0);
      wr(w, 2, 0, d); wr(w, 2, 5, splat(4)); wr(w, 2, 1, splat(32'h0000_1C30)); // f16 write
      csr_wid = 1'(w); raddr = 8'hA1; #1 check(rdata == splat(32'h0000_1C30), "DMSL 2 configuration readback");
      raddr = 8'h95; #1 check(rdata == splat(4), "DMSL 1 stride readback");
      it[w] = 0;
    end
    while ((it[0] < N || it[1] < N || wbq.size() > 0) && cyc < 3000) begin
      int w;
      @(negedge clk);
      cyc++;
      // writeback
      wbv = 0;
      if (wbq.size() > 0 && wbq[0].due <= cyc) begin
        wbv = 1; wbw = 1'(wbq[0].w); wbrd = 6'h30; wbd = wbq[0].d;
        void'(wbq.pop_front());
      end
      // every fourth cycle an instruction on plain registers x5 = x6 + x7
      w = $urandom_range(0, W - 1);
      if (it[w] >= N) w = 1 - w;
      iss_wid = 1'(w); iss_tm = '1;
      if (cyc % 4 == 0 || it[w] >= N) begin
        rs_used = 3'b011; rs[0] = 6'h06; rs[1] = 6'h07; rd_used = 1; rd = 6'h05;
        #1;
        check(iss_rdy && byp == 0 && !rd_redir, "plain instruction ready, no bypass");
        plain++;
      end else begin
        rs_used = 3'b011; rs[0] = 6'h2E; rs[1] = 6'h2F; rd_used = 1; rd = 6'h30;
        #1;
        check(byp == 3'b011 && rd_redir, "stream operands bypass the RF");
        if (iss_rdy) begin
          logic [T-1:0][31:0] r;
          for (int t = 0; t < T; t++) begin
            check(sdata[0][t] == mem.init_word(A(w, t, it[w])), "operand A");
            check(sdata[1][t] == mem.init_word(B(w, t, it[w])), "operand B");
            r[t] = sdata[0][t] + sdata[1][t];
          end
          fire = 1;
          wbq.push_back('{w, r, cyc + 3});
          it[w]++;
        end else held++;
      end
      if (wbv) #1 check(wb_redir, "result goes to the write stream");
      @(posedge clk);
      #1 fire = 0; wbv = 0;
    end
    // plain writeback is not redirected
    @(negedge clk); wbv = 1; wbrd = 6'h05; #1 check(!wb_redir, "plain result to the RF");
    @(posedge clk); #1 wbv = 0;
    repeat (50) @(posedge clk);
    for (int w = 0; w < W; w++)
      for (int t = 0; t < T; t++)
        for (int i = 0; i < N; i++)
          check(mem.read_word(Cadr(w, t, i)) ==
                mem.init_word(A(w, t, i)) + mem.init_word(B(w, t, i)), "C = A + B");
    check(held > 0, "an instruction waited for stream data");
    $display("held=%0d plain=%0d cycles=%0d", held, plain, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
