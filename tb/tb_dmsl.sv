// tb_dmsl: self-checking test of one DMSL against a behavioural memory.
//
// Warp 0 is a 32-bit read stream inside one hardware loop whose per-thread
// bounds are 3, 5, 2, 4 (stride 4, per-thread bases 0x1000 + 0x100*t). The
// issue side consumes one element per iteration with the thread mask of that
// iteration and checks each value against the memory's initial contents; the
// lane must not run past the bound of its thread. Warp 1 is a write stream of
// 3 iterations (stride 8, bases 0x8000 + 0x40*t): results are reserved at
// issue and written back later, and the memory must hold them at the end. The
// request is sent on a random one of two memory ports; the reported need must
// equal the free credits (read) or filled credits (write) of the lowest
// requesting lane.
module tb_dmsl;
  import ext_pkg::*;
  localparam int W = 2, T = 4, L = 2, C = 4, NR = 2;
  localparam int TAG_W = 1 + T * 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic csr_we; logic [0:0] csr_wid; logic [3:0] csr_reg; logic [T-1:0] csr_tmask;
  logic [T-1:0][31:0] csr_wdata; dmsl_cfg_t [W-1:0] cfg;
  logic [W-1:0][L-1:0] len; logic [W-1:0][L-1:0][T-1:0][30:0] bnd;
  logic rq_v, rq_rw, grant; logic [T-1:0] rq_m; logic [T-1:0][31:0] rq_a, rq_d;
  logic [T-1:0][3:0] rq_be; logic [TAG_W-1:0] rq_tag; logic [2:0] rq_need;
  logic [NR-1:0] rs_v; logic [NR-1:0][T-1:0] rs_m; logic [NR-1:0][T-1:0][31:0] rs_d;
  logic [NR-1:0][TAG_W-1:0] rs_t;
  logic [0:0] iss_wid; logic [T-1:0] iss_tm; logic rd_rdy, wr_rdy, pop, rsv;
  logic [T-1:0][31:0] iss_d;
  logic wbv; logic [0:0] wbw; logic [T-1:0] wbm; logic [T-1:0][31:0] wbd;
  logic [0:0] rwid = 0; logic [3:0] rreg = 0; logic [T-1:0][31:0] rdata;

  dmsl #(.NUM_WARPS(W), .NUM_THREADS(T), .NUM_LOOPS(L), .CREDITS(C), .NRSP(NR)) dut (
    .clk, .rst_n, .csr_we_i(csr_we), .csr_wid_i(csr_wid), .csr_reg_i(csr_reg),
    .csr_tmask_i(csr_tmask), .csr_wdata_i(csr_wdata), .cfg_o(cfg),
    .csr_rwid_i(rwid), .csr_rreg_i(rreg), .csr_rdata_o(rdata), .loop_en_i(len),
    .loop_bound_i(bnd), .req_valid_o(rq_v), .req_rw_o(rq_rw), .req_mask_o(rq_m),
    .req_addr_o(rq_a), .req_data_o(rq_d), .req_byteen_o(rq_be), .req_tag_o(rq_tag),
    .req_need_o(rq_need), .grant_i(grant), .rsp_valid_i(rs_v), .rsp_mask_i(rs_m),
    .rsp_data_i(rs_d), .rsp_tag_i(rs_t), .iss_wid_i(iss_wid), .iss_tmask_i(iss_tm),
    .iss_rd_ready_o(rd_rdy), .iss_wr_ready_o(wr_rdy), .iss_data_o(iss_d), .iss_pop_i(pop),
    .iss_rsv_i(rsv), .wb_valid_i(wbv), .wb_wid_i(wbw), .wb_tmask_i(wbm), .wb_data_i(wbd));

  // memory: the request goes to one port picked at random
  logic [NR-1:0] m_v, m_rdy; int port;
  always_comb begin
    m_v = '0;
    m_v[port] = rq_v;
    grant = rq_v && m_rdy[port];
  end
  mem_model #(.NPORTS(NR), .NUM_THREADS(T), .MTAG_W(TAG_W)) mem (
    .clk, .rst_n, .valid_i(m_v), .rw_i({NR{rq_rw}}), .mask_i({NR{rq_m}}), .addr_i({NR{rq_a}}),
    .data_i({NR{rq_d}}), .byteen_i({NR{rq_be}}), .tag_i({NR{rq_tag}}), .ready_o(m_rdy),
    .rsp_valid_o(rs_v), .rsp_mask_o(rs_m), .rsp_data_o(rs_d), .rsp_tag_o(rs_t));
  always @(negedge clk) port = $urandom_range(0, NR - 1);

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

  task automatic wr(input int w, input int rg, input logic [T-1:0][31:0] d);
    @(negedge clk);
    csr_we = 1; csr_wid = 1'(w); csr_reg = 4'(rg); csr_tmask = '1; csr_wdata = d;
    @(negedge clk) csr_we = 0;
  endtask
  function automatic logic [T-1:0][31:0] splat(input logic [31:0] v);
    for (int t = 0; t < T; t++) splat[t] = v;
  endfunction

  // lane state seen through the hierarchy
  logic [T-1:0][2:0] l_used, l_nvalid, l_used0; logic [T-1:0] l_done0;
  for (genvar t = 0; t < T; t++) begin : g_peek
    assign l_used[t]   = dut.g_lane[t].u_lane.f_used[dut.sel_wid];
    assign l_nvalid[t] = dut.g_lane[t].u_lane.f_nvalid[dut.sel_wid];
    assign l_used0[t]  = dut.g_lane[t].u_lane.f_used[0];
    assign l_done0[t]  = dut.g_lane[t].u_lane.done_q[0];
  end

  // need check, sampled every cycle
  always @(negedge clk) if (rst_n && rq_v) begin
    int lo; lo = -1;
    #2;
    for (int t = T - 1; t >= 0; t--) if (rq_m[t]) lo = t;
    if (lo >= 0) begin
      logic [2:0] e;
      e = rq_rw ? l_nvalid[lo] : 3'(C) - l_used[lo];
      check(rq_need == e, "need reported");
    end
  end

  int b0[T] = '{3, 5, 2, 4};
  initial begin
    logic [T-1:0][31:0] d;
    csr_we = 0; csr_wid = 0; csr_reg = 0; csr_tmask = 0; csr_wdata = '0; len = '0; bnd = '0;
    iss_wid = 0; iss_tm = 0; pop = 0; rsv = 0; wbv = 0; wbw = 0; wbm = 0; wbd = '0; port = 0;
    len[0][0] = 1; len[1][0] = 1;
    for (int t = 0; t < T; t++) begin bnd[0][0][t] = 31'(b0[t]); bnd[1][0][t] = 3; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    // warp 0: read stream on integer register x6
    for (int t = 0; t < T; t++) d[t] = 32'h1000 + 32'h100 * t;
    wr(0, 0, d);
    wr(0, 5, splat(4));
    wr(0, 1, splat(32'h0000_0C06));  // redirect, prefetch, 32-bit INT, x6, read
    // warp 1: write stream on f7
    for (int t = 0; t < T; t++) d[t] = 32'h8000 + 32'h40 * t;
    wr(1, 0, d);
    wr(1, 5, splat(8));
    wr(1, 1, splat(32'h0000_1C27));  // write, redirect, prefetch, FP, f7
    check(cfg[1].dir == DIR_WRITE && cfg[1].rfreg == 7 && cfg[1].fpint == 1, "config fields");
    // register readback
    rwid = 1; rreg = 1; #1 check(rdata == splat(32'h1C27), "configuration readback");
    rreg = 5; #1 check(rdata == splat(8), "stride readback");
    rwid = 0; #1 check(rdata == splat(4), "stride readback, warp 0");
    fork
      // ---- read consumer (warp 0 issue slots on even cycles)
      begin
        for (int i = 0; i < 5; i++) begin
          logic [T-1:0] m; int waited;
          for (int t = 0; t < T; t++) m[t] = i < b0[t];
          waited = 0;
          forever begin
            @(negedge clk);
            iss_wid = 0; iss_tm = m;
            #1;
            if (rd_rdy) break;
            waited++;
          end
          for (int t = 0; t < T; t++)
            if (m[t]) check(iss_d[t] == mem.init_word(32'h1000 + 32'h100 * t + 4 * i),
                            $sformatf("iter %0d thread %0d data %h", i, t, iss_d[t]));
          pop = 1;
          @(posedge clk); #1 pop = 0;
        end
      end
    join
    // ---- write producer (warp 1)
    for (int i = 0; i < 3; i++) begin
      @(negedge clk);
      iss_wid = 1; iss_tm = '1;
      #1 check(wr_rdy, "room for results");
      rsv = 1;
      @(posedge clk); #1 rsv = 0;
      @(negedge clk);
      wbv = 1; wbw = 1; wbm = '1;
      for (int t = 0; t < T; t++) wbd[t] = 32'hC0DE_0000 + 32'(16 * i + t);
      @(posedge clk); #1 wbv = 0;
    end
    repeat (60) @(posedge clk);
    for (int i = 0; i < 3; i++)
      for (int t = 0; t < T; t++)
        check(mem.read_word(32'h8000 + 32'h40 * t + 8 * i) == 32'hC0DE_0000 + 32'(16 * i + t),
              $sformatf("stored value iter %0d thread %0d", i, t));
    // the read lanes stopped at their bounds: all FIFOs of warp 0 empty now
    for (int t = 0; t < T; t++) begin
      check(l_used0[t] == 0, "read lane drained");
      check(l_done0[t], "read lane finished");
    end
    check(!rq_v, "no request once both streams are done");
    // pointers stop on the last element of each thread
    rwid = 0; rreg = 0; #1;
    for (int t = 0; t < T; t++)
      check(rdata[t] == 32'h1000 + 32'h100 * t + 32'(4 * (b0[t] - 1)), "read pointer readback");
    rwid = 1; #1;
    for (int t = 0; t < T; t++) check(rdata[t] == 32'h8000 + 32'h40 * t + 16, "write pointer readback");
    check(mem.writes == 3 && mem.reads > 0, "three stores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
