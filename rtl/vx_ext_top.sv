// vx_ext_top: decoupled control flow and data access extensions of one SIMT
// core: the Control Flow Manager (hardware loops plus loop predication stack)
// at the fetch stage, the decoupled memory streaming lanes (DMSLs) at the
// issue stage, and the port arbiters that let the DMSLs reach the multi-port
// L1 data cache and the shared memory next to the load/store unit.
//
// The baseline core pipeline, the caches and the shared memory are outside this
// module; every signal that joins them is a port:
//   fetch_*   the warp picked by the wavefront scheduler, its PC, the baseline
//             next PC and the divergence-stack thread mask; next_pc_o and
//             dec_tmask_o replace them on the way to decode.
//   csr_*     writes from the CSR unit to the reserved extension CSRs
//             (8-bit address: [7] unit type 0 = CFM, 1 = DMSL; [6:4] loop
//             level or DMSL index; [3:0] register), and register reads.
//   iss_*     operand check and RF bypass for the instruction about to issue.
//   wb_*      results routed to write streams instead of the register file.
//   lsu_*     the load/store unit's memory path, which keeps priority on
//             data-cache port 0 (and on the shared memory).
//   dc_*      NUM_DPORTS data-cache ports, sm_* one shared-memory port.
// A request goes to the shared memory when its first active address lies in
// [SMEM_BASE, SMEM_BASE + SMEM_SIZE), otherwise to the data cache; both
// memories answer with the tag they received, on the port that took the
// request, in any order.
//
// Default sizes follow the main configuration of the design: 8 warps of 16
// threads, 3 DMSLs with 16 credits per warp and thread, 3 data-cache ports.
// The nesting depth of 4 loops and the shared-memory window are this design's
// choice.
module vx_ext_top
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 8,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned NUM_LOOPS   = 4,
  parameter int unsigned NUM_DMSL    = 3,
  parameter int unsigned NUM_DPORTS  = 3,
  parameter int unsigned CREDITS     = 16,
  parameter logic [31:0] SMEM_BASE   = 32'hFF00_0000,
  parameter logic [31:0] SMEM_SIZE   = 32'h0000_4000,
  localparam int unsigned WID_W  = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned LVL_W  = $clog2(NUM_LOOPS + 1),
  localparam int unsigned IW     = $clog2(CREDITS),
  localparam int unsigned CW     = $clog2(CREDITS + 1),
  localparam int unsigned NRSP   = NUM_DPORTS + 1,
  localparam int unsigned TAG_W  = WID_W + NUM_THREADS * (IW + 2),
  localparam int unsigned MTAG_W = $clog2(NUM_DMSL + 1) + TAG_W
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // fetch stage
  input  logic                                   fetch_valid_i,
  input  logic [WID_W-1:0]                       fetch_wid_i,
  input  logic [31:0]                            fetch_pc_i,
  input  logic [31:0]                            base_next_pc_i,
  input  logic [NUM_THREADS-1:0]                 fetch_tmask_i,
  output logic [31:0]                            next_pc_o,
  output logic [NUM_THREADS-1:0]                 dec_tmask_o,
  output logic                                   hw_active_o,
  output logic                                   loop_jump_o,
  output logic                                   loop_start_o,
  output logic                                   loop_end_o,
  output logic [LVL_W-1:0]                       loop_depth_o,
  // CSR unit
  input  logic                                   csr_we_i,
  input  logic [WID_W-1:0]                       csr_wid_i,
  input  logic [7:0]                             csr_addr_i,
  input  logic [NUM_THREADS-1:0]                 csr_tmask_i,
  input  logic [NUM_THREADS-1:0][31:0]           csr_wdata_i,
  input  logic [WID_W-1:0]                       csr_rwid_i,
  input  logic [7:0]                             csr_raddr_i,
  output logic [NUM_THREADS-1:0][31:0]           csr_rdata_o,
  // issue stage
  input  logic [WID_W-1:0]                       iss_wid_i,
  input  logic [NUM_THREADS-1:0]                 iss_tmask_i,
  input  logic [2:0]                             iss_rs_used_i,
  input  logic [2:0][5:0]                        iss_rs_i,
  input  logic                                   iss_rd_used_i,
  input  logic [5:0]                             iss_rd_i,
  output logic                                   iss_ready_o,
  output logic [2:0]                             iss_src_bypass_o,
  output logic [2:0][NUM_THREADS-1:0][31:0]      iss_src_data_o,
  output logic                                   iss_rd_redirect_o,
  input  logic                                   iss_fire_i,
  // writeback
  input  logic                                   wb_valid_i,
  input  logic [WID_W-1:0]                       wb_wid_i,
  input  logic [5:0]                             wb_rd_i,
  input  logic [NUM_THREADS-1:0]                 wb_tmask_i,
  input  logic [NUM_THREADS-1:0][31:0]           wb_data_i,
  output logic                                   wb_redirect_o,
  // load/store unit
  input  logic                                   lsu_valid_i,
  input  logic                                   lsu_rw_i,
  input  logic [NUM_THREADS-1:0]                 lsu_mask_i,
  input  logic [NUM_THREADS-1:0][31:0]           lsu_addr_i,
  input  logic [NUM_THREADS-1:0][31:0]           lsu_data_i,
  input  logic [NUM_THREADS-1:0][3:0]            lsu_byteen_i,
  input  logic [TAG_W-1:0]                       lsu_tag_i,
  output logic                                   lsu_ready_o,
  output logic                                   lsu_rsp_valid_o,
  output logic [NUM_THREADS-1:0]                 lsu_rsp_mask_o,
  output logic [NUM_THREADS-1:0][31:0]           lsu_rsp_data_o,
  output logic [TAG_W-1:0]                       lsu_rsp_tag_o,
  // multi-port L1 data cache
  output logic [NUM_DPORTS-1:0]                  dc_valid_o,
  output logic [NUM_DPORTS-1:0]                  dc_rw_o,
  output logic [NUM_DPORTS-1:0][NUM_THREADS-1:0] dc_mask_o,
  output logic [NUM_DPORTS-1:0][NUM_THREADS-1:0][31:0] dc_addr_o,
  output logic [NUM_DPORTS-1:0][NUM_THREADS-1:0][31:0] dc_data_o,
  output logic [NUM_DPORTS-1:0][NUM_THREADS-1:0][3:0]  dc_byteen_o,
  output logic [NUM_DPORTS-1:0][MTAG_W-1:0]      dc_tag_o,
  input  logic [NUM_DPORTS-1:0]                  dc_ready_i,
  input  logic [NUM_DPORTS-1:0]                  dc_rsp_valid_i,
  input  logic [NUM_DPORTS-1:0][NUM_THREADS-1:0] dc_rsp_mask_i,
  input  logic [NUM_DPORTS-1:0][NUM_THREADS-1:0][31:0] dc_rsp_data_i,
  input  logic [NUM_DPORTS-1:0][MTAG_W-1:0]      dc_rsp_tag_i,
  // shared memory
  output logic                                   sm_valid_o,
  output logic                                   sm_rw_o,
  output logic [NUM_THREADS-1:0]                 sm_mask_o,
  output logic [NUM_THREADS-1:0][31:0]           sm_addr_o,
  output logic [NUM_THREADS-1:0][31:0]           sm_data_o,
  output logic [NUM_THREADS-1:0][3:0]            sm_byteen_o,
  output logic [MTAG_W-1:0]                      sm_tag_o,
  input  logic                                   sm_ready_i,
  input  logic                                   sm_rsp_valid_i,
  input  logic [NUM_THREADS-1:0]                 sm_rsp_mask_i,
  input  logic [NUM_THREADS-1:0][31:0]           sm_rsp_data_i,
  input  logic [MTAG_W-1:0]                      sm_rsp_tag_i
);

  // ---------------------------------------------------------------- CSR decode
  logic csr_cfm_we, csr_dmsl_we;
  logic [NUM_THREADS-1:0][31:0] cfm_rdata, dmsl_rdata;
  assign csr_cfm_we  = csr_we_i && (csr_unit(csr_addr_i) == CSR_UNIT_CFM);
  assign csr_dmsl_we = csr_we_i && (csr_unit(csr_addr_i) == CSR_UNIT_DMSL);
  assign csr_rdata_o = (csr_unit(csr_raddr_i) == CSR_UNIT_CFM) ? cfm_rdata : dmsl_rdata;

  // ---------------------------------------------------------------- CFM
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                        loop_en;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] loop_bound;

  cfm #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LOOPS(NUM_LOOPS)
  ) u_cfm (
    .clk, .rst_n,
    .fetch_valid_i, .fetch_wid_i, .fetch_pc_i, .base_next_pc_i, .fetch_tmask_i,
    .next_pc_o, .dec_tmask_o, .hw_active_o, .loop_jump_o, .loop_start_o, .loop_end_o,
    .depth_o(loop_depth_o),
    .csr_we_i(csr_cfm_we), .csr_wid_i, .csr_addr_i, .csr_tmask_i, .csr_wdata_i,
    .csr_rwid_i, .csr_raddr_i, .csr_rdata_o(cfm_rdata),
    .loop_en_o(loop_en), .loop_bound_o(loop_bound)
  );

  // ---------------------------------------------------------------- DMSLs
  logic [NUM_DMSL-1:0]                                  rq_valid, rq_rw, grant;
  logic [NUM_DMSL-1:0][NUM_THREADS-1:0]                 rq_mask;
  logic [NUM_DMSL-1:0][NUM_THREADS-1:0][31:0]           rq_addr, rq_data;
  logic [NUM_DMSL-1:0][NUM_THREADS-1:0][3:0]            rq_byteen;
  logic [NUM_DMSL-1:0][TAG_W-1:0]                       rq_tag;
  logic [NUM_DMSL-1:0][CW-1:0]                          rq_need;
  logic [NUM_DMSL-1:0][NRSP-1:0]                        rs_valid;
  logic [NUM_DMSL-1:0][NRSP-1:0][NUM_THREADS-1:0]       rs_mask;
  logic [NUM_DMSL-1:0][NRSP-1:0][NUM_THREADS-1:0][31:0] rs_data;
  logic [NUM_DMSL-1:0][NRSP-1:0][TAG_W-1:0]             rs_tag;

  dmsl_unit #(
    .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LOOPS(NUM_LOOPS),
    .NUM_DMSL(NUM_DMSL), .CREDITS(CREDITS), .NRSP(NRSP)
  ) u_dmsl_unit (
    .clk, .rst_n,
    .csr_we_i(csr_dmsl_we), .csr_wid_i, .csr_addr_i, .csr_tmask_i, .csr_wdata_i,
    .csr_rwid_i, .csr_raddr_i, .csr_rdata_o(dmsl_rdata),
    .loop_en_i(loop_en), .loop_bound_i(loop_bound),
    .iss_wid_i, .iss_tmask_i, .iss_rs_used_i, .iss_rs_i, .iss_rd_used_i, .iss_rd_i,
    .iss_ready_o, .iss_src_bypass_o, .iss_src_data_o, .iss_rd_redirect_o, .iss_fire_i,
    .wb_valid_i, .wb_wid_i, .wb_rd_i, .wb_tmask_i, .wb_data_i, .wb_redirect_o,
    .req_valid_o(rq_valid), .req_rw_o(rq_rw), .req_mask_o(rq_mask), .req_addr_o(rq_addr),
    .req_data_o(rq_data), .req_byteen_o(rq_byteen), .req_tag_o(rq_tag), .req_need_o(rq_need),
    .grant_i(grant),
    .rsp_valid_i(rs_valid), .rsp_mask_i(rs_mask), .rsp_data_i(rs_data), .rsp_tag_i(rs_tag)
  );

  // ---------------------------------------------------------------- routing
  function automatic logic in_smem(input logic [NUM_THREADS-1:0] m,
                                   input logic [NUM_THREADS-1:0][31:0] a);
    logic [31:0] first;
    first = a[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--) if (m[t]) first = a[t];
    return (first >= SMEM_BASE) && ((first - SMEM_BASE) < SMEM_SIZE);
  endfunction

  logic [NUM_DMSL-1:0] to_sm, dc_grant, sm_grant;
  logic                lsu_to_sm, lsu_dc_ready, lsu_sm_ready;
  always_comb begin
    for (int j = 0; j < NUM_DMSL; j++) to_sm[j] = in_smem(rq_mask[j], rq_addr[j]);
  end
  assign lsu_to_sm   = in_smem(lsu_mask_i, lsu_addr_i);
  assign grant       = dc_grant | sm_grant;
  assign lsu_ready_o = lsu_to_sm ? lsu_sm_ready : lsu_dc_ready;

  logic                                     dc_lsu_rv, sm_lsu_rv;
  logic [NUM_THREADS-1:0]                   dc_lsu_rm, sm_lsu_rm;
  logic [NUM_THREADS-1:0][31:0]             dc_lsu_rd, sm_lsu_rd;
  logic [TAG_W-1:0]                         dc_lsu_rt, sm_lsu_rt;
  logic [NUM_DMSL-1:0][NUM_DPORTS-1:0]                        dc_rv;
  logic [NUM_DMSL-1:0][NUM_DPORTS-1:0][NUM_THREADS-1:0]       dc_rm;
  logic [NUM_DMSL-1:0][NUM_DPORTS-1:0][NUM_THREADS-1:0][31:0] dc_rd;
  logic [NUM_DMSL-1:0][NUM_DPORTS-1:0][TAG_W-1:0]             dc_rt;
  logic [NUM_DMSL-1:0][0:0]                                   sm_rv;
  logic [NUM_DMSL-1:0][0:0][NUM_THREADS-1:0]                  sm_rm;
  logic [NUM_DMSL-1:0][0:0][NUM_THREADS-1:0][31:0]            sm_rd;
  logic [NUM_DMSL-1:0][0:0][TAG_W-1:0]                        sm_rt;

  mem_arbiter #(
    .NREQ(NUM_DMSL), .NPORTS(NUM_DPORTS), .HAS_LSU(1'b1), .NUM_THREADS(NUM_THREADS),
    .TAG_W(TAG_W), .NEED_W(CW)
  ) u_dc_arb (
    .req_valid_i(rq_valid & ~to_sm), .req_rw_i(rq_rw), .req_mask_i(rq_mask),
    .req_addr_i(rq_addr), .req_data_i(rq_data), .req_byteen_i(rq_byteen),
    .req_tag_i(rq_tag), .req_need_i(rq_need), .req_grant_o(dc_grant),
    .lsu_valid_i(lsu_valid_i && !lsu_to_sm), .lsu_rw_i, .lsu_mask_i, .lsu_addr_i,
    .lsu_data_i, .lsu_byteen_i, .lsu_tag_i, .lsu_ready_o(lsu_dc_ready),
    .mem_valid_o(dc_valid_o), .mem_rw_o(dc_rw_o), .mem_mask_o(dc_mask_o),
    .mem_addr_o(dc_addr_o), .mem_data_o(dc_data_o), .mem_byteen_o(dc_byteen_o),
    .mem_tag_o(dc_tag_o), .mem_ready_i(dc_ready_i),
    .mem_rsp_valid_i(dc_rsp_valid_i), .mem_rsp_mask_i(dc_rsp_mask_i),
    .mem_rsp_data_i(dc_rsp_data_i), .mem_rsp_tag_i(dc_rsp_tag_i),
    .rsp_valid_o(dc_rv), .rsp_mask_o(dc_rm), .rsp_data_o(dc_rd), .rsp_tag_o(dc_rt),
    .lsu_rsp_valid_o(dc_lsu_rv), .lsu_rsp_mask_o(dc_lsu_rm), .lsu_rsp_data_o(dc_lsu_rd),
    .lsu_rsp_tag_o(dc_lsu_rt)
  );

  mem_arbiter #(
    .NREQ(NUM_DMSL), .NPORTS(1), .HAS_LSU(1'b1), .NUM_THREADS(NUM_THREADS),
    .TAG_W(TAG_W), .NEED_W(CW)
  ) u_sm_arb (
    .req_valid_i(rq_valid & to_sm), .req_rw_i(rq_rw), .req_mask_i(rq_mask),
    .req_addr_i(rq_addr), .req_data_i(rq_data), .req_byteen_i(rq_byteen),
    .req_tag_i(rq_tag), .req_need_i(rq_need), .req_grant_o(sm_grant),
    .lsu_valid_i(lsu_valid_i && lsu_to_sm), .lsu_rw_i, .lsu_mask_i, .lsu_addr_i,
    .lsu_data_i, .lsu_byteen_i, .lsu_tag_i, .lsu_ready_o(lsu_sm_ready),
    .mem_valid_o(sm_valid_o), .mem_rw_o(sm_rw_o), .mem_mask_o(sm_mask_o),
    .mem_addr_o(sm_addr_o), .mem_data_o(sm_data_o), .mem_byteen_o(sm_byteen_o),
    .mem_tag_o(sm_tag_o), .mem_ready_i(sm_ready_i),
    .mem_rsp_valid_i(sm_rsp_valid_i), .mem_rsp_mask_i(sm_rsp_mask_i),
    .mem_rsp_data_i(sm_rsp_data_i), .mem_rsp_tag_i(sm_rsp_tag_i),
    .rsp_valid_o(sm_rv), .rsp_mask_o(sm_rm), .rsp_data_o(sm_rd), .rsp_tag_o(sm_rt),
    .lsu_rsp_valid_o(sm_lsu_rv), .lsu_rsp_mask_o(sm_lsu_rm), .lsu_rsp_data_o(sm_lsu_rd),
    .lsu_rsp_tag_o(sm_lsu_rt)
  );

  always_comb begin
    for (int j = 0; j < NUM_DMSL; j++) begin
      for (int p = 0; p < NUM_DPORTS; p++) begin
        rs_valid[j][p] = dc_rv[j][p];
        rs_mask[j][p]  = dc_rm[j][p];
        rs_data[j][p]  = dc_rd[j][p];
        rs_tag[j][p]   = dc_rt[j][p];
      end
      rs_valid[j][NUM_DPORTS] = sm_rv[j][0];
      rs_mask[j][NUM_DPORTS]  = sm_rm[j][0];
      rs_data[j][NUM_DPORTS]  = sm_rd[j][0];
      rs_tag[j][NUM_DPORTS]   = sm_rt[j][0];
    end
    lsu_rsp_valid_o = dc_lsu_rv || sm_lsu_rv;
    lsu_rsp_mask_o  = dc_lsu_rv ? dc_lsu_rm : sm_lsu_rm;
    lsu_rsp_data_o  = dc_lsu_rv ? dc_lsu_rd : sm_lsu_rd;
    lsu_rsp_tag_o   = dc_lsu_rv ? dc_lsu_rt : sm_lsu_rt;
  end

  // the two memories never answer the LSU in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(dc_lsu_rv && sm_lsu_rv));

endmodule
