// dmsl_unit: the NUM_DMSL streaming lane sets and their issue-stage hooks.
//
// Before an instruction of a warp issues, its source and destination register
// identifiers ({FP flag, register index}) are compared with the register each
// DMSL is bound to for that warp (only DMSLs with redirect enabled take part).
// A source bound to a read stream is served from the stream instead of the
// register file and needs data in every active thread's FIFO; a destination
// bound to a write stream needs a free credit in every active thread's FIFO.
// iss_ready_o is low while any of these is missing, so the scheduler keeps the
// instruction back and may issue another warp; this is the same back-pressure as
// a register hazard in the scoreboard. When the instruction issues
// (iss_fire_i), the read streams pop their heads, whose values are on
// iss_src_data_o, and the write streams reserve a slot. At writeback, a result
// whose destination is bound to a write stream goes into that stream
// (wb_redirect_o tells the register file not to write it).
//
// CSR writes of unit type DMSL are steered to the DMSL named by the unit ID.
// Memory requests and responses of every DMSL are exposed for the port
// arbiters.
//
// Timing: the issue check and the writeback steering are combinational; FIFO
// updates happen at the clock edge. From the paper: operand-to-DMSL mapping by
// RF register, data check for all threads of the scheduled warp, RF bypass for
// operands and results. A register bound to two DMSLs uses the lower-numbered.
module dmsl_unit
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 8,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned NUM_LOOPS   = 4,
  parameter int unsigned NUM_DMSL    = 3,
  parameter int unsigned CREDITS     = 16,
  parameter int unsigned NRSP        = 4,
  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned IW    = $clog2(CREDITS),
  localparam int unsigned CW    = $clog2(CREDITS + 1),
  localparam int unsigned TAG_W = WID_W + NUM_THREADS * (IW + 2),
  localparam int unsigned NSRC  = 3
) (
  input  logic                                    clk,
  input  logic                                    rst_n,
  // CSR write (unit type DMSL already decoded)
  input  logic                                    csr_we_i,
  input  logic [WID_W-1:0]                        csr_wid_i,
  input  logic [CSR_ADDR_W-1:0]                   csr_addr_i,
  input  logic [NUM_THREADS-1:0]                  csr_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]        csr_wdata_i,
  // CSR read of the DMSL named by the address's unit ID
  input  logic [WID_W-1:0]                        csr_rwid_i,
  input  logic [CSR_ADDR_W-1:0]                   csr_raddr_i,
  output logic [NUM_THREADS-1:0][XLEN-1:0]        csr_rdata_o,
  // loop nest from the CFM
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                        loop_en_i,
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] loop_bound_i,
  // issue stage
  input  logic [WID_W-1:0]                        iss_wid_i,
  input  logic [NUM_THREADS-1:0]                  iss_tmask_i,
  input  logic [NSRC-1:0]                         iss_rs_used_i,
  input  logic [NSRC-1:0][RID_W-1:0]              iss_rs_i,
  input  logic                                    iss_rd_used_i,
  input  logic [RID_W-1:0]                        iss_rd_i,
  output logic                                    iss_ready_o,
  output logic [NSRC-1:0]                         iss_src_bypass_o,
  output logic [NSRC-1:0][NUM_THREADS-1:0][XLEN-1:0] iss_src_data_o,
  output logic                                    iss_rd_redirect_o,
  input  logic                                    iss_fire_i,
  // writeback
  input  logic                                    wb_valid_i,
  input  logic [WID_W-1:0]                        wb_wid_i,
  input  logic [RID_W-1:0]                        wb_rd_i,
  input  logic [NUM_THREADS-1:0]                  wb_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]        wb_data_i,
  output logic                                    wb_redirect_o,
  // memory side, one request per DMSL
  output logic [NUM_DMSL-1:0]                     req_valid_o,
  output logic [NUM_DMSL-1:0]                     req_rw_o,
  output logic [NUM_DMSL-1:0][NUM_THREADS-1:0]    req_mask_o,
  output logic [NUM_DMSL-1:0][NUM_THREADS-1:0][XLEN-1:0] req_addr_o,
  output logic [NUM_DMSL-1:0][NUM_THREADS-1:0][XLEN-1:0] req_data_o,
  output logic [NUM_DMSL-1:0][NUM_THREADS-1:0][3:0]      req_byteen_o,
  output logic [NUM_DMSL-1:0][TAG_W-1:0]          req_tag_o,
  output logic [NUM_DMSL-1:0][CW-1:0]             req_need_o,
  input  logic [NUM_DMSL-1:0]                     grant_i,
  input  logic [NUM_DMSL-1:0][NRSP-1:0]           rsp_valid_i,
  input  logic [NUM_DMSL-1:0][NRSP-1:0][NUM_THREADS-1:0] rsp_mask_i,
  input  logic [NUM_DMSL-1:0][NRSP-1:0][NUM_THREADS-1:0][XLEN-1:0] rsp_data_i,
  input  logic [NUM_DMSL-1:0][NRSP-1:0][TAG_W-1:0] rsp_tag_i
);

  dmsl_cfg_t [NUM_DMSL-1:0][NUM_WARPS-1:0]        cfg;
  logic [NUM_DMSL-1:0]                            rd_ready, wr_ready;
  logic [NUM_DMSL-1:0][NUM_THREADS-1:0][XLEN-1:0] dm_data;
  logic [NUM_DMSL-1:0]                            pop, rsv, wb_sel;

  // ---------------------------------------------------------------- mapping
  logic [NUM_DMSL-1:0][NUM_THREADS-1:0][XLEN-1:0] dmsl_rdata;
  always_comb begin
    csr_rdata_o = '0;
    for (int j = 0; j < NUM_DMSL; j++)
      if (32'(csr_id(csr_raddr_i)) == j) csr_rdata_o = dmsl_rdata[j];
  end

  function automatic logic [RID_W-1:0] rid_of(input dmsl_cfg_t c);
    return {c.fpint[0], c.rfreg};
  endfunction

  logic [NSRC-1:0]                         src_hit;
  logic [NSRC-1:0][$clog2(NUM_DMSL+1)-1:0] src_sel;
  logic                                    rd_hit;
  logic [$clog2(NUM_DMSL+1)-1:0]           rd_sel;

  always_comb begin
    src_hit = '0;
    src_sel = '0;
    rd_hit  = 1'b0;
    rd_sel  = '0;
    for (int k = 0; k < NSRC; k++)
      for (int j = NUM_DMSL - 1; j >= 0; j--)
        if (iss_rs_used_i[k] && cfg[j][iss_wid_i].redirect && cfg[j][iss_wid_i].dir == DIR_READ &&
            rid_of(cfg[j][iss_wid_i]) == iss_rs_i[k]) begin
          src_hit[k] = 1'b1;
          src_sel[k] = ($clog2(NUM_DMSL+1))'(j);
        end
    for (int j = NUM_DMSL - 1; j >= 0; j--)
      if (iss_rd_used_i && cfg[j][iss_wid_i].redirect && cfg[j][iss_wid_i].dir == DIR_WRITE &&
          rid_of(cfg[j][iss_wid_i]) == iss_rd_i) begin
        rd_hit = 1'b1;
        rd_sel = ($clog2(NUM_DMSL+1))'(j);
      end

    iss_ready_o = 1'b1;
    pop = '0;
    rsv = '0;
    for (int k = 0; k < NSRC; k++) begin
      iss_src_bypass_o[k] = src_hit[k];
      iss_src_data_o[k]   = dm_data[src_sel[k]];
      if (src_hit[k]) begin
        iss_ready_o = iss_ready_o && rd_ready[src_sel[k]];
        pop[src_sel[k]] = iss_fire_i;
      end
    end
    iss_rd_redirect_o = rd_hit;
    if (rd_hit) begin
      iss_ready_o = iss_ready_o && wr_ready[rd_sel];
      rsv[rd_sel] = iss_fire_i;
    end

    wb_sel = '0;
    wb_redirect_o = 1'b0;
    for (int j = NUM_DMSL - 1; j >= 0; j--)
      if (cfg[j][wb_wid_i].redirect && cfg[j][wb_wid_i].dir == DIR_WRITE &&
          rid_of(cfg[j][wb_wid_i]) == wb_rd_i) begin
        wb_sel        = '0;
        wb_sel[j]     = wb_valid_i;
        wb_redirect_o = 1'b1;
      end
  end

  // ---------------------------------------------------------------- DMSLs
  for (genvar j = 0; j < NUM_DMSL; j++) begin : g_dmsl
    dmsl #(
      .NUM_WARPS(NUM_WARPS), .NUM_THREADS(NUM_THREADS), .NUM_LOOPS(NUM_LOOPS),
      .CREDITS(CREDITS), .NRSP(NRSP)
    ) u_dmsl (
      .clk, .rst_n,
      .csr_we_i(csr_we_i && 32'(csr_id(csr_addr_i)) == j),
      .csr_wid_i, .csr_reg_i(csr_reg(csr_addr_i)), .csr_tmask_i, .csr_wdata_i,
      .cfg_o(cfg[j]),
      .csr_rwid_i, .csr_rreg_i(csr_reg(csr_raddr_i)), .csr_rdata_o(dmsl_rdata[j]),
      .loop_en_i, .loop_bound_i,
      .req_valid_o(req_valid_o[j]), .req_rw_o(req_rw_o[j]), .req_mask_o(req_mask_o[j]),
      .req_addr_o(req_addr_o[j]), .req_data_o(req_data_o[j]), .req_byteen_o(req_byteen_o[j]),
      .req_tag_o(req_tag_o[j]), .req_need_o(req_need_o[j]), .grant_i(grant_i[j]),
      .rsp_valid_i(rsp_valid_i[j]), .rsp_mask_i(rsp_mask_i[j]), .rsp_data_i(rsp_data_i[j]),
      .rsp_tag_i(rsp_tag_i[j]),
      .iss_wid_i, .iss_tmask_i,
      .iss_rd_ready_o(rd_ready[j]), .iss_wr_ready_o(wr_ready[j]), .iss_data_o(dm_data[j]),
      .iss_pop_i(pop[j]), .iss_rsv_i(rsv[j]),
      .wb_valid_i(wb_sel[j]), .wb_wid_i, .wb_tmask_i, .wb_data_i
    );
  end

  assert property (@(posedge clk) disable iff (!rst_n) iss_fire_i |-> iss_ready_o);

endmodule
