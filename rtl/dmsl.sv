// dmsl: one decoupled memory streaming lane set (DMSL), NUM_THREADS lanes wide.
//
// A DMSL is bound by software to one register operand of the loop body. It
// fetches that operand's stream ahead of execution (read stream) or collects
// the results written to it and stores them (write stream), keeping one FIFO
// and one memory pointer per warp and thread. Every cycle it picks, round-robin,
// a warp for which at least one lane has work and presents one memory request
// that carries an address per thread, like a load/store of the whole warp. The
// request also reports the DMSL's need, which the port arbiter uses as
// priority: for a read stream the free credits of the warp (fewer data = more
// need), for a write stream the filled credits (more data = more need), both
// taken from the lowest requesting lane.
//
// Registers (per warp; written through the DMSL CSRs of this unit ID):
//   0  base address   one value per thread; restarts the stream
//   1  configuration  RF reg [4:0], FP/INT [6:5], precision [9:7],
//                     prefetch enable [10], redirect enable [11],
//                     direction [13:12] (0 read, 1 write)
//   5+l stride        pointer increment for loop level l
// All registers read back through the CSR read port; a read of the base
// register returns each thread's current stream pointer (this design's choice).
// Read responses name the warp and, per thread, the reserved slot and the byte
// offset in the tag, so they may return on any port and in any order.
//
// Interface and timing: the request is combinational from state; grant_i acts
// at the clock edge for the lanes in req_mask_o. Issue outputs are
// combinational from state; pops, reservations and writeback fills act at the
// clock edge. Write requests receive no response.
module dmsl
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS   = 8,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned NUM_LOOPS   = 4,
  parameter int unsigned CREDITS     = 16,
  parameter int unsigned NRSP        = 4,
  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned IW    = $clog2(CREDITS),
  localparam int unsigned CW    = $clog2(CREDITS + 1),
  localparam int unsigned TAG_W = WID_W + NUM_THREADS * (IW + 2)
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  // CSR write for this DMSL (unit type and ID already decoded)
  input  logic                                   csr_we_i,
  input  logic [WID_W-1:0]                       csr_wid_i,
  input  logic [3:0]                             csr_reg_i,
  input  logic [NUM_THREADS-1:0]                 csr_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]       csr_wdata_i,
  output dmsl_cfg_t [NUM_WARPS-1:0]              cfg_o,
  // CSR read: base register returns each thread's current pointer
  input  logic [WID_W-1:0]                       csr_rwid_i,
  input  logic [3:0]                             csr_rreg_i,
  output logic [NUM_THREADS-1:0][XLEN-1:0]       csr_rdata_o,
  // loop nest from the hardware loops
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]                        loop_en_i,
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][NUM_THREADS-1:0][30:0] loop_bound_i,
  // memory request
  output logic                                   req_valid_o,
  output logic                                   req_rw_o,       // 1 = store
  output logic [NUM_THREADS-1:0]                 req_mask_o,
  output logic [NUM_THREADS-1:0][XLEN-1:0]       req_addr_o,
  output logic [NUM_THREADS-1:0][XLEN-1:0]       req_data_o,
  output logic [NUM_THREADS-1:0][3:0]            req_byteen_o,
  output logic [TAG_W-1:0]                       req_tag_o,
  output logic [CW-1:0]                          req_need_o,
  input  logic                                   grant_i,
  // read responses, one per memory port
  input  logic [NRSP-1:0]                        rsp_valid_i,
  input  logic [NRSP-1:0][NUM_THREADS-1:0]       rsp_mask_i,
  input  logic [NRSP-1:0][NUM_THREADS-1:0][XLEN-1:0] rsp_data_i,
  input  logic [NRSP-1:0][TAG_W-1:0]             rsp_tag_i,
  // issue stage
  input  logic [WID_W-1:0]                       iss_wid_i,
  input  logic [NUM_THREADS-1:0]                 iss_tmask_i,
  output logic                                   iss_rd_ready_o,  // data in all active lanes
  output logic                                   iss_wr_ready_o,  // room in all active lanes
  output logic [NUM_THREADS-1:0][XLEN-1:0]       iss_data_o,
  input  logic                                   iss_pop_i,
  input  logic                                   iss_rsv_i,
  // writeback
  input  logic                                   wb_valid_i,
  input  logic [WID_W-1:0]                       wb_wid_i,
  input  logic [NUM_THREADS-1:0]                 wb_tmask_i,
  input  logic [NUM_THREADS-1:0][XLEN-1:0]       wb_data_i
);

  dmsl_cfg_t [NUM_WARPS-1:0]                     cfg_q;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][XLEN-1:0] stride_q;

  // ---------------------------------------------------------------- registers
  logic [XLEN-1:0] csr_scalar;
  always_comb begin
    csr_scalar = csr_wdata_i[0];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (csr_tmask_i[t]) csr_scalar = csr_wdata_i[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q    <= '0;
      stride_q <= '0;
    end else if (csr_we_i) begin
      if (csr_reg_i == DMSL_REG_CFG) cfg_q[csr_wid_i] <= dmsl_cfg_t'(csr_scalar);
      for (int l = 0; l < NUM_LOOPS; l++)
        if (32'(csr_reg_i) == 32'(DMSL_REG_STRIDE) + l) stride_q[csr_wid_i][l] <= csr_scalar;
    end
  end
  assign cfg_o = cfg_q;

  // ---------------------------------------------------------------- CSR read
  logic [NUM_THREADS-1:0][XLEN-1:0] lane_ptr;
  always_comb begin
    for (int t = 0; t < NUM_THREADS; t++) begin
      csr_rdata_o[t] = '0;
      if (csr_rreg_i == DMSL_REG_BASE) csr_rdata_o[t] = lane_ptr[t];
      if (csr_rreg_i == DMSL_REG_CFG)  csr_rdata_o[t] = XLEN'(cfg_q[csr_rwid_i]);
      for (int l = 0; l < NUM_LOOPS; l++)
        if (32'(csr_rreg_i) == 32'(DMSL_REG_STRIDE) + l) csr_rdata_o[t] = stride_q[csr_rwid_i][l];
    end
  end

  logic [NUM_WARPS-1:0] stream_en, is_write, is_fp;
  prec_e [NUM_WARPS-1:0] prec;
  always_comb begin
    for (int w = 0; w < NUM_WARPS; w++) begin
      stream_en[w] = cfg_q[w].prefetch;
      is_write[w]  = (cfg_q[w].dir == DIR_WRITE);
      is_fp[w]     = cfg_q[w].fpint[0];
      prec[w]      = cfg_q[w].prec;
    end
  end

  // ---------------------------------------------------------------- lanes
  logic [NUM_THREADS-1:0][NUM_WARPS-1:0] lane_can_req;
  logic [NUM_THREADS-1:0][IW-1:0]        lane_idx;
  logic [NUM_THREADS-1:0][CW-1:0]        lane_used, lane_nvalid;
  logic [NUM_THREADS-1:0]                lane_head_valid, lane_can_rsv;
  logic [WID_W-1:0]                      sel_wid;

  for (genvar t = 0; t < NUM_THREADS; t++) begin : g_lane
    logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][30:0] bnd;
    logic [NRSP-1:0]                           rv;
    logic [NRSP-1:0][WID_W-1:0]                rwid;
    logic [NRSP-1:0][IW-1:0]                   ridx;
    logic [NRSP-1:0][1:0]                      roff;
    logic [NRSP-1:0][XLEN-1:0]                 rdat;
    always_comb begin
      for (int w = 0; w < NUM_WARPS; w++)
        for (int l = 0; l < NUM_LOOPS; l++)
          bnd[w][l] = loop_bound_i[w][l][t];
      for (int r = 0; r < NRSP; r++) begin
        rv[r]   = rsp_valid_i[r] && rsp_mask_i[r][t];
        rwid[r] = rsp_tag_i[r][TAG_W-1 -: WID_W];
        ridx[r] = rsp_tag_i[r][t*(IW+2)+2 +: IW];
        roff[r] = rsp_tag_i[r][t*(IW+2) +: 2];
        rdat[r] = rsp_data_i[r][t];
      end
    end
    dmsl_lane #(
      .NUM_WARPS(NUM_WARPS), .NUM_LOOPS(NUM_LOOPS), .CREDITS(CREDITS), .NRSP(NRSP)
    ) u_lane (
      .clk, .rst_n,
      .stream_en_i(stream_en), .is_write_i(is_write), .prec_i(prec), .is_fp_i(is_fp),
      .loop_en_i, .bound_i(bnd), .stride_i(stride_q),
      .base_we_i(csr_we_i && csr_reg_i == DMSL_REG_BASE && csr_tmask_i[t]),
      .base_wid_i(csr_wid_i), .base_i(csr_wdata_i[t]),
      .rd_wid_i(csr_rwid_i), .rd_ptr_o(lane_ptr[t]),
      .can_req_o(lane_can_req[t]), .req_wid_i(sel_wid),
      .req_addr_o(req_addr_o[t]), .req_data_o(req_data_o[t]), .req_byteen_o(req_byteen_o[t]),
      .req_idx_o(lane_idx[t]), .req_used_o(lane_used[t]), .req_nvalid_o(lane_nvalid[t]),
      .grant_i(grant_i && req_mask_o[t]),
      .rsp_valid_i(rv), .rsp_wid_i(rwid), .rsp_idx_i(ridx), .rsp_off_i(roff), .rsp_data_i(rdat),
      .iss_wid_i, .iss_head_valid_o(lane_head_valid[t]), .iss_head_data_o(iss_data_o[t]),
      .iss_can_rsv_o(lane_can_rsv[t]),
      .iss_pop_i(iss_pop_i && iss_tmask_i[t]), .iss_rsv_i(iss_rsv_i && iss_tmask_i[t]),
      .wb_valid_i(wb_valid_i && wb_tmask_i[t]), .wb_wid_i, .wb_data_i(wb_data_i[t])
    );
  end

  // ---------------------------------------------------------------- warp selection
  logic [NUM_WARPS-1:0] warp_req;
  logic [WID_W-1:0]     rr_q;
  logic                 any_req;
  always_comb begin
    warp_req = '0;
    for (int t = 0; t < NUM_THREADS; t++) warp_req |= lane_can_req[t];
    any_req = |warp_req;
    sel_wid = rr_q;
    for (int k = NUM_WARPS - 1; k >= 0; k--) begin
      logic [WID_W-1:0] w;
      w = WID_W'((32'(rr_q) + k) % NUM_WARPS);
      if (warp_req[w]) sel_wid = w;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rr_q <= '0;
    else if (grant_i) rr_q <= WID_W'((32'(sel_wid) + 1) % NUM_WARPS);
  end

  // ---------------------------------------------------------------- request
  always_comb begin
    req_valid_o = any_req;
    req_rw_o    = is_write[sel_wid];
    req_need_o  = '0;
    for (int t = 0; t < NUM_THREADS; t++) req_mask_o[t] = lane_can_req[t][sel_wid];
    for (int t = NUM_THREADS - 1; t >= 0; t--)
      if (req_mask_o[t])
        req_need_o = is_write[sel_wid] ? lane_nvalid[t] : CW'(CREDITS) - lane_used[t];
    req_tag_o[TAG_W-1 -: WID_W] = sel_wid;
    for (int t = 0; t < NUM_THREADS; t++) begin
      req_tag_o[t*(IW+2)+2 +: IW] = lane_idx[t];
      req_tag_o[t*(IW+2) +: 2]    = req_addr_o[t][1:0];
    end
  end

  // ---------------------------------------------------------------- issue
  assign iss_rd_ready_o = &(lane_head_valid | ~iss_tmask_i);
  assign iss_wr_ready_o = &(lane_can_rsv | ~iss_tmask_i);

  assert property (@(posedge clk) disable iff (!rst_n) iss_pop_i |-> iss_rd_ready_o);
  assert property (@(posedge clk) disable iff (!rst_n) iss_rsv_i |-> iss_wr_ready_o);
  assert property (@(posedge clk) disable iff (!rst_n) grant_i |-> req_valid_o);

endmodule
