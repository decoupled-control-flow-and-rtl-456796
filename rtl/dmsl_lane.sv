// dmsl_lane: the streaming lane of one thread inside a DMSL.
//
// Each warp has its own credit FIFO and its own memory-pointer state, so the
// warps sharing the core stream independently. The address generator walks the
// loop nest that the hardware loops describe (levels 0 .. n-1 enabled, level 0
// outermost, with this thread's own bound at every level) in the order the
// loop body consumes elements: after each element the innermost level that can
// still count up is incremented, every level inside it returns to 0, and the
// pointer moves by the stride programmed for that level. Strides are therefore
// per-level increments, as in streamers for scalar cores. When every level has
// wrapped the stream is complete and no further request is made, so prefetching
// is never speculative. With no loop enabled the stream has no end and advances
// by the stride of level 0.
//
// Read stream: the lane asks for a request while it has a free credit, the
// granted request reserves a slot, the response fills it, and the issue stage
// pops it. Write stream: the issue stage reserves, writeback fills, and the lane
// asks for a store while the head slot holds data; a granted store pops it.
// Elements of 16 or 8 bits are taken from / placed into the addressed bytes of
// the 32-bit word; integers are sign-extended and floating-point values
// zero-extended.
//
// Interface and timing: per-warp request eligibility (can_req_o) and the data
// for the warp on req_wid_i / iss_wid_i are combinational from registers.
// Grants, responses, pops, reservations, writeback fills and base-address
// writes act at the clock edge. A base-address write restarts the stream and
// empties the warp's FIFO.
//
// From the paper: one lane per thread, a FIFO queue and memory pointer per
// warp, linear pointer update by a per-loop stride chosen by the active loop
// level, credits set at design time. This design's own choice: the lane tracks
// the loop position itself from the hardware-loop bounds instead of sampling
// the fetch stage's innermost active loop, which runs ahead of execution.
module dmsl_lane
  import ext_pkg::*;
#(
  parameter int unsigned NUM_WARPS = 8,
  parameter int unsigned NUM_LOOPS = 4,
  parameter int unsigned CREDITS   = 16,
  parameter int unsigned NRSP      = 4,
  localparam int unsigned WID_W = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1,
  localparam int unsigned IW    = $clog2(CREDITS),
  localparam int unsigned CW    = $clog2(CREDITS + 1)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration (per warp, from the DMSL registers and the hardware loops)
  input  logic [NUM_WARPS-1:0]          stream_en_i,   // prefetch / drain enable
  input  logic [NUM_WARPS-1:0]          is_write_i,
  input  prec_e [NUM_WARPS-1:0]         prec_i,
  input  logic [NUM_WARPS-1:0]          is_fp_i,
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0]            loop_en_i,
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][30:0]      bound_i,
  input  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][XLEN-1:0]  stride_i,
  input  logic                          base_we_i,
  input  logic [WID_W-1:0]              base_wid_i,
  input  logic [XLEN-1:0]               base_i,
  // pointer readback (CSR read of the base-address register)
  input  logic [WID_W-1:0]              rd_wid_i,
  output logic [XLEN-1:0]               rd_ptr_o,
  // memory request for the warp the DMSL selected
  output logic [NUM_WARPS-1:0]          can_req_o,
  input  logic [WID_W-1:0]              req_wid_i,
  output logic [XLEN-1:0]               req_addr_o,
  output logic [XLEN-1:0]               req_data_o,    // store data, byte-aligned
  output logic [3:0]                    req_byteen_o,
  output logic [IW-1:0]                 req_idx_o,     // slot reserved by a read
  output logic [CW-1:0]                 req_used_o,
  output logic [CW-1:0]                 req_nvalid_o,
  input  logic                          grant_i,
  // read responses (one per memory port)
  input  logic [NRSP-1:0]               rsp_valid_i,
  input  logic [NRSP-1:0][WID_W-1:0]    rsp_wid_i,
  input  logic [NRSP-1:0][IW-1:0]       rsp_idx_i,
  input  logic [NRSP-1:0][1:0]          rsp_off_i,
  input  logic [NRSP-1:0][XLEN-1:0]     rsp_data_i,
  // issue stage
  input  logic [WID_W-1:0]              iss_wid_i,
  output logic                          iss_head_valid_o,
  output logic [XLEN-1:0]               iss_head_data_o,
  output logic                          iss_can_rsv_o,
  input  logic                          iss_pop_i,     // read operand consumed
  input  logic                          iss_rsv_i,     // write operand announced
  // writeback of a result mapped to a write stream
  input  logic                          wb_valid_i,
  input  logic [WID_W-1:0]              wb_wid_i,
  input  logic [XLEN-1:0]               wb_data_i
);

  localparam int unsigned LW = (NUM_LOOPS > 1) ? $clog2(NUM_LOOPS) : 1;

  logic [NUM_WARPS-1:0][XLEN-1:0]            addr_q;
  logic [NUM_WARPS-1:0][NUM_LOOPS-1:0][30:0] cnt_q;
  logic [NUM_WARPS-1:0]                      done_q;

  logic [NUM_WARPS-1:0]           f_can_rsv, f_head_valid;
  logic [NUM_WARPS-1:0][XLEN-1:0] f_head_data;
  logic [NUM_WARPS-1:0][IW-1:0]   f_rsv_idx;
  logic [NUM_WARPS-1:0][CW-1:0]   f_used, f_nvalid;

  // extract a sub-word element from a returned 32-bit word
  function automatic logic [XLEN-1:0] extract(input logic [XLEN-1:0] w, input logic [1:0] off,
                                              input prec_e p, input logic fp);
    logic [XLEN-1:0] s;
    s = w >> (8 * off);
    unique case (p)
      PREC_16: extract = fp ? {16'b0, s[15:0]} : {{16{s[15]}}, s[15:0]};
      PREC_8:  extract = fp ? {24'b0, s[7:0]}  : {{24{s[7]}}, s[7:0]};
      default: extract = w;
    endcase
  endfunction

  // ------------------------------------------------------------- per-warp FIFOs
  for (genvar w = 0; w < NUM_WARPS; w++) begin : g_warp
    logic [NRSP-1:0]            fill;
    logic [NRSP-1:0][XLEN-1:0]  fdata;
    always_comb begin
      for (int r = 0; r < NRSP; r++) begin
        fill[r]  = rsp_valid_i[r] && (rsp_wid_i[r] == WID_W'(w)) && !is_write_i[w];
        fdata[r] = extract(rsp_data_i[r], rsp_off_i[r], prec_i[w], is_fp_i[w]);
      end
    end
    dmsl_fifo #(.DEPTH(CREDITS), .DW(XLEN), .NFILL(NRSP)) u_fifo (
      .clk, .rst_n,
      .flush_i        (base_we_i && base_wid_i == WID_W'(w)),
      .reserve_i      (is_write_i[w] ? (iss_rsv_i && iss_wid_i == WID_W'(w))
                                     : (grant_i && req_wid_i == WID_W'(w))),
      .can_reserve_o  (f_can_rsv[w]),
      .rsv_idx_o      (f_rsv_idx[w]),
      .fill_i         (fill),
      .fill_idx_i     (rsp_idx_i),
      .fill_data_i    (fdata),
      .fill_seq_i     (wb_valid_i && wb_wid_i == WID_W'(w) && is_write_i[w]),
      .fill_seq_data_i(wb_data_i),
      .pop_i          (is_write_i[w] ? (grant_i && req_wid_i == WID_W'(w))
                                     : (iss_pop_i && iss_wid_i == WID_W'(w))),
      .head_valid_o   (f_head_valid[w]),
      .head_data_o    (f_head_data[w]),
      .used_o         (f_used[w]),
      .nvalid_o       (f_nvalid[w])
    );
    assign can_req_o[w] = stream_en_i[w] && !done_q[w] &&
                          (is_write_i[w] ? f_head_valid[w] : f_can_rsv[w]);
  end

  // ------------------------------------------------------------- request data
  logic [1:0] off;
  assign off          = addr_q[req_wid_i][1:0];
  assign req_addr_o   = addr_q[req_wid_i];
  assign rd_ptr_o     = addr_q[rd_wid_i];
  assign req_idx_o    = f_rsv_idx[req_wid_i];
  assign req_used_o   = f_used[req_wid_i];
  assign req_nvalid_o = f_nvalid[req_wid_i];
  always_comb begin
    req_data_o = f_head_data[req_wid_i] << (8 * off);
    unique case (prec_i[req_wid_i])
      PREC_16: req_byteen_o = 4'b0011 << off;
      PREC_8:  req_byteen_o = 4'b0001 << off;
      default: req_byteen_o = 4'b1111;
    endcase
  end

  assign iss_head_valid_o = f_head_valid[iss_wid_i];
  assign iss_head_data_o  = f_head_data[iss_wid_i];
  assign iss_can_rsv_o    = f_can_rsv[iss_wid_i];

  // ------------------------------------------------------------- address generator
  // nest depth: contiguous enabled levels from level 0
  logic [LW:0]              nlev, base_nlev;
  logic                     found;
  logic [LW-1:0]            inc_lvl;
  logic [NUM_LOOPS-1:0][30:0] cnt_next;
  logic                     empty_nest;

  always_comb begin
    nlev = '0;
    for (int l = 0; l < NUM_LOOPS; l++)
      if (loop_en_i[req_wid_i][l] && nlev == (LW+1)'(l)) nlev = (LW+1)'(l + 1);
    found   = 1'b0;
    inc_lvl = '0;
    for (int l = 0; l < NUM_LOOPS; l++) begin
      if ((LW+1)'(l) < nlev && (cnt_q[req_wid_i][l] + 31'd1) < bound_i[req_wid_i][l]) begin
        found   = 1'b1;
        inc_lvl = LW'(l);
      end
    end
    for (int l = 0; l < NUM_LOOPS; l++) begin
      if (nlev == '0)                         cnt_next[l] = '0;
      else if (found && LW'(l) == inc_lvl)    cnt_next[l] = cnt_q[req_wid_i][l] + 31'd1;
      else if (found && LW'(l) < inc_lvl)     cnt_next[l] = cnt_q[req_wid_i][l];
      else                                    cnt_next[l] = '0;
    end
    // a nest with a zero bound has no element at all
    base_nlev = '0;
    for (int l = 0; l < NUM_LOOPS; l++)
      if (loop_en_i[base_wid_i][l] && base_nlev == (LW+1)'(l)) base_nlev = (LW+1)'(l + 1);
    empty_nest = 1'b0;
    for (int l = 0; l < NUM_LOOPS; l++)
      if ((LW+1)'(l) < base_nlev && bound_i[base_wid_i][l] == '0) empty_nest = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      addr_q <= '0;
      cnt_q  <= '0;
      done_q <= '1;
    end else begin
      if (grant_i) begin
        cnt_q[req_wid_i] <= cnt_next;
        if (nlev == '0) begin
          addr_q[req_wid_i] <= addr_q[req_wid_i] + stride_i[req_wid_i][0];
        end else if (found) begin
          addr_q[req_wid_i] <= addr_q[req_wid_i] + stride_i[req_wid_i][inc_lvl];
        end else begin
          done_q[req_wid_i] <= 1'b1;
        end
      end
      if (base_we_i) begin
        addr_q[base_wid_i] <= base_i;
        cnt_q[base_wid_i]  <= '0;
        done_q[base_wid_i] <= empty_nest;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
    grant_i |-> can_req_o[req_wid_i]);

endmodule
