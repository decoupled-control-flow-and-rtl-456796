// mem_arbiter: virtual multi-port access of the streaming lanes to one memory
// (the multi-port L1 data cache, or the shared memory with NPORTS = 1).
//
// Each cycle every port grants at most one request and every requester gets at
// most one port. Port 0 is shared with the load/store unit, which always wins
// it; the remaining ports (and port 0 when the LSU is idle) go to the DMSL
// requests in order of need: the requester reporting the highest need takes the
// next free port, ties going to the lower index. A DMSL's need is its number of
// free credits for a read stream and of filled credits for a write stream, so
// the stream closest to starving or overflowing is served first. A port whose
// ready is low grants nothing.
//
// The arbiter prefixes the outgoing tag with the source (LSU or DMSL index) and
// uses it to steer each port's response back; responses on different ports may
// reach the same DMSL in the same cycle, so each DMSL has one response input per
// port. LSU responses are delivered from any port carrying an LSU tag.
//
// Timing: purely combinational, grants are valid in the cycle the request is
// presented. From the paper: one request per port per cycle from R DMSLs,
// priority by FIFO credits, LSU first on port 0. The tag scheme is this
// design's choice.
module mem_arbiter #(
  parameter int unsigned NREQ        = 3,
  parameter int unsigned NPORTS      = 3,
  parameter bit          HAS_LSU     = 1'b1,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned TAG_W       = 99,
  parameter int unsigned NEED_W      = 5,
  localparam int unsigned SRC_W = $clog2(NREQ + 1),
  localparam int unsigned MTAG_W = SRC_W + TAG_W
) (
  // DMSL requests
  input  logic [NREQ-1:0]                                  req_valid_i,
  input  logic [NREQ-1:0]                                  req_rw_i,
  input  logic [NREQ-1:0][NUM_THREADS-1:0]                 req_mask_i,
  input  logic [NREQ-1:0][NUM_THREADS-1:0][31:0]           req_addr_i,
  input  logic [NREQ-1:0][NUM_THREADS-1:0][31:0]           req_data_i,
  input  logic [NREQ-1:0][NUM_THREADS-1:0][3:0]            req_byteen_i,
  input  logic [NREQ-1:0][TAG_W-1:0]                       req_tag_i,
  input  logic [NREQ-1:0][NEED_W-1:0]                      req_need_i,
  output logic [NREQ-1:0]                                  req_grant_o,
  // LSU request (port 0 only)
  input  logic                                             lsu_valid_i,
  input  logic                                             lsu_rw_i,
  input  logic [NUM_THREADS-1:0]                           lsu_mask_i,
  input  logic [NUM_THREADS-1:0][31:0]                     lsu_addr_i,
  input  logic [NUM_THREADS-1:0][31:0]                     lsu_data_i,
  input  logic [NUM_THREADS-1:0][3:0]                      lsu_byteen_i,
  input  logic [TAG_W-1:0]                                 lsu_tag_i,
  output logic                                             lsu_ready_o,
  // memory ports
  output logic [NPORTS-1:0]                                mem_valid_o,
  output logic [NPORTS-1:0]                                mem_rw_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0]               mem_mask_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0][31:0]         mem_addr_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0][31:0]         mem_data_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0][3:0]          mem_byteen_o,
  output logic [NPORTS-1:0][MTAG_W-1:0]                    mem_tag_o,
  input  logic [NPORTS-1:0]                                mem_ready_i,
  // memory responses
  input  logic [NPORTS-1:0]                                mem_rsp_valid_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0]               mem_rsp_mask_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0][31:0]         mem_rsp_data_i,
  input  logic [NPORTS-1:0][MTAG_W-1:0]                    mem_rsp_tag_i,
  output logic [NREQ-1:0][NPORTS-1:0]                      rsp_valid_o,
  output logic [NREQ-1:0][NPORTS-1:0][NUM_THREADS-1:0]     rsp_mask_o,
  output logic [NREQ-1:0][NPORTS-1:0][NUM_THREADS-1:0][31:0] rsp_data_o,
  output logic [NREQ-1:0][NPORTS-1:0][TAG_W-1:0]           rsp_tag_o,
  output logic                                             lsu_rsp_valid_o,
  output logic [NUM_THREADS-1:0]                           lsu_rsp_mask_o,
  output logic [NUM_THREADS-1:0][31:0]                     lsu_rsp_data_o,
  output logic [TAG_W-1:0]                                 lsu_rsp_tag_o
);

  localparam logic [SRC_W-1:0] SRC_LSU = SRC_W'(NREQ);

  logic [NPORTS-1:0][SRC_W-1:0] port_src;

  always_comb begin
    logic [NREQ-1:0]  taken;
    logic             found;
    logic [SRC_W-1:0] best;
    taken       = '0;
    req_grant_o = '0;
    lsu_ready_o = 1'b0;
    mem_valid_o = '0;
    port_src    = '0;
    for (int p = 0; p < NPORTS; p++) begin
      found = 1'b0;
      best  = '0;
      if (p == 0 && HAS_LSU && lsu_valid_i) begin
        found = 1'b1;
        best  = SRC_LSU;
      end else begin
        for (int r = 0; r < NREQ; r++) begin
          if (req_valid_i[r] && !taken[r] &&
              (!found || req_need_i[r] > req_need_i[best])) begin
            found = 1'b1;
            best  = SRC_W'(r);
          end
        end
      end
      port_src[p] = best;
      if (found && mem_ready_i[p]) begin
        mem_valid_o[p] = 1'b1;
        if (best == SRC_LSU) begin
          lsu_ready_o = 1'b1;
        end else begin
          taken[best]       = 1'b1;
          req_grant_o[best] = 1'b1;
        end
      end
    end
  end

  // request payload multiplexers
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      if (port_src[p] == SRC_LSU) begin
        mem_rw_o[p]     = lsu_rw_i;
        mem_mask_o[p]   = lsu_mask_i;
        mem_addr_o[p]   = lsu_addr_i;
        mem_data_o[p]   = lsu_data_i;
        mem_byteen_o[p] = lsu_byteen_i;
        mem_tag_o[p]    = {SRC_LSU, lsu_tag_i};
      end else begin
        mem_rw_o[p]     = req_rw_i[port_src[p]];
        mem_mask_o[p]   = req_mask_i[port_src[p]];
        mem_addr_o[p]   = req_addr_i[port_src[p]];
        mem_data_o[p]   = req_data_i[port_src[p]];
        mem_byteen_o[p] = req_byteen_i[port_src[p]];
        mem_tag_o[p]    = {port_src[p], req_tag_i[port_src[p]]};
      end
    end
  end

  // response steering
  always_comb begin
    lsu_rsp_valid_o = 1'b0;
    lsu_rsp_mask_o  = '0;
    lsu_rsp_data_o  = '0;
    lsu_rsp_tag_o   = '0;
    for (int p = 0; p < NPORTS; p++) begin
      for (int r = 0; r < NREQ; r++) begin
        rsp_valid_o[r][p] = mem_rsp_valid_i[p] && (mem_rsp_tag_i[p][MTAG_W-1 -: SRC_W] == SRC_W'(r));
        rsp_mask_o[r][p]  = mem_rsp_mask_i[p];
        rsp_data_o[r][p]  = mem_rsp_data_i[p];
        rsp_tag_o[r][p]   = mem_rsp_tag_i[p][TAG_W-1:0];
      end
      if (mem_rsp_valid_i[p] && mem_rsp_tag_i[p][MTAG_W-1 -: SRC_W] == SRC_LSU) begin
        lsu_rsp_valid_o = 1'b1;
        lsu_rsp_mask_o  = mem_rsp_mask_i[p];
        lsu_rsp_data_o  = mem_rsp_data_i[p];
        lsu_rsp_tag_o   = mem_rsp_tag_i[p][TAG_W-1:0];
      end
    end
  end

endmodule
