// mem_model: behavioural multi-port data memory for the testbenches; it
// stands in for the multi-port L1 data cache or the shared memory.
//
// NPORTS independent ports, each taking one request of NUM_THREADS addresses
// per cycle when ready (ready drops at random when RAND_READY is set). Reads
// answer on the same port after LAT to LAT+JIT cycles, in order per port but
// not across ports, echoing the tag; writes apply their byte enables at once
// and are not answered. Words never written read as init_word(address), so a
// testbench can predict them. Counts of reads, writes and stalled cycles are
// kept for the testbench.
module mem_model #(
  parameter int unsigned NPORTS      = 3,
  parameter int unsigned NUM_THREADS = 16,
  parameter int unsigned MTAG_W      = 8,
  parameter int unsigned LAT         = 2,
  parameter int unsigned JIT         = 3,
  parameter bit          RAND_READY  = 1'b1
) (
  input  logic                                     clk,
  input  logic                                     rst_n,
  input  logic [NPORTS-1:0]                        valid_i,
  input  logic [NPORTS-1:0]                        rw_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0]       mask_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0][31:0] addr_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0][31:0] data_i,
  input  logic [NPORTS-1:0][NUM_THREADS-1:0][3:0]  byteen_i,
  input  logic [NPORTS-1:0][MTAG_W-1:0]            tag_i,
  output logic [NPORTS-1:0]                        ready_o,
  output logic [NPORTS-1:0]                        rsp_valid_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0]       rsp_mask_o,
  output logic [NPORTS-1:0][NUM_THREADS-1:0][31:0] rsp_data_o,
  output logic [NPORTS-1:0][MTAG_W-1:0]            rsp_tag_o
);

  logic [31:0] mem [int unsigned];

  function automatic logic [31:0] init_word(input logic [31:0] a);
    return {a[15:0] ^ 16'h5A3C, a[15:0] + 16'h1234};
  endfunction

  function automatic logic [31:0] read_word(input logic [31:0] a);
    logic [31:0] wa;
    wa = {a[31:2], 2'b00};
    return mem.exists(wa) ? mem[wa] : init_word(wa);
  endfunction

  task automatic write_word(input logic [31:0] a, input logic [31:0] d, input logic [3:0] be);
    logic [31:0] w;
    w = read_word(a);
    for (int b = 0; b < 4; b++) if (be[b]) w[8*b +: 8] = d[8*b +: 8];
    mem[{a[31:2], 2'b00}] = w;
  endtask

  typedef struct {
    longint                             due;
    logic [NUM_THREADS-1:0]             mask;
    logic [NUM_THREADS-1:0][31:0]       data;
    logic [MTAG_W-1:0]                  tag;
  } rsp_t;
  rsp_t q [NPORTS][$];
  longint cyc = 0;
  int reads = 0, writes = 0, stalls = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    for (int p = 0; p < NPORTS; p++) begin
      if (rst_n && valid_i[p] && ready_o[p]) begin
        if (rw_i[p]) begin
          writes++;
          for (int t = 0; t < NUM_THREADS; t++)
            if (mask_i[p][t]) write_word(addr_i[p][t], data_i[p][t], byteen_i[p][t]);
        end else begin
          rsp_t r;
          reads++;
          r.due  = cyc + LAT + longint'($urandom_range(0, JIT));
          r.mask = mask_i[p];
          r.tag  = tag_i[p];
          for (int t = 0; t < NUM_THREADS; t++) r.data[t] = read_word(addr_i[p][t]);
          q[p].push_back(r);
        end
      end
      if (rst_n && valid_i[p] && !ready_o[p]) stalls++;
      rsp_valid_o[p] <= 1'b0;
      if (q[p].size() > 0 && q[p][0].due <= cyc) begin
        rsp_valid_o[p] <= 1'b1;
        rsp_mask_o[p]  <= q[p][0].mask;
        rsp_data_o[p]  <= q[p][0].data;
        rsp_tag_o[p]   <= q[p][0].tag;
        void'(q[p].pop_front());
      end
      ready_o[p] <= RAND_READY ? ($urandom_range(0, 7) != 0) : 1'b1;
    end
  end

  initial begin
    rsp_valid_o = '0;
    rsp_mask_o  = '0;
    rsp_data_o  = '0;
    rsp_tag_o   = '0;
    ready_o     = '1;
  end

endmodule
