// dmsl_fifo: credit FIFO of one streaming lane for one warp.
//
// DEPTH slots ("credits") hold stream elements in access order. A slot is
// reserved before its data exists and filled later, so that out-of-order
// memory responses still leave the data in stream order:
//   read stream  - reserve when the prefetch request is sent (rsv_idx_o tags
//                  the request), fill_i at the slot the response names,
//                  pop_i when the instruction that reads the operand issues;
//   write stream - reserve when the instruction that writes the operand
//                  issues, fill_seq_i at writeback (results arrive in issue
//                  order), pop_i when the store request is granted.
// Up to NFILL responses may fill different slots in the same cycle.
//
// Interface and timing: all status outputs (head, counts, can_reserve) are
// registered state; reserve, fill and pop act at the clock edge and may all
// happen in one cycle. used_o counts reserved slots, nvalid_o filled ones.
// The paper gives the FIFO's role and its depth in credits; the
// reserve/fill split is this design's choice.
module dmsl_fifo #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned DW    = 32,
  parameter int unsigned NFILL = 4,
  localparam int unsigned IW = $clog2(DEPTH),
  localparam int unsigned CW = $clog2(DEPTH + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       flush_i,
  input  logic                       reserve_i,
  output logic                       can_reserve_o,
  output logic [IW-1:0]              rsv_idx_o,
  input  logic [NFILL-1:0]           fill_i,
  input  logic [NFILL-1:0][IW-1:0]   fill_idx_i,
  input  logic [NFILL-1:0][DW-1:0]   fill_data_i,
  input  logic                       fill_seq_i,
  input  logic [DW-1:0]              fill_seq_data_i,
  input  logic                       pop_i,
  output logic                       head_valid_o,
  output logic [DW-1:0]              head_data_o,
  output logic [CW-1:0]              used_o,
  output logic [CW-1:0]              nvalid_o
);

  logic [DEPTH-1:0][DW-1:0] data_q;
  logic [DEPTH-1:0]         valid_q;
  logic [IW-1:0]            head_q, tail_q, fptr_q;
  logic [CW-1:0]            used_q, nvalid_q;

  logic do_rsv, do_pop;
  logic [CW-1:0] nfill;

  assign can_reserve_o = (used_q < CW'(DEPTH));
  assign rsv_idx_o     = tail_q;
  assign head_valid_o  = (used_q != '0) && valid_q[head_q];
  assign head_data_o   = data_q[head_q];
  assign used_o        = used_q;
  assign nvalid_o      = nvalid_q;
  assign do_rsv        = reserve_i && can_reserve_o;
  assign do_pop        = pop_i && head_valid_o;

  always_comb begin
    nfill = CW'(fill_seq_i);
    for (int f = 0; f < NFILL; f++) nfill += CW'(fill_i[f]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      data_q   <= '0;
      valid_q  <= '0;
      head_q   <= '0;
      tail_q   <= '0;
      fptr_q   <= '0;
      used_q   <= '0;
      nvalid_q <= '0;
    end else if (flush_i) begin
      valid_q  <= '0;
      head_q   <= '0;
      tail_q   <= '0;
      fptr_q   <= '0;
      used_q   <= '0;
      nvalid_q <= '0;
    end else begin
      for (int f = 0; f < NFILL; f++) begin
        if (fill_i[f]) begin
          data_q[fill_idx_i[f]]  <= fill_data_i[f];
          valid_q[fill_idx_i[f]] <= 1'b1;
        end
      end
      if (fill_seq_i) begin
        data_q[fptr_q]  <= fill_seq_data_i;
        valid_q[fptr_q] <= 1'b1;
        fptr_q          <= (fptr_q == IW'(DEPTH - 1)) ? '0 : fptr_q + 1'b1;
      end
      if (do_pop) begin
        valid_q[head_q] <= 1'b0;
        head_q <= (head_q == IW'(DEPTH - 1)) ? '0 : head_q + 1'b1;
      end
      if (do_rsv) tail_q <= (tail_q == IW'(DEPTH - 1)) ? '0 : tail_q + 1'b1;
      used_q   <= used_q + CW'(do_rsv) - CW'(do_pop);
      nvalid_q <= nvalid_q + nfill - CW'(do_pop);
    end
  end

  // a fill only targets a reserved, still empty slot; pops only see data
  for (genvar f = 0; f < NFILL; f++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n)
      fill_i[f] && !flush_i |-> !valid_q[fill_idx_i[f]] && used_q != '0);
  end
  assert property (@(posedge clk) disable iff (!rst_n)
    fill_seq_i && !flush_i |-> !valid_q[fptr_q] && used_q != '0);

endmodule
