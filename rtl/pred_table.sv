// pred_table: the prediction table that remembers, for each memory block,
// which cache region it last lived in (the PR, "previous region", bit).
//
// It is a direct-mapped array of L one-bit entries with no tags, indexed by
// (block address) mod L, i.e. the low log2(L) bits of address/64. A miss
// reads the entry of the requested block to decide where the block is
// placed (1 = SRAM, 0 = STT-RAM); a replacement writes the entry of the
// evicted block. All entries are 1 after reset, so a block never seen
// before goes to SRAM. L = 4096 entries follows the evaluated configuration.
//
// Interface: one combinational read port (rd_idx -> rd_pr) and one write
// port that takes effect at the rising clock edge. A read of the entry being
// written in the same cycle returns the old value.
module pred_table #(
  parameter int unsigned L = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(L)-1:0] rd_idx,
  output logic                 rd_pr,
  input  logic                 wr_en,
  input  logic [$clog2(L)-1:0] wr_idx,
  input  logic                 wr_pr
);

  logic [L-1:0] pr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pr_q <= '1;
    end else if (wr_en) begin
      pr_q[wr_idx] <= wr_pr;
    end
  end

  assign rd_pr = pr_q[rd_idx];

endmodule
