// cache_region: the block array of one region of the hybrid L1 data cache,
// either the SRAM ways or the STT-RAM ways of every set.
//
// Each way of each set holds a valid bit, a dirty bit, the bookkeeping
// fields (read-intensive counter RIC, write-intensive counter WIC,
// confidence CONF, see hc_pkg::meta_t), the tag and a 64-byte data block,
// the fields of the cache block drawn in the architecture overview.
// One set is read at a time, all of its ways in parallel and
// combinationally; one way is written per clock edge with a whole entry.
// The access latencies of the two technologies (1/2 cycles for SRAM,
// 2/10 cycles for STT-RAM) are not modelled here but by the controller,
// which waits that many cycles before it commits a write.
//
// VOLATILE marks the SRAM region: when power_loss is asserted every valid
// bit is cleared at the next edge, which stands for the contents that an
// SRAM loses when its supply goes away. An STT-RAM region (VOLATILE = 0)
// ignores power_loss and keeps its contents. The valid bits are cleared at
// reset; the other fields are don't-care while invalid.
module cache_region
  import hc_pkg::*;
#(
  parameter int unsigned SETS     = 64,
  parameter int unsigned WAYS     = 2,
  parameter int unsigned TAG_W    = 15,
  parameter int unsigned LINE_W   = 512,
  parameter bit          VOLATILE = 1'b1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // read port: one set, all ways
  input  logic [$clog2(SETS)-1:0] rd_set,
  output logic [WAYS-1:0]         rd_valid,
  output logic [WAYS-1:0]         rd_dirty,
  output meta_t                   rd_meta [WAYS],
  output logic [TAG_W-1:0]        rd_tag  [WAYS],
  output logic [LINE_W-1:0]       rd_data [WAYS],
  // write port: one whole entry
  input  logic                    wr_en,
  input  logic [$clog2(SETS)-1:0] wr_set,
  input  logic [$clog2(WAYS)-1:0] wr_way,
  input  logic                    wr_valid,
  input  logic                    wr_dirty,
  input  meta_t                   wr_meta,
  input  logic [TAG_W-1:0]        wr_tag,
  input  logic [LINE_W-1:0]       wr_data,
  // supply removed: a volatile region loses its contents
  input  logic                    power_loss
);

  logic [WAYS-1:0]   valid_q [SETS];
  logic [WAYS-1:0]   dirty_q [SETS];
  meta_t             meta_q  [SETS][WAYS];
  logic [TAG_W-1:0]  tag_q   [SETS][WAYS];
  logic [LINE_W-1:0] data_q  [SETS][WAYS];

  // valid bits: reset, power loss (volatile only) and entry writes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end else if (VOLATILE && power_loss) begin
      for (int s = 0; s < SETS; s++) valid_q[s] <= '0;
    end else if (wr_en) begin
      valid_q[wr_set][wr_way] <= wr_valid;
    end
  end

  // payload fields: written with the entry, no reset needed
  always_ff @(posedge clk) begin
    if (wr_en) begin
      dirty_q[wr_set][wr_way] <= wr_dirty;
      meta_q[wr_set][wr_way]  <= wr_meta;
      tag_q[wr_set][wr_way]   <= wr_tag;
      data_q[wr_set][wr_way]  <= wr_data;
    end
  end

  always_comb begin
    rd_valid = valid_q[rd_set];
    rd_dirty = dirty_q[rd_set];
    for (int w = 0; w < WAYS; w++) begin
      rd_meta[w] = meta_q[rd_set][w];
      rd_tag[w]  = tag_q[rd_set][w];
      rd_data[w] = data_q[rd_set][w];
    end
  end

endmodule
