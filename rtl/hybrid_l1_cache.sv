// hybrid_l1_cache: a 16 KB L1 data cache whose sets mix volatile SRAM ways
// and non-volatile STT-RAM ways, for processors that run from harvested
// energy and lose power often.
//
// Write-intensive blocks are kept in the fast, cheap-to-write SRAM ways and
// read-intensive blocks in the STT-RAM ways, whose writes are slow and
// costly but whose contents survive a power failure. Per-block counters
// (RIC, WIC) detect a block that lives in the wrong region and migrate it;
// a 4096-entry, one-bit prediction table remembers where each evicted
// block lived and places it there again on its next miss; a 2-bit
// confidence state (CONF) ranks blocks by how often they proved read- or
// write-intensive, and on power failure the highest-ranked SRAM blocks are
// copied into STT-RAM before the supply drops, so that after power returns
// they hit without any restore step.
//
// Structure: hl1_ctrl (request, placement, migration and backup
// sequencing, with access_policy, way_select and backup_select inside),
// pred_table, and two cache_region arrays, SRAM (volatile) and STT-RAM
// (non-volatile). Defaults: 27-bit byte address (128 MB main memory),
// 32-bit words, 64-byte blocks, 16 KB over 2 SRAM + 2 STT-RAM ways
// (64 sets), L = 4096, threshold 7. The processor, the main memory and
// the supply monitor that raises pwr_fail are outside this module.
//
// Interfaces: a processor port that takes one word read or write at a
// time (req_valid/req_ready, then a resp_valid pulse), a block-wide main
// memory port (mem_req_valid/mem_req_ready, then a mem_resp_valid pulse,
// for reads and writes alike), the pwr_fail input with bk_busy / pwr_off
// status, and one-cycle event pulses for statistics.
module hybrid_l1_cache
  import hc_pkg::*;
#(
  parameter int unsigned ADDR_W      = 27,
  parameter int unsigned WORD_W      = 32,
  parameter int unsigned CACHE_BYTES = 16384,
  parameter int unsigned BLOCK_BYTES = 64,
  parameter int unsigned SRAM_WAYS   = 2,
  parameter int unsigned STT_WAYS    = 2,
  parameter int unsigned L           = 4096,
  parameter int unsigned THRESH      = THRESHOLD,
  // derived
  parameter int unsigned LINE_W      = BLOCK_BYTES * 8,
  parameter int unsigned SETS        = CACHE_BYTES / (BLOCK_BYTES * (SRAM_WAYS + STT_WAYS)),
  parameter int unsigned BA_W        = ADDR_W - $clog2(BLOCK_BYTES)
) (
  input  logic               clk,
  input  logic               rst_n,
  // processor
  input  logic               req_valid,
  output logic               req_ready,
  input  logic               req_we,
  input  logic [ADDR_W-1:0]  req_addr,
  input  logic [WORD_W-1:0]  req_wdata,
  output logic               resp_valid,
  output logic [WORD_W-1:0]  resp_rdata,
  // supply monitor
  input  logic               pwr_fail,
  output logic               bk_busy,
  output logic               pwr_off,
  // main memory
  output logic               mem_req_valid,
  input  logic               mem_req_ready,
  output logic               mem_req_we,
  output logic [BA_W-1:0]    mem_req_addr,
  output logic [LINE_W-1:0]  mem_req_wdata,
  input  logic               mem_resp_valid,
  input  logic [LINE_W-1:0]  mem_resp_rdata,
  // statistics
  output cache_events_t      ev
);

  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned TAG_W = ADDR_W - SET_W - $clog2(BLOCK_BYTES);
  localparam int unsigned PT_W  = $clog2(L);
  localparam int unsigned SW_W  = $clog2(SRAM_WAYS);
  localparam int unsigned TW_W  = $clog2(STT_WAYS);

  // prediction table
  logic [PT_W-1:0] pt_rd_idx, pt_wr_idx;
  logic            pt_rd_pr, pt_wr_en, pt_wr_pr;

  // SRAM region
  logic [SET_W-1:0]     s_rd_set, s_wr_set;
  logic [SRAM_WAYS-1:0] s_rd_valid, s_rd_dirty;
  meta_t                s_rd_meta [SRAM_WAYS];
  logic [TAG_W-1:0]     s_rd_tag  [SRAM_WAYS];
  logic [LINE_W-1:0]    s_rd_data [SRAM_WAYS];
  logic                 s_wr_en, s_wr_valid, s_wr_dirty, power_loss;
  logic [SW_W-1:0]      s_wr_way;
  meta_t                s_wr_meta;
  logic [TAG_W-1:0]     s_wr_tag;
  logic [LINE_W-1:0]    s_wr_data;

  // STT-RAM region (its power_loss input is ignored: VOLATILE = 0)
  logic [SET_W-1:0]    t_rd_set, t_wr_set;
  logic [STT_WAYS-1:0] t_rd_valid, t_rd_dirty;
  meta_t               t_rd_meta [STT_WAYS];
  logic [TAG_W-1:0]    t_rd_tag  [STT_WAYS];
  logic [LINE_W-1:0]   t_rd_data [STT_WAYS];
  logic                t_wr_en, t_wr_valid, t_wr_dirty;
  logic [TW_W-1:0]     t_wr_way;
  meta_t               t_wr_meta;
  logic [TAG_W-1:0]    t_wr_tag;
  logic [LINE_W-1:0]   t_wr_data;

  hl1_ctrl #(
    .ADDR_W (ADDR_W), .WORD_W (WORD_W), .LINE_W (LINE_W), .SETS (SETS),
    .SRAM_WAYS (SRAM_WAYS), .STT_WAYS (STT_WAYS), .L (L), .THRESH (THRESH)
  ) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .resp_valid, .resp_rdata,
    .pwr_fail, .bk_busy, .pwr_off,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .pt_rd_idx, .pt_rd_pr, .pt_wr_en, .pt_wr_idx, .pt_wr_pr,
    .s_rd_set, .s_rd_valid, .s_rd_dirty, .s_rd_meta, .s_rd_tag, .s_rd_data,
    .s_wr_en, .s_wr_set, .s_wr_way, .s_wr_valid, .s_wr_dirty, .s_wr_meta, .s_wr_tag,
    .s_wr_data,
    .t_rd_set, .t_rd_valid, .t_rd_dirty, .t_rd_meta, .t_rd_tag, .t_rd_data,
    .t_wr_en, .t_wr_set, .t_wr_way, .t_wr_valid, .t_wr_dirty, .t_wr_meta, .t_wr_tag,
    .t_wr_data, .power_loss,
    .ev
  );

  pred_table #(.L (L)) u_pt (
    .clk, .rst_n,
    .rd_idx (pt_rd_idx), .rd_pr (pt_rd_pr),
    .wr_en (pt_wr_en), .wr_idx (pt_wr_idx), .wr_pr (pt_wr_pr)
  );

  cache_region #(
    .SETS (SETS), .WAYS (SRAM_WAYS), .TAG_W (TAG_W), .LINE_W (LINE_W), .VOLATILE (1'b1)
  ) u_sram (
    .clk, .rst_n,
    .rd_set (s_rd_set), .rd_valid (s_rd_valid), .rd_dirty (s_rd_dirty),
    .rd_meta (s_rd_meta), .rd_tag (s_rd_tag), .rd_data (s_rd_data),
    .wr_en (s_wr_en), .wr_set (s_wr_set), .wr_way (s_wr_way), .wr_valid (s_wr_valid),
    .wr_dirty (s_wr_dirty), .wr_meta (s_wr_meta), .wr_tag (s_wr_tag), .wr_data (s_wr_data),
    .power_loss (power_loss)
  );

  cache_region #(
    .SETS (SETS), .WAYS (STT_WAYS), .TAG_W (TAG_W), .LINE_W (LINE_W), .VOLATILE (1'b0)
  ) u_stt (
    .clk, .rst_n,
    .rd_set (t_rd_set), .rd_valid (t_rd_valid), .rd_dirty (t_rd_dirty),
    .rd_meta (t_rd_meta), .rd_tag (t_rd_tag), .rd_data (t_rd_data),
    .wr_en (t_wr_en), .wr_set (t_wr_set), .wr_way (t_wr_way), .wr_valid (t_wr_valid),
    .wr_dirty (t_wr_dirty), .wr_meta (t_wr_meta), .wr_tag (t_wr_tag), .wr_data (t_wr_data),
    .power_loss (power_loss)
  );

endmodule
