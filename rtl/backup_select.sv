// backup_select: the decision of the power-failure backup policy for one
// step on one cache set.
//
// The SRAM contents are lost when power fails, so before the supply drops
// the important SRAM blocks are copied into the non-volatile STT-RAM ways
// of the same set. Importance is the confidence state CONF, served in the
// order 11 > 10 > 01 > 00. Each step takes the remaining valid SRAM block
// with the highest CONF (src_way) and the STT-RAM way of lowest priority
// that has not already received a block in this backup (dst_way): an empty
// way first, else the lowest CONF. The block moves into STT-RAM (move = 1)
// when that way is empty or its CONF is not higher than the SRAM block's,
// so at equal CONF the SRAM block wins, as in the worked example where a
// CONF-00 SRAM block displaces a CONF-00 STT-RAM block. Otherwise move = 0
// and the SRAM block is not kept in the cache (the controller writes it to
// main memory if dirty). The STT-RAM block displaced by a move likewise
// goes to main memory if dirty. The protection of ways already filled in
// this backup (stt_saved) and the lowest-index tie break are this design's
// choices.
//
// Purely combinational.
module backup_select
  import hc_pkg::*;
#(
  parameter int unsigned SRAM_WAYS = 2,
  parameter int unsigned STT_WAYS  = 2
) (
  input  logic [SRAM_WAYS-1:0]         sram_valid,
  input  meta_t                        sram_meta [SRAM_WAYS],
  input  logic [STT_WAYS-1:0]          stt_valid,
  input  meta_t                        stt_meta  [STT_WAYS],
  input  logic [STT_WAYS-1:0]          stt_saved,
  output logic                         src_found,
  output logic [$clog2(SRAM_WAYS)-1:0] src_way,
  output logic                         move,
  output logic [$clog2(STT_WAYS)-1:0]  dst_way
);

  logic [CONF_W-1:0] src_key [SRAM_WAYS];
  logic [CONF_W-1:0] dst_key [STT_WAYS];
  logic              dst_found;

  always_comb begin
    for (int w = 0; w < SRAM_WAYS; w++) src_key[w] = ~sram_meta[w].conf;
    for (int w = 0; w < STT_WAYS; w++)  dst_key[w] = stt_meta[w].conf;
  end

  // highest CONF among the valid SRAM blocks
  way_select #(.WAYS(SRAM_WAYS), .KEY_W(CONF_W)) u_src (
    .prefer ('0),
    .cand   (sram_valid),
    .key    (src_key),
    .found  (src_found),
    .way    (src_way)
  );

  // lowest-priority STT-RAM way not yet used by this backup
  way_select #(.WAYS(STT_WAYS), .KEY_W(CONF_W)) u_dst (
    .prefer (~stt_valid & ~stt_saved),
    .cand   (stt_valid & ~stt_saved),
    .key    (dst_key),
    .found  (dst_found),
    .way    (dst_way)
  );

  always_comb begin
    move = src_found && dst_found &&
           (!stt_valid[dst_way] || (stt_meta[dst_way].conf <= sram_meta[src_way].conf));
  end

endmodule
