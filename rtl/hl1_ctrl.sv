// hl1_ctrl: controller of the hybrid SRAM/STT-RAM L1 data cache.
//
// Every set has SRAM_WAYS SRAM ways and STT_WAYS STT-RAM ways (2 + 2 in
// the evaluated configuration). The controller serves one processor
// request at a time and applies the placement, migration and backup
// policies:
//
//  * Hit. The block's counters are updated by access_policy. If a read
//    makes an SRAM block read-intensive (RIC reaches 7) it migrates to
//    STT-RAM; if a write makes an STT-RAM block write-intensive (WIC
//    reaches 7) it migrates to SRAM. The migrating block takes an empty way
//    of the other region, else evicts the block with the lowest RIC
//    (STT-RAM) or lowest WIC (SRAM).
//  * Miss. The prediction table entry of the block (its previous region,
//    PR) selects the region: PR = 0 places it in STT-RAM, PR = 1 in SRAM,
//    evicting as above if the set's ways of that region are full. The
//    counters of the new block start from zero and then count this access.
//  * Replacement. The evicted block's PR entry is written with the region
//    it was evicted from (1 = SRAM, 0 = STT-RAM), and a dirty victim is
//    written back to main memory first.
//  * Power failure. While pwr_fail is high and no request is in flight,
//    every set is backed up: SRAM blocks are taken in CONF order
//    11 > 10 > 01 > 00 and each replaces the lowest-priority STT-RAM block
//    (backup_select); blocks that find no place, and displaced STT-RAM
//    blocks, are written to main memory if dirty. Saved blocks restart
//    with zeroed counters. Then the controller enters OFF: power_loss and
//    pwr_off are held high, the volatile SRAM region loses its contents,
//    and the controller waits for pwr_fail to fall. After power returns nothing is restored: the STT-RAM blocks
//    simply hit.
//
// Timing. A request is accepted when req_valid and req_ready are both high
// in the IDLE state. The next cycle compares tags (LOOKUP). The block
// transfers then take the technology latencies in cycles: SRAM read 1 /
// write 2, STT-RAM read 2 / write 10; a migration costs the source read
// plus the destination write. Main-memory traffic goes over the mem_*
// handshake and takes whatever the memory takes (35 / 100 cycles for the
// phase-change memory of the evaluated system). resp_valid is a one-cycle
// pulse with the addressed word; for a hit it comes 1 + latency cycles
// after acceptance. During a backup, each block moved into STT-RAM costs
// an SRAM read plus an STT-RAM write.
//
// Departures and choices of this design: the tag compare cycle, the order
// (write-back, then fill, then array write), the rule that the PR entry
// records the region the victim leaves (the overview and the worked example
// say so; the table description instead derives PR from WIC > RIC), and
// that a request arriving during pwr_fail waits until power returns. The
// bookkeeping fields are updated in the same cycle as the data and are not
// counted as extra STT-RAM writes.
module hl1_ctrl
  import hc_pkg::*;
#(
  parameter int unsigned ADDR_W    = 27,
  parameter int unsigned WORD_W    = 32,
  parameter int unsigned LINE_W    = 512,
  parameter int unsigned SETS      = 64,
  parameter int unsigned SRAM_WAYS = 2,
  parameter int unsigned STT_WAYS  = 2,
  parameter int unsigned L         = 4096,
  parameter int unsigned THRESH    = THRESHOLD,
  parameter int unsigned SRAM_RD   = SRAM_RD_LAT,
  parameter int unsigned SRAM_WR   = SRAM_WR_LAT,
  parameter int unsigned STT_RD    = STT_RD_LAT,
  parameter int unsigned STT_WR    = STT_WR_LAT,
  // derived
  parameter int unsigned OFF_W     = $clog2(LINE_W/8),
  parameter int unsigned SET_W     = $clog2(SETS),
  parameter int unsigned TAG_W     = ADDR_W - SET_W - OFF_W,
  parameter int unsigned BA_W      = ADDR_W - OFF_W,
  parameter int unsigned PT_W      = $clog2(L),
  parameter int unsigned SW_W      = $clog2(SRAM_WAYS),
  parameter int unsigned TW_W      = $clog2(STT_WAYS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // processor request / response
  input  logic                 req_valid,
  output logic                 req_ready,
  input  logic                 req_we,
  input  logic [ADDR_W-1:0]    req_addr,
  input  logic [WORD_W-1:0]    req_wdata,
  output logic                 resp_valid,
  output logic [WORD_W-1:0]    resp_rdata,
  // power supply monitor
  input  logic                 pwr_fail,
  output logic                 bk_busy,
  output logic                 pwr_off,
  // main memory, one block per request
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output logic [BA_W-1:0]      mem_req_addr,
  output logic [LINE_W-1:0]    mem_req_wdata,
  input  logic                 mem_resp_valid,
  input  logic [LINE_W-1:0]    mem_resp_rdata,
  // prediction table
  output logic [PT_W-1:0]      pt_rd_idx,
  input  logic                 pt_rd_pr,
  output logic                 pt_wr_en,
  output logic [PT_W-1:0]      pt_wr_idx,
  output logic                 pt_wr_pr,
  // SRAM region
  output logic [SET_W-1:0]     s_rd_set,
  input  logic [SRAM_WAYS-1:0] s_rd_valid,
  input  logic [SRAM_WAYS-1:0] s_rd_dirty,
  input  meta_t                s_rd_meta [SRAM_WAYS],
  input  logic [TAG_W-1:0]     s_rd_tag  [SRAM_WAYS],
  input  logic [LINE_W-1:0]    s_rd_data [SRAM_WAYS],
  output logic                 s_wr_en,
  output logic [SET_W-1:0]     s_wr_set,
  output logic [SW_W-1:0]      s_wr_way,
  output logic                 s_wr_valid,
  output logic                 s_wr_dirty,
  output meta_t                s_wr_meta,
  output logic [TAG_W-1:0]     s_wr_tag,
  output logic [LINE_W-1:0]    s_wr_data,
  // STT-RAM region
  output logic [SET_W-1:0]     t_rd_set,
  input  logic [STT_WAYS-1:0]  t_rd_valid,
  input  logic [STT_WAYS-1:0]  t_rd_dirty,
  input  meta_t                t_rd_meta [STT_WAYS],
  input  logic [TAG_W-1:0]     t_rd_tag  [STT_WAYS],
  input  logic [LINE_W-1:0]    t_rd_data [STT_WAYS],
  output logic                 t_wr_en,
  output logic [SET_W-1:0]     t_wr_set,
  output logic [TW_W-1:0]      t_wr_way,
  output logic                 t_wr_valid,
  output logic                 t_wr_dirty,
  output meta_t                t_wr_meta,
  output logic [TAG_W-1:0]     t_wr_tag,
  output logic [LINE_W-1:0]    t_wr_data,
  // supply removed: the volatile (SRAM) region loses its contents
  output logic                 power_loss,
  // event pulses
  output cache_events_t        ev
);

  localparam int unsigned WIDX_W = $clog2(LINE_W/WORD_W);
  localparam int unsigned WOFF_W = $clog2(WORD_W/8);
  localparam int unsigned LAT_W  = 8;
  localparam int unsigned WAY_W  = (SW_W > TW_W) ? SW_W : TW_W;

  typedef enum logic [3:0] {
    ST_IDLE, ST_LOOKUP, ST_WB_REQ, ST_WB_WAIT, ST_FILL_REQ, ST_FILL_WAIT,
    ST_ARRAY, ST_BK_SCAN, ST_BK_WB_REQ, ST_BK_WB_WAIT, ST_BK_ARRAY, ST_OFF
  } state_e;

  typedef enum logic [1:0] {K_HIT, K_MIG, K_MISS} kind_e;

  state_e state_q;

  // latched request
  logic               q_we;
  logic [ADDR_W-1:0]  q_addr;
  logic [WORD_W-1:0]  q_wdata;
  logic [SET_W-1:0]   q_set;
  logic [TAG_W-1:0]   q_tag;
  logic [WIDX_W-1:0]  q_word;
  logic [BA_W-1:0]    q_blk;

  assign q_blk  = q_addr[ADDR_W-1:OFF_W];
  assign q_set  = q_addr[OFF_W +: SET_W];
  assign q_tag  = q_addr[ADDR_W-1 -: TAG_W];
  assign q_word = q_addr[WOFF_W +: WIDX_W];

  // plan of the current operation, fixed in LOOKUP
  kind_e              p_kind;
  region_e            p_dst_reg;
  logic [WAY_W-1:0] p_dst_way;
  logic [WAY_W-1:0] p_src_way;
  meta_t              p_meta;
  logic               p_dirty;
  logic               p_conf;
  logic [LINE_W-1:0]  line_q;
  logic [BA_W-1:0]    wb_addr_q;
  logic [LINE_W-1:0]  wb_data_q;
  logic [LAT_W-1:0]   cnt_q;

  // backup bookkeeping
  logic [SET_W-1:0]    bk_set_q;
  logic [STT_WAYS-1:0] bk_saved_q;
  logic                bk_move_q;
  logic [SW_W-1:0]     bk_src_q;
  logic [TW_W-1:0]     bk_dst_q;
  logic [TAG_W-1:0]    bk_tag_q;
  logic                bk_dirty_q;

  // ---------------------------------------------------------------- lookup
  logic [SRAM_WAYS-1:0] s_hit_vec;
  logic [STT_WAYS-1:0]  t_hit_vec;
  logic                 hit_s, hit_t, hit;
  logic [SW_W-1:0]      s_hit_way;
  logic [TW_W-1:0]      t_hit_way;
  region_e              hit_reg;
  meta_t                hit_meta;
  logic                 hit_dirty;
  logic [LINE_W-1:0]    hit_data;

  always_comb begin
    s_hit_way = '0;
    t_hit_way = '0;
    for (int w = 0; w < SRAM_WAYS; w++) begin
      s_hit_vec[w] = s_rd_valid[w] && (s_rd_tag[w] == q_tag);
      if (s_hit_vec[w]) s_hit_way = w[SW_W-1:0];
    end
    for (int w = 0; w < STT_WAYS; w++) begin
      t_hit_vec[w] = t_rd_valid[w] && (t_rd_tag[w] == q_tag);
      if (t_hit_vec[w]) t_hit_way = w[TW_W-1:0];
    end
    hit_s     = |s_hit_vec;
    hit_t     = |t_hit_vec;
    hit       = hit_s || hit_t;
    hit_reg   = hit_s ? REG_SRAM : REG_STT;
    hit_meta  = hit_s ? s_rd_meta[s_hit_way]  : t_rd_meta[t_hit_way];
    hit_dirty = hit_s ? s_rd_dirty[s_hit_way] : t_rd_dirty[t_hit_way];
    hit_data  = hit_s ? s_rd_data[s_hit_way]  : t_rd_data[t_hit_way];
  end

  // counter / confidence policy for a hit, and for the access after a fill
  meta_t pol_meta, fill_meta;
  logic  pol_mig, pol_conf, fill_mig_unused, fill_conf;

  access_policy #(.THRESH(THRESH)) u_pol_hit (
    .meta_in (hit_meta), .is_write (q_we), .region (hit_reg), .allow_mig (1'b1),
    .meta_out (pol_meta), .migrate (pol_mig), .conf_event (pol_conf)
  );

  access_policy #(.THRESH(THRESH)) u_pol_fill (
    .meta_in (META_ZERO), .is_write (q_we), .region (p_dst_reg), .allow_mig (1'b0),
    .meta_out (fill_meta), .migrate (fill_mig_unused), .conf_event (fill_conf)
  );

  // replacement candidates: empty way first, else lowest WIC / lowest RIC
  logic [CNT_W-1:0] s_key [SRAM_WAYS];
  logic [CNT_W-1:0] t_key [STT_WAYS];
  logic             s_vic_found, t_vic_found;
  logic [SW_W-1:0]  s_vic;
  logic [TW_W-1:0]  t_vic;

  always_comb begin
    for (int w = 0; w < SRAM_WAYS; w++) s_key[w] = s_rd_meta[w].wic;
    for (int w = 0; w < STT_WAYS; w++)  t_key[w] = t_rd_meta[w].ric;
  end

  way_select #(.WAYS(SRAM_WAYS), .KEY_W(CNT_W)) u_s_vic (
    .prefer (~s_rd_valid), .cand (s_rd_valid), .key (s_key),
    .found (s_vic_found), .way (s_vic)
  );

  way_select #(.WAYS(STT_WAYS), .KEY_W(CNT_W)) u_t_vic (
    .prefer (~t_rd_valid), .cand (t_rd_valid), .key (t_key),
    .found (t_vic_found), .way (t_vic)
  );

  // destination region and victim for a migration or a miss
  region_e          dst_reg;
  logic             vic_valid, vic_dirty;
  logic [TAG_W-1:0] vic_tag;
  logic [BA_W-1:0]  vic_blk;
  logic [LINE_W-1:0] vic_data;
  logic [WAY_W-1:0] vic_way;
  logic [LAT_W-1:0] hit_lat, mig_lat, fill_lat;

  function automatic logic [LAT_W-1:0] rd_lat(region_e r);
    return (r == REG_SRAM) ? LAT_W'(SRAM_RD) : LAT_W'(STT_RD);
  endfunction

  function automatic logic [LAT_W-1:0] wr_lat(region_e r);
    return (r == REG_SRAM) ? LAT_W'(SRAM_WR) : LAT_W'(STT_WR);
  endfunction

  always_comb begin
    if (hit) dst_reg = (hit_reg == REG_SRAM) ? REG_STT : REG_SRAM;
    else     dst_reg = pt_rd_pr ? REG_SRAM : REG_STT;
    if (dst_reg == REG_SRAM) begin
      vic_way   = WAY_W'(s_vic);
      vic_valid = s_vic_found && s_rd_valid[s_vic];
      vic_dirty = s_rd_dirty[s_vic];
      vic_tag   = s_rd_tag[s_vic];
      vic_data  = s_rd_data[s_vic];
    end else begin
      vic_way   = WAY_W'(t_vic);
      vic_valid = t_vic_found && t_rd_valid[t_vic];
      vic_dirty = t_rd_dirty[t_vic];
      vic_tag   = t_rd_tag[t_vic];
      vic_data  = t_rd_data[t_vic];
    end
    vic_blk  = {vic_tag, q_set};
    hit_lat  = q_we ? wr_lat(hit_reg) : rd_lat(hit_reg);
    mig_lat  = rd_lat(hit_reg) + wr_lat(dst_reg);
    fill_lat = wr_lat(dst_reg);
  end

  logic do_replace;
  assign do_replace = (state_q == ST_LOOKUP) && (!hit || pol_mig) && vic_valid;

  // ---------------------------------------------------------------- backup
  logic            bk_src_found, bk_move;
  logic [SW_W-1:0] bk_src_way;
  logic [TW_W-1:0] bk_dst_way;

  backup_select #(.SRAM_WAYS(SRAM_WAYS), .STT_WAYS(STT_WAYS)) u_bk (
    .sram_valid (s_rd_valid), .sram_meta (s_rd_meta),
    .stt_valid  (t_rd_valid), .stt_meta  (t_rd_meta),
    .stt_saved  (bk_saved_q),
    .src_found  (bk_src_found), .src_way (bk_src_way),
    .move       (bk_move), .dst_way (bk_dst_way)
  );

  // ---------------------------------------------------------------- state
  logic commit;
  assign commit = (cnt_q <= LAT_W'(1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= ST_IDLE;
      q_we       <= 1'b0;
      q_addr     <= '0;
      q_wdata    <= '0;
      p_kind     <= K_HIT;
      p_dst_reg  <= REG_SRAM;
      p_dst_way  <= '0;
      p_src_way  <= '0;
      p_meta     <= META_ZERO;
      p_dirty    <= 1'b0;
      p_conf     <= 1'b0;
      line_q     <= '0;
      wb_addr_q  <= '0;
      wb_data_q  <= '0;
      cnt_q      <= '0;
      bk_set_q   <= '0;
      bk_saved_q <= '0;
      bk_move_q  <= 1'b0;
      bk_src_q   <= '0;
      bk_dst_q   <= '0;
      bk_tag_q   <= '0;
      bk_dirty_q <= 1'b0;
    end else begin
      unique case (state_q)
        ST_IDLE: begin
          if (pwr_fail) begin
            state_q    <= ST_BK_SCAN;
            bk_set_q   <= '0;
            bk_saved_q <= '0;
          end else if (req_valid) begin
            state_q <= ST_LOOKUP;
            q_we    <= req_we;
            q_addr  <= req_addr;
            q_wdata <= req_wdata;
          end
        end

        ST_LOOKUP: begin
          p_dst_reg <= hit && !pol_mig ? hit_reg : dst_reg;
          p_src_way <= hit_s ? WAY_W'(s_hit_way) : WAY_W'(t_hit_way);
          wb_addr_q <= vic_blk;
          wb_data_q <= vic_data;
          line_q    <= hit_data;
          if (hit && !pol_mig) begin
            p_kind    <= K_HIT;
            p_dst_way <= hit_s ? WAY_W'(s_hit_way) : WAY_W'(t_hit_way);
            p_meta    <= pol_meta;
            p_dirty   <= hit_dirty | q_we;
            p_conf    <= pol_conf;
            cnt_q     <= hit_lat;
            state_q   <= ST_ARRAY;
          end else begin
            p_kind    <= hit ? K_MIG : K_MISS;
            p_dst_way <= vic_way;
            p_meta    <= META_ZERO;
            p_dirty   <= (hit && hit_dirty) | q_we;
            p_conf    <= 1'b0;
            cnt_q     <= hit ? mig_lat : fill_lat;
            if (vic_valid && vic_dirty) state_q <= ST_WB_REQ;
            else if (!hit)              state_q <= ST_FILL_REQ;
            else                        state_q <= ST_ARRAY;
          end
        end

        ST_WB_REQ:  if (mem_req_ready) state_q <= ST_WB_WAIT;
        ST_WB_WAIT: if (mem_resp_valid) state_q <= (p_kind == K_MISS) ? ST_FILL_REQ : ST_ARRAY;

        ST_FILL_REQ: if (mem_req_ready) state_q <= ST_FILL_WAIT;
        ST_FILL_WAIT: begin
          if (mem_resp_valid) begin
            line_q  <= mem_resp_rdata;
            p_meta  <= fill_meta;
            p_conf  <= fill_conf;
            state_q <= ST_ARRAY;
          end
        end

        ST_ARRAY: begin
          if (commit) state_q <= ST_IDLE;
          else        cnt_q   <= cnt_q - 1'b1;
        end

        ST_BK_SCAN: begin
          if (!bk_src_found) begin
            bk_saved_q <= '0;
            if (bk_set_q == SET_W'(SETS-1)) state_q <= ST_OFF;
            else bk_set_q <= bk_set_q + 1'b1;
          end else begin
            bk_move_q  <= bk_move;
            bk_src_q   <= bk_src_way;
            bk_dst_q   <= bk_dst_way;
            bk_tag_q   <= s_rd_tag[bk_src_way];
            bk_dirty_q <= s_rd_dirty[bk_src_way];
            line_q     <= s_rd_data[bk_src_way];
            if (bk_move) begin
              cnt_q     <= LAT_W'(SRAM_RD) + LAT_W'(STT_WR);
              wb_addr_q <= {t_rd_tag[bk_dst_way], bk_set_q};
              wb_data_q <= t_rd_data[bk_dst_way];
              if (t_rd_valid[bk_dst_way] && t_rd_dirty[bk_dst_way]) state_q <= ST_BK_WB_REQ;
              else                                                  state_q <= ST_BK_ARRAY;
            end else begin
              cnt_q     <= LAT_W'(SRAM_RD);
              wb_addr_q <= {s_rd_tag[bk_src_way], bk_set_q};
              wb_data_q <= s_rd_data[bk_src_way];
              if (s_rd_dirty[bk_src_way]) state_q <= ST_BK_WB_REQ;
              else                        state_q <= ST_BK_ARRAY;
            end
          end
        end

        ST_BK_WB_REQ:  if (mem_req_ready) state_q <= ST_BK_WB_WAIT;
        ST_BK_WB_WAIT: if (mem_resp_valid) state_q <= ST_BK_ARRAY;

        ST_BK_ARRAY: begin
          if (commit) begin
            state_q <= ST_BK_SCAN;
            if (bk_move_q) bk_saved_q[bk_dst_q] <= 1'b1;
          end else begin
            cnt_q <= cnt_q - 1'b1;
          end
        end

        ST_OFF: if (!pwr_fail) state_q <= ST_IDLE;

        default: state_q <= ST_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- outputs
  logic [LINE_W-1:0] merged;

  always_comb begin
    merged = line_q;
    if (q_we) merged[q_word*WORD_W +: WORD_W] = q_wdata;
  end

  assign req_ready    = (state_q == ST_IDLE) && !pwr_fail;
  assign resp_valid   = (state_q == ST_ARRAY) && commit;
  assign resp_rdata   = merged[q_word*WORD_W +: WORD_W];
  assign bk_busy      = state_q inside {ST_BK_SCAN, ST_BK_WB_REQ, ST_BK_WB_WAIT, ST_BK_ARRAY};
  assign pwr_off      = (state_q == ST_OFF);
  assign power_loss   = (state_q == ST_OFF);

  // both regions always look at the same set
  assign s_rd_set = bk_busy ? bk_set_q : q_set;
  assign t_rd_set = s_rd_set;

  assign pt_rd_idx = q_blk[PT_W-1:0];
  assign pt_wr_en  = do_replace;
  assign pt_wr_idx = vic_blk[PT_W-1:0];
  assign pt_wr_pr  = (dst_reg == REG_SRAM);

  always_comb begin
    mem_req_valid = 1'b0;
    mem_req_we    = 1'b0;
    mem_req_addr  = wb_addr_q;
    mem_req_wdata = wb_data_q;
    unique case (state_q)
      ST_WB_REQ, ST_BK_WB_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_we    = 1'b1;
      end
      ST_FILL_REQ: begin
        mem_req_valid = 1'b1;
        mem_req_addr  = q_blk;
      end
      default: ;
    endcase
  end

  // array writes
  logic arr_commit, bk_commit;
  assign arr_commit = (state_q == ST_ARRAY) && commit;
  assign bk_commit  = (state_q == ST_BK_ARRAY) && commit;

  always_comb begin
    s_wr_en    = 1'b0;
    s_wr_set   = q_set;
    s_wr_way   = p_dst_way[SW_W-1:0];
    s_wr_valid = 1'b1;
    s_wr_dirty = p_dirty;
    s_wr_meta  = p_meta;
    s_wr_tag   = q_tag;
    s_wr_data  = merged;
    t_wr_en    = 1'b0;
    t_wr_set   = q_set;
    t_wr_way   = p_dst_way[TW_W-1:0];
    t_wr_valid = 1'b1;
    t_wr_dirty = p_dirty;
    t_wr_meta  = p_meta;
    t_wr_tag   = q_tag;
    t_wr_data  = merged;
    if (arr_commit) begin
      if (p_dst_reg == REG_SRAM) s_wr_en = 1'b1;
      else                       t_wr_en = 1'b1;
      if (p_kind == K_MIG) begin
        // the source way of a migration is in the other region: free it
        if (p_dst_reg == REG_SRAM) begin
          t_wr_en    = 1'b1;
          t_wr_way   = p_src_way[TW_W-1:0];
          t_wr_valid = 1'b0;
        end else begin
          s_wr_en    = 1'b1;
          s_wr_way   = p_src_way[SW_W-1:0];
          s_wr_valid = 1'b0;
        end
      end
    end else if (bk_commit) begin
      // the SRAM block leaves SRAM in any case
      s_wr_en    = 1'b1;
      s_wr_set   = bk_set_q;
      s_wr_way   = bk_src_q;
      s_wr_valid = 1'b0;
      if (bk_move_q) begin
        t_wr_en    = 1'b1;
        t_wr_set   = bk_set_q;
        t_wr_way   = bk_dst_q;
        t_wr_dirty = bk_dirty_q;
        t_wr_meta  = META_ZERO;
        t_wr_tag   = bk_tag_q;
        t_wr_data  = line_q;
      end
    end
  end

  // event pulses
  always_comb begin
    ev = '0;
    ev.hit         = (state_q == ST_LOOKUP) && hit;
    ev.miss        = (state_q == ST_LOOKUP) && !hit;
    ev.replace     = do_replace;
    ev.pr_update   = pt_wr_en;
    ev.pcm_read    = (state_q == ST_FILL_REQ) && mem_req_ready;
    ev.pcm_write   = mem_req_valid && mem_req_we && mem_req_ready;
    ev.bk_to_pcm   = (state_q == ST_BK_WB_REQ) && mem_req_ready;
    ev.bk_cycle    = bk_busy;
    ev.bk_to_stt   = bk_commit && bk_move_q;
    ev.bk_dropped  = bk_commit && !bk_move_q && !bk_dirty_q;
    ev.sram_write  = s_wr_en && s_wr_valid;
    ev.stt_write   = t_wr_en && t_wr_valid;
    if (arr_commit) begin
      ev.sram_read   = (p_kind == K_HIT && p_dst_reg == REG_SRAM && !q_we) ||
                       (p_kind == K_MIG && p_dst_reg == REG_STT);
      ev.stt_read    = (p_kind == K_HIT && p_dst_reg == REG_STT && !q_we) ||
                       (p_kind == K_MIG && p_dst_reg == REG_SRAM);
      ev.mig_to_stt  = (p_kind == K_MIG) && (p_dst_reg == REG_STT);
      ev.mig_to_sram = (p_kind == K_MIG) && (p_dst_reg == REG_SRAM);
      ev.conf_inc    = p_conf;
    end
    if (bk_commit && bk_move_q) ev.sram_read = 1'b1;
  end

  // a memory response only ever answers an outstanding request
  a_mem_resp: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> state_q inside {ST_WB_WAIT, ST_FILL_WAIT, ST_BK_WB_WAIT})
    else $error("memory response without an outstanding request");

  // a block never sits in both regions of a set
  a_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == ST_LOOKUP) |-> !(hit_s && hit_t))
    else $error("block resident in both regions");

endmodule
