// tb_hl1_ctrl: replays the worked example of the placement, migration and
// backup policies on one cache set and checks the controller against it.
//
// The testbench models the two block arrays, the prediction table and the
// main memory itself, so that it can start from the example's initial
// state: SRAM holds blocks a and c, STT-RAM holds b and d, every counter is
// zero, and the prediction table says that c last lived in SRAM (PR = 1)
// and e in STT-RAM (PR = 0). It then issues the example's accesses and, at
// each of the example's checkpoints, compares the position (region, way)
// and the [RIC, WIC, CONF] triple of the blocks with the values the example
// lists. The one departure: the example's first write after checkpoint A is
// labelled as a write to a, but the listed counters (b's WIC is 2 at B, a's
// WIC stays 0) show it is a write to b, which is what is issued here.
// Latencies are checked too: 1 cycle of tag compare plus SRAM read 1,
// STT-RAM write 10, a migration's STT-RAM read 2 + SRAM write 2, and a miss
// with a 35-cycle memory read followed by a 10-cycle STT-RAM write.
module tb_hl1_ctrl;
  import hc_pkg::*;

  localparam int unsigned ADDR_W = 27;
  localparam int unsigned WORD_W = 32;
  localparam int unsigned LINE_W = 512;
  localparam int unsigned SETS   = 2;
  localparam int unsigned L      = 16;
  localparam int unsigned SET_W  = 1;
  localparam int unsigned TAG_W  = ADDR_W - SET_W - 6;
  localparam int unsigned BA_W   = ADDR_W - 6;
  localparam int unsigned PT_W   = 4;

  // block names of the example -> tags (all in set 0)
  localparam logic [TAG_W-1:0] TA = 1, TB = 2, TC = 3, TD = 4, TE = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic              req_valid, req_ready, req_we, resp_valid;
  logic [ADDR_W-1:0] req_addr;
  logic [WORD_W-1:0] req_wdata, resp_rdata;
  logic              pwr_fail, bk_busy, pwr_off;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [BA_W-1:0]   mem_req_addr;
  logic [LINE_W-1:0] mem_req_wdata, mem_resp_rdata;
  logic [PT_W-1:0]   pt_rd_idx, pt_wr_idx;
  logic              pt_rd_pr, pt_wr_en, pt_wr_pr;
  logic [SET_W-1:0]  s_rd_set, s_wr_set, t_rd_set, t_wr_set;
  logic [1:0]        s_rd_valid, s_rd_dirty, t_rd_valid, t_rd_dirty;
  meta_t             s_rd_meta [2], t_rd_meta [2];
  logic [TAG_W-1:0]  s_rd_tag [2], t_rd_tag [2];
  logic [LINE_W-1:0] s_rd_data [2], t_rd_data [2];
  logic              s_wr_en, s_wr_valid, s_wr_dirty, power_loss;
  logic              t_wr_en, t_wr_valid, t_wr_dirty;
  logic              s_wr_way, t_wr_way;
  meta_t             s_wr_meta, t_wr_meta;
  logic [TAG_W-1:0]  s_wr_tag, t_wr_tag;
  logic [LINE_W-1:0] s_wr_data, t_wr_data;
  cache_events_t     ev;

  hl1_ctrl #(.ADDR_W(ADDR_W), .WORD_W(WORD_W), .LINE_W(LINE_W), .SETS(SETS),
             .SRAM_WAYS(2), .STT_WAYS(2), .L(L)) dut (.*);

  // ------------------------------------------------------------ array model
  logic              sv [SETS][2], sd [SETS][2], tv [SETS][2], td [SETS][2];
  meta_t             sm [SETS][2], tm [SETS][2];
  logic [TAG_W-1:0]  stg [SETS][2], ttg [SETS][2];
  logic [LINE_W-1:0] sdat [SETS][2], tdat [SETS][2];
  logic [L-1:0]      pr;

  always_comb begin
    for (int w = 0; w < 2; w++) begin
      s_rd_valid[w] = sv[s_rd_set][w];  s_rd_dirty[w] = sd[s_rd_set][w];
      s_rd_meta[w]  = sm[s_rd_set][w];  s_rd_tag[w]   = stg[s_rd_set][w];
      s_rd_data[w]  = sdat[s_rd_set][w];
      t_rd_valid[w] = tv[t_rd_set][w];  t_rd_dirty[w] = td[t_rd_set][w];
      t_rd_meta[w]  = tm[t_rd_set][w];  t_rd_tag[w]   = ttg[t_rd_set][w];
      t_rd_data[w]  = tdat[t_rd_set][w];
    end
  end
  assign pt_rd_pr = pr[pt_rd_idx];

  function automatic logic [PT_W-1:0] pidx(logic [TAG_W-1:0] t);
    return PT_W'({t, 1'b0});
  endfunction

  // reset state = initial state of the worked example
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < 2; w++) begin
          sv[s][w] <= 1'b0; tv[s][w] <= 1'b0; sd[s][w] <= 1'b0; td[s][w] <= 1'b0;
          sm[s][w] <= META_ZERO; tm[s][w] <= META_ZERO;
          stg[s][w] <= '0; ttg[s][w] <= '0; sdat[s][w] <= '0; tdat[s][w] <= '0;
        end
      sv[0][0] <= 1'b1; stg[0][0] <= TA; sdat[0][0] <= {16{32'hA000_0000}};
      sv[0][1] <= 1'b1; stg[0][1] <= TC; sdat[0][1] <= {16{32'hC000_0000}};
      tv[0][0] <= 1'b1; ttg[0][0] <= TB; tdat[0][0] <= {16{32'hB000_0000}};
      tv[0][1] <= 1'b1; ttg[0][1] <= TD; tdat[0][1] <= {16{32'hD000_0000}};
      pr <= '1;
      pr[pidx(TE)] <= 1'b0;
    end else begin
      if (power_loss) begin
        for (int s = 0; s < SETS; s++) begin sv[s][0] <= 1'b0; sv[s][1] <= 1'b0; end
      end else if (s_wr_en) begin
        sv[s_wr_set][s_wr_way] <= s_wr_valid; sd[s_wr_set][s_wr_way] <= s_wr_dirty;
        sm[s_wr_set][s_wr_way] <= s_wr_meta;  stg[s_wr_set][s_wr_way] <= s_wr_tag;
        sdat[s_wr_set][s_wr_way] <= s_wr_data;
      end
      if (t_wr_en) begin
        tv[t_wr_set][t_wr_way] <= t_wr_valid; td[t_wr_set][t_wr_way] <= t_wr_dirty;
        tm[t_wr_set][t_wr_way] <= t_wr_meta;  ttg[t_wr_set][t_wr_way] <= t_wr_tag;
        tdat[t_wr_set][t_wr_way] <= t_wr_data;
      end
      if (pt_wr_en) pr[pt_wr_idx] <= pt_wr_pr;
    end
  end

  // ------------------------------------------------------------ memory model
  int           mem_cnt;
  logic         mem_busy, mem_we_q;
  int           mem_reads = 0, mem_writes = 0;
  logic [BA_W-1:0] last_wr_addr;
  assign mem_req_ready = !mem_busy;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem_busy <= 1'b0; mem_cnt <= 0; mem_resp_valid <= 1'b0; mem_we_q <= 1'b0;
      mem_resp_rdata <= '0; last_wr_addr <= '0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (mem_req_valid && mem_req_ready) begin
        mem_busy <= 1'b1;
        mem_we_q <= mem_req_we;
        mem_cnt  <= mem_req_we ? 100 - 1 : 35 - 1;
        mem_resp_rdata <= {16{5'b0, mem_req_addr}};
        if (mem_req_we) begin mem_writes <= mem_writes + 1; last_wr_addr <= mem_req_addr; end
        else mem_reads <= mem_reads + 1;
      end else if (mem_busy) begin
        if (mem_cnt <= 1) begin mem_busy <= 1'b0; mem_resp_valid <= 1'b1; end
        mem_cnt <= mem_cnt - 1;
      end
    end
  end

  // ------------------------------------------------------------ helpers
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int last_lat;
  logic [WORD_W-1:0] last_rdata;

  task automatic access(input bit we, input logic [TAG_W-1:0] tag, input logic [WORD_W-1:0] wdata);
    int t0;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_addr = {tag, 1'b0, 6'd0}; req_wdata = wdata;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    t0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    last_lat = cyc - t0;
    last_rdata = resp_rdata;
    @(negedge clk);  // let the commit edge pass
  endtask

  task automatic rd(input logic [TAG_W-1:0] tag, input int n);
    for (int i = 0; i < n; i++) access(1'b0, tag, '0);
  endtask

  task automatic wr(input logic [TAG_W-1:0] tag, input int n);
    for (int i = 0; i < n; i++) access(1'b1, tag, {tag, 12'(i)});
  endtask

  // find a block in set 0: region 1 = SRAM, 0 = STT-RAM
  task automatic expect_blk(input string nm, input logic [TAG_W-1:0] tag, input bit in_sram,
                            input int way, input int ric, input int wic, input int conf);
    meta_t m;
    bit    v;
    logic [TAG_W-1:0] tg;
    v  = in_sram ? sv[0][way]  : tv[0][way];
    tg = in_sram ? stg[0][way] : ttg[0][way];
    m  = in_sram ? sm[0][way]  : tm[0][way];
    chk(v && tg == tag, $sformatf("%s not at %s way %0d", nm, in_sram ? "SRAM" : "STT", way));
    chk(m.ric == 3'(ric) && m.wic == 3'(wic) && m.conf == 2'(conf),
        $sformatf("%s counters [%0d,%0d,%0d] expected [%0d,%0d,%0d]", nm, m.ric, m.wic, m.conf,
                  ric, wic, conf));
  endtask

  function automatic bit present(input logic [TAG_W-1:0] tag);
    return (sv[0][0] && stg[0][0] == tag) || (sv[0][1] && stg[0][1] == tag) ||
           (tv[0][0] && ttg[0][0] == tag) || (tv[0][1] && ttg[0][1] == tag);
  endfunction

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ scenario
  int r0, w0;
  initial begin
    req_valid = 1'b0; req_we = 1'b0; req_addr = '0; req_wdata = '0; pwr_fail = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // A: two reads of a (SRAM read hit: 1 + 1 cycles)
    rd(TA, 2);
    chk(last_lat == 1 + SRAM_RD_LAT, $sformatf("SRAM read hit latency %0d", last_lat));
    chk(last_rdata == 32'hA000_0000, "read data of a");
    expect_blk("a@A", TA, 1, 0, 2, 0, 0);

    // B: two writes of b (STT-RAM write hit: 1 + 10 cycles)
    wr(TB, 2);
    chk(last_lat == 1 + STT_WR_LAT, $sformatf("STT-RAM write hit latency %0d", last_lat));
    expect_blk("b@B", TB, 0, 0, 0, 2, 0);

    // C: rd a, rd c, wr a
    rd(TA, 1); rd(TC, 1); wr(TA, 1);
    expect_blk("a@C", TA, 1, 0, 3, 1, 0);
    expect_blk("c@C", TC, 1, 1, 1, 0, 0);

    // D: five writes of b; the fifth makes WIC 7 and b moves to SRAM, evicting c
    wr(TB, 4);
    expect_blk("b@D-1", TB, 0, 0, 0, 6, 0);
    wr(TB, 1);
    chk(last_lat == 1 + STT_RD_LAT + SRAM_WR_LAT, $sformatf("migration latency %0d", last_lat));
    expect_blk("b@D", TB, 1, 1, 0, 0, 0);
    expect_blk("a@D", TA, 1, 0, 3, 1, 0);
    expect_blk("d@D", TD, 0, 1, 0, 0, 0);
    chk(!tv[0][0], "STT-RAM way 0 empty after D");
    chk(!present(TC), "c evicted at D");
    chk(pr[pidx(TC)] == 1'b1, "PR of c records SRAM");

    // E: two writes of b, four reads of a; a becomes read-intensive and moves
    wr(TB, 2);
    rd(TA, 4);
    expect_blk("a@E", TA, 0, 0, 0, 0, 0);
    expect_blk("b@E", TB, 1, 1, 0, 2, 0);
    chk(!sv[0][0], "SRAM way 0 empty after E");

    // F: four reads of a in STT-RAM (read hit: 1 + 2 cycles)
    rd(TA, 4);
    chk(last_lat == 1 + STT_RD_LAT, $sformatf("STT-RAM read hit latency %0d", last_lat));
    expect_blk("a@F", TA, 0, 0, 4, 0, 0);

    // G: c misses, PR = 1 places it in SRAM; seven writes raise CONF to 01
    r0 = mem_reads;
    wr(TC, 1);
    chk(mem_reads == r0 + 1, "c fetched from memory");
    chk(last_lat == 2 + 35 + SRAM_WR_LAT, $sformatf("miss latency into SRAM %0d", last_lat));
    wr(TC, 6);
    expect_blk("c@G", TC, 1, 0, 0, 0, 1);

    // H: three writes of c
    wr(TC, 3);
    expect_blk("c@H", TC, 1, 0, 0, 3, 1);

    // I: e misses, PR = 0 places it in STT-RAM, evicting d (lowest RIC)
    rd(TE, 1);
    chk(last_lat == 2 + 35 + STT_WR_LAT, $sformatf("miss latency into STT-RAM %0d", last_lat));
    expect_blk("e@I", TE, 0, 1, 1, 0, 0);
    expect_blk("a@I", TA, 0, 0, 4, 0, 0);
    chk(!present(TD), "d evicted at I");
    chk(pr[pidx(TD)] == 1'b0, "PR of d records STT-RAM");

    // power failure: c (CONF 01) replaces a (dirty -> memory), b replaces e
    w0 = mem_writes;
    @(negedge clk); pwr_fail = 1'b1;
    while (!pwr_off) @(negedge clk);
    chk(mem_writes == w0 + 1, $sformatf("backup memory writes %0d", mem_writes - w0));
    chk(last_wr_addr == BA_W'({TA, 1'b0}), "a written to memory in the backup");
    expect_blk("c@J", TC, 0, 0, 0, 0, 0);
    expect_blk("b@J", TB, 0, 1, 0, 0, 0);
    chk(!sv[0][0] && !sv[0][1], "SRAM contents lost at J");
    repeat (5) @(negedge clk);
    pwr_fail = 1'b0;

    // K: power back, b and c hit in STT-RAM without any restore
    r0 = mem_reads;
    rd(TB, 1);
    chk(last_rdata == {TB, 12'd1}, "b keeps its last written word");
    rd(TC, 1);
    chk(last_rdata == {TC, 12'd2}, "c keeps its last written word");
    chk(mem_reads == r0, "no memory reads after power returns");
    expect_blk("c@K", TC, 0, 0, 1, 0, 0);
    expect_blk("b@K", TB, 0, 1, 1, 0, 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
