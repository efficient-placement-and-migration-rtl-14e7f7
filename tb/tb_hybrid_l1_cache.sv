// tb_hybrid_l1_cache: end-to-end test of the hybrid L1 data cache at its
// default size (16 KB, 2 SRAM + 2 STT-RAM ways, 64 sets, 4096-entry
// prediction table, threshold 7) with the phase-change main memory model.
//
// A random stream of word reads and writes runs over 4 sets with 6 blocks
// each, so the sets overflow constantly. Half of the blocks are read-mostly
// (95 % reads) and half write-mostly (85 % writes), so that blocks turn
// read- or write-intensive and migrate. Every few thousand requests the
// supply fails: the cache backs up, loses its SRAM contents and waits until
// power returns. Every read is compared with a reference copy of memory
// kept by the testbench, so that data lost in a migration, a write-back or
// the backup shows as a mismatch. At the end each mechanism must have
// happened at least once (hits, misses, placements by the prediction table
// into either region, migrations both ways, confidence increments,
// replacements, write-backs, backup saves into STT-RAM and to memory, hits
// right after power returns); the counts and the share of writes that went
// to STT-RAM are printed.
module tb_hybrid_l1_cache;
  import hc_pkg::*;

  localparam int unsigned ADDR_W = 27;
  localparam int unsigned BA_W   = 21;
  localparam int unsigned N_REQ  = 30000;
  localparam int unsigned PF_EVERY = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic              req_valid, req_ready, req_we, resp_valid;
  logic [ADDR_W-1:0] req_addr;
  logic [31:0]       req_wdata, resp_rdata;
  logic              pwr_fail, bk_busy, pwr_off;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [BA_W-1:0]   mem_req_addr;
  logic [511:0]      mem_req_wdata, mem_resp_rdata;
  cache_events_t     ev;
  int                n_reads, n_writes;

  hybrid_l1_cache dut (.*);

  pcm_model #(.BA_W(BA_W), .LINE_W(512)) u_mem (.*);

  int checks = 0, failures = 0;

  // reference memory, one word per entry
  logic [31:0] ref_mem [logic [ADDR_W-3:0]];

  function automatic logic [31:0] ref_read(input logic [ADDR_W-1:0] a);
    logic [ADDR_W-3:0] wa = a[ADDR_W-1:2];
    logic [BA_W-1:0]   b  = a[ADDR_W-1:6];
    if (ref_mem.exists(wa)) return ref_mem[wa];
    return (32'(b) << 4) ^ 32'(a[5:2]) ^ 32'h5A00_0000;
  endfunction

  // event counters
  int c_hit, c_miss, c_miss_stt, c_miss_sram, c_mig_stt, c_mig_sram, c_conf, c_replace;
  int c_pcm_wr, c_bk_stt, c_bk_pcm, c_bk_drop, c_bk_cycles, c_sram_wr, c_stt_wr;
  int c_pf, c_hit_after_pf;
  int after_pf;

  always @(posedge clk) if (rst_n) begin
    if (ev.hit)  c_hit++;
    if (ev.miss) begin
      c_miss++;
      if (dut.u_ctrl.pt_rd_pr) c_miss_sram++; else c_miss_stt++;
    end
    if (ev.mig_to_stt)  c_mig_stt++;
    if (ev.mig_to_sram) c_mig_sram++;
    if (ev.conf_inc)    c_conf++;
    if (ev.replace)     c_replace++;
    if (ev.pcm_write && !bk_busy) c_pcm_wr++;
    if (ev.bk_to_stt)   c_bk_stt++;
    if (ev.bk_to_pcm)   c_bk_pcm++;
    if (ev.bk_dropped)  c_bk_drop++;
    if (ev.bk_cycle)    c_bk_cycles++;
    if (ev.sram_write)  c_sram_wr++;
    if (ev.stt_write)   c_stt_wr++;
    if (ev.hit && after_pf > 0) c_hit_after_pf++;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic report;
    $display("hits %0d misses %0d (to SRAM %0d, to STT-RAM %0d)", c_hit, c_miss, c_miss_sram,
             c_miss_stt);
    $display("migrations SRAM->STT %0d STT->SRAM %0d, CONF increments %0d, replacements %0d",
             c_mig_stt, c_mig_sram, c_conf, c_replace);
    $display("write-backs %0d, memory reads %0d writes %0d", c_pcm_wr, n_reads, n_writes);
    $display("power failures %0d: saved to STT-RAM %0d, to memory %0d, dropped %0d, %0d cycles",
             c_pf, c_bk_stt, c_bk_pcm, c_bk_drop, c_bk_cycles);
    $display("hits in the first requests after power returned %0d", c_hit_after_pf);
    $display("array writes SRAM %0d STT-RAM %0d (STT-RAM share %0d %%)", c_sram_wr, c_stt_wr,
             (c_sram_wr + c_stt_wr) ? 100 * c_stt_wr / (c_sram_wr + c_stt_wr) : 0);
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [ADDR_W-1:0] a;
    logic [14:0]       tag;
    logic [1:0]        set;
    bit                we;
    logic [31:0]       exp;
    {c_hit, c_miss, c_miss_stt, c_miss_sram, c_mig_stt, c_mig_sram, c_conf, c_replace} = '0;
    {c_pcm_wr, c_bk_stt, c_bk_pcm, c_bk_drop, c_bk_cycles, c_sram_wr, c_stt_wr} = '0;
    c_pf = 0; c_hit_after_pf = 0; after_pf = 0;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0; pwr_fail = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int n = 1; n <= N_REQ; n++) begin
      tag = 15'($urandom % 6);
      set = 2'($urandom % 4);
      a   = {tag, 4'd0, set, 4'($urandom), 2'b00};
      we  = tag[0] ? ($urandom % 100) < 85 : ($urandom % 100) < 5;
      @(negedge clk);
      req_valid = 1'b1; req_we = we; req_addr = a; req_wdata = $urandom;
      exp = ref_read(a);
      if (we) ref_mem[a[ADDR_W-1:2]] = req_wdata;
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 1'b0;
      while (!resp_valid) @(negedge clk);
      if (!we) chk(resp_rdata == exp, $sformatf("read %h: %h expected %h", a, resp_rdata, exp));
      if (after_pf > 0) after_pf--;

      if (n % PF_EVERY == 0) begin
        @(negedge clk); pwr_fail = 1'b1;
        while (!pwr_off) @(negedge clk);
        c_pf++;
        repeat (10) @(negedge clk);
        pwr_fail = 1'b0;
        after_pf = 8;
      end
    end

    report;
    chk(c_hit > 0, "no hit");
    chk(c_miss_sram > 0, "no miss placed in SRAM");
    chk(c_miss_stt > 0, "no miss placed in STT-RAM");
    chk(c_mig_stt > 0, "no migration to STT-RAM");
    chk(c_mig_sram > 0, "no migration to SRAM");
    chk(c_conf > 0, "no CONF increment");
    chk(c_replace > 0, "no replacement");
    chk(c_pcm_wr > 0, "no write-back");
    chk(c_bk_stt > 0, "no backup into STT-RAM");
    chk(c_bk_pcm > 0, "no backup to memory");
    chk(c_hit_after_pf > 0, "no hit after power returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
