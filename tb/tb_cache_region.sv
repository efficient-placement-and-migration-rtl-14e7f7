// tb_cache_region: checks the block array of one region against a
// reference model, once as volatile SRAM and once as non-volatile STT-RAM.
// Random whole-entry writes are followed by reads of every way of a random
// set; valid bits must be clear after reset; power_loss must clear every
// valid bit of the SRAM array and leave the STT-RAM array untouched.
module tb_cache_region;
  import hc_pkg::*;

  localparam int unsigned SETS = 64, WAYS = 2, TAG_W = 15, LINE_W = 512;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [5:0]        rd_set, wr_set;
  logic              wr_en, wr_way, wr_valid, wr_dirty, power_loss;
  meta_t             wr_meta;
  logic [TAG_W-1:0]  wr_tag;
  logic [LINE_W-1:0] wr_data;
  logic [WAYS-1:0]   s_valid, s_dirty, t_valid, t_dirty;
  meta_t             s_meta [WAYS], t_meta [WAYS];
  logic [TAG_W-1:0]  s_tag [WAYS], t_tag [WAYS];
  logic [LINE_W-1:0] s_data [WAYS], t_data [WAYS];

  cache_region #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W), .LINE_W(LINE_W), .VOLATILE(1'b1)) u_s (
    .clk, .rst_n, .rd_set, .rd_valid(s_valid), .rd_dirty(s_dirty), .rd_meta(s_meta),
    .rd_tag(s_tag), .rd_data(s_data), .wr_en, .wr_set, .wr_way, .wr_valid, .wr_dirty,
    .wr_meta, .wr_tag, .wr_data, .power_loss);
  cache_region #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W), .LINE_W(LINE_W), .VOLATILE(1'b0)) u_t (
    .clk, .rst_n, .rd_set, .rd_valid(t_valid), .rd_dirty(t_dirty), .rd_meta(t_meta),
    .rd_tag(t_tag), .rd_data(t_data), .wr_en, .wr_set, .wr_way, .wr_valid, .wr_dirty,
    .wr_meta, .wr_tag, .wr_data, .power_loss);

  // reference
  logic              rv [SETS][WAYS], rs [SETS][WAYS];
  logic              rd [SETS][WAYS];
  meta_t             rm [SETS][WAYS];
  logic [TAG_W-1:0]  rt [SETS][WAYS];
  logic [LINE_W-1:0] rdat [SETS][WAYS];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  task automatic compare(input int s);
    rd_set = 6'(s); #1;
    for (int w = 0; w < WAYS; w++) begin
      chk(s_valid[w] == rv[s][w], $sformatf("SRAM valid %0d/%0d", s, w));
      chk(t_valid[w] == rs[s][w], $sformatf("STT valid %0d/%0d", s, w));
      if (rv[s][w]) chk(s_dirty[w] == rd[s][w] && s_meta[w] == rm[s][w] && s_tag[w] == rt[s][w]
                        && s_data[w] == rdat[s][w], $sformatf("SRAM entry %0d/%0d", s, w));
      if (rs[s][w]) chk(t_dirty[w] == rd[s][w] && t_meta[w] == rm[s][w] && t_tag[w] == rt[s][w]
                        && t_data[w] == rdat[s][w], $sformatf("STT entry %0d/%0d", s, w));
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; power_loss = 0; rd_set = 0; wr_set = 0; wr_way = 0; wr_valid = 0;
    wr_dirty = 0; wr_meta = META_ZERO; wr_tag = '0; wr_data = '0;
    for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) begin
      rv[s][w] = 0; rs[s][w] = 0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < SETS; s++) compare(s);
    for (int round = 0; round < 3; round++) begin
      for (int n = 0; n < 3000; n++) begin
        @(negedge clk);
        wr_en    = 1'b1;
        wr_set   = 6'($urandom);
        wr_way   = 1'($urandom);
        wr_valid = ($urandom % 4) != 0;
        wr_dirty = 1'($urandom);
        wr_meta  = meta_t'($urandom);
        wr_tag   = TAG_W'($urandom);
        for (int k = 0; k < LINE_W / 32; k++) wr_data[k*32 +: 32] = $urandom;
        @(posedge clk);
        rv[wr_set][wr_way] = wr_valid; rs[wr_set][wr_way] = wr_valid;
        rd[wr_set][wr_way] = wr_dirty; rm[wr_set][wr_way] = wr_meta;
        rt[wr_set][wr_way] = wr_tag;   rdat[wr_set][wr_way] = wr_data;
        @(negedge clk);
        wr_en = 1'b0;
        compare(int'($urandom % SETS));
      end
      for (int s = 0; s < SETS; s++) compare(s);
      // supply lost: SRAM forgets, STT-RAM keeps
      @(negedge clk); power_loss = 1'b1;
      @(posedge clk);
      for (int s = 0; s < SETS; s++) for (int w = 0; w < WAYS; w++) rv[s][w] = 0;
      @(negedge clk); power_loss = 1'b0;
      for (int s = 0; s < SETS; s++) compare(s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
