// tb_workloads: runs the configurations and scenarios of the original
// evaluation, scaled to random traffic, on hybrid_l1_cache side by side:
//   * 8-way splits of SRAM:STT-RAM ways 2:6, 4:4 and 6:2 at 16 KB and 32 KB
//     (the 0:8 and 8:0 splits need a region with no ways, which this
//     design does not support);
//   * intensity thresholds 1 and 3 besides the default 7 (15 needs 4-bit
//     counters);
//   * power failures every 2000 requests, every 4000 requests and at a
//     random interval of 2000 to 4000, standing in for failures every 2 M,
//     4 M and 2 M to 4 M instructions.
// Each instance checks every read against its own reference memory; the
// test fails on any mismatch, and on a configuration that never hit,
// never migrated, or (in the power scenarios) never saw a power failure.
// Per configuration it prints hits, migrations, SRAM and STT-RAM writes
// (the share of writes that went to STT-RAM is the quantity the policies
// aim to reduce), memory writes and backup cycles.
module tb_workloads;
  localparam int unsigned NC = 11;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic [NC-1:0] done;
  int n_checked [NC], n_bad [NC], n_hit [NC], n_mig [NC], n_pf [NC];
  int checks = 0, failures = 0;

  traffic_gen #(.NAME("16K(2:6)"), .SRAM_WAYS(2), .STT_WAYS(6), .NTAGS(12), .SEED(1))
    g0 (.clk, .rst_n, .done(done[0]), .n_checked(n_checked[0]), .n_bad(n_bad[0]),
        .n_hit(n_hit[0]), .n_mig(n_mig[0]), .n_pf(n_pf[0]));
  traffic_gen #(.NAME("16K(4:4)"), .SRAM_WAYS(4), .STT_WAYS(4), .NTAGS(12), .SEED(2))
    g1 (.clk, .rst_n, .done(done[1]), .n_checked(n_checked[1]), .n_bad(n_bad[1]),
        .n_hit(n_hit[1]), .n_mig(n_mig[1]), .n_pf(n_pf[1]));
  traffic_gen #(.NAME("16K(6:2)"), .SRAM_WAYS(6), .STT_WAYS(2), .NTAGS(12), .SEED(3))
    g2 (.clk, .rst_n, .done(done[2]), .n_checked(n_checked[2]), .n_bad(n_bad[2]),
        .n_hit(n_hit[2]), .n_mig(n_mig[2]), .n_pf(n_pf[2]));
  traffic_gen #(.NAME("32K(2:6)"), .CACHE_BYTES(32768), .SRAM_WAYS(2), .STT_WAYS(6),
                .NTAGS(12), .SEED(4))
    g3 (.clk, .rst_n, .done(done[3]), .n_checked(n_checked[3]), .n_bad(n_bad[3]),
        .n_hit(n_hit[3]), .n_mig(n_mig[3]), .n_pf(n_pf[3]));
  traffic_gen #(.NAME("32K(4:4)"), .CACHE_BYTES(32768), .SRAM_WAYS(4), .STT_WAYS(4),
                .NTAGS(12), .SEED(5))
    g4 (.clk, .rst_n, .done(done[4]), .n_checked(n_checked[4]), .n_bad(n_bad[4]),
        .n_hit(n_hit[4]), .n_mig(n_mig[4]), .n_pf(n_pf[4]));
  traffic_gen #(.NAME("32K(6:2)"), .CACHE_BYTES(32768), .SRAM_WAYS(6), .STT_WAYS(2),
                .NTAGS(12), .SEED(6))
    g5 (.clk, .rst_n, .done(done[5]), .n_checked(n_checked[5]), .n_bad(n_bad[5]),
        .n_hit(n_hit[5]), .n_mig(n_mig[5]), .n_pf(n_pf[5]));
  traffic_gen #(.NAME("threshold 1"), .THRESH(1), .SEED(7))
    g6 (.clk, .rst_n, .done(done[6]), .n_checked(n_checked[6]), .n_bad(n_bad[6]),
        .n_hit(n_hit[6]), .n_mig(n_mig[6]), .n_pf(n_pf[6]));
  traffic_gen #(.NAME("threshold 3"), .THRESH(3), .SEED(8))
    g7 (.clk, .rst_n, .done(done[7]), .n_checked(n_checked[7]), .n_bad(n_bad[7]),
        .n_hit(n_hit[7]), .n_mig(n_mig[7]), .n_pf(n_pf[7]));
  traffic_gen #(.NAME("PF every 2000"), .PF_MIN(2000), .SEED(9))
    g8 (.clk, .rst_n, .done(done[8]), .n_checked(n_checked[8]), .n_bad(n_bad[8]),
        .n_hit(n_hit[8]), .n_mig(n_mig[8]), .n_pf(n_pf[8]));
  traffic_gen #(.NAME("PF every 4000"), .PF_MIN(4000), .SEED(10))
    g9 (.clk, .rst_n, .done(done[9]), .n_checked(n_checked[9]), .n_bad(n_bad[9]),
        .n_hit(n_hit[9]), .n_mig(n_mig[9]), .n_pf(n_pf[9]));
  traffic_gen #(.NAME("PF 2000..4000"), .PF_MIN(2000), .PF_MAX(4000), .PF_RANDOM(1'b1),
                .SEED(11))
    g10 (.clk, .rst_n, .done(done[10]), .n_checked(n_checked[10]), .n_bad(n_bad[10]),
         .n_hit(n_hit[10]), .n_mig(n_mig[10]), .n_pf(n_pf[10]));

  initial begin
    repeat (5000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&done);
    for (int i = 0; i < NC; i++) begin
      checks += n_checked[i];
      failures += n_bad[i];
      checks++; if (n_hit[i] == 0) begin failures++; $display("FAIL: config %0d never hit", i); end
      checks++; if (n_mig[i] == 0) begin failures++; $display("FAIL: config %0d never migrated", i); end
      if (i >= 8) begin
        checks++;
        if (n_pf[i] < 2) begin failures++; $display("FAIL: config %0d too few power failures", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
