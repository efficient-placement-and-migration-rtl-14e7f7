// tb_pred_table: checks the prediction table against a bit-array reference.
// After reset every entry must read 1 (a block never seen goes to SRAM);
// random writes and reads are then compared entry by entry, including a
// read of the entry written in the same cycle (old value until the edge).
module tb_pred_table;
  localparam int unsigned L = 4096;
  localparam int unsigned W = $clog2(L);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [W-1:0] rd_idx, wr_idx;
  logic         rd_pr, wr_en, wr_pr;
  logic [L-1:0] ref_pr;
  int checks = 0, failures = 0;

  pred_table #(.L(L)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 1'b0; wr_idx = '0; wr_pr = 1'b0; rd_idx = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    ref_pr = '1;
    // every entry is 1 after reset
    for (int i = 0; i < L; i++) begin
      rd_idx = W'(i); #1;
      chk(rd_pr == 1'b1, $sformatf("entry %0d not 1 after reset", i));
    end
    // random traffic
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      wr_en  = ($urandom % 2) == 0;
      wr_idx = W'($urandom);
      wr_pr  = 1'($urandom);
      rd_idx = ($urandom % 4 == 0) ? wr_idx : W'($urandom);
      #1;
      chk(rd_pr == ref_pr[rd_idx], $sformatf("read %0d", rd_idx));
      @(posedge clk);
      if (wr_en) ref_pr[wr_idx] = wr_pr;
    end
    @(negedge clk); wr_en = 1'b0;
    for (int i = 0; i < L; i++) begin
      rd_idx = W'(i); #1;
      chk(rd_pr == ref_pr[i], $sformatf("final entry %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
