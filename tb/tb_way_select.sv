// tb_way_select: random comparison of the way selector with a reference:
// the first preferred way if any, else the candidate with the smallest key,
// the lowest index winning a tie; found = 0 when nothing is eligible.
// Run with four ways and small keys so that ties are frequent.
module tb_way_select;
  localparam int unsigned WAYS = 4, KEY_W = 2;

  logic [WAYS-1:0]  prefer, cand;
  logic [KEY_W-1:0] key [WAYS];
  logic             found;
  logic [1:0]       way;
  int checks = 0, failures = 0;

  way_select #(.WAYS(WAYS), .KEY_W(KEY_W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit e_found;
    int e_way, best;
    for (int n = 0; n < 20000; n++) begin
      prefer = ($urandom % 3 == 0) ? WAYS'($urandom) : '0;
      cand   = WAYS'($urandom);
      for (int w = 0; w < WAYS; w++) key[w] = KEY_W'($urandom);
      #1;
      e_found = 0; e_way = 0; best = 1 << KEY_W;
      for (int w = WAYS - 1; w >= 0; w--) if (prefer[w]) begin e_found = 1; e_way = w; end
      if (!e_found)
        for (int w = 0; w < WAYS; w++)
          if (cand[w] && int'(key[w]) < best) begin e_found = 1; e_way = w; best = key[w]; end
      checks++;
      if (found != e_found || (e_found && way != 2'(e_way))) begin
        failures++;
        if (failures < 10)
          $display("FAIL: prefer=%b cand=%b keys=%p -> %0d/%0d expected %0d/%0d", prefer, cand,
                   key, found, way, e_found, e_way);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
