// tb_backup_select: checks one step of the power-failure backup decision.
// First the case of the worked example: SRAM holds a CONF-01 and a CONF-00
// block, STT-RAM two CONF-00 blocks; the CONF-01 block goes first and
// displaces STT-RAM way 0, then the CONF-00 block displaces the other way.
// Then random sets are compared with a reference: source = valid SRAM block
// of highest CONF (lowest way on ties); destination = first empty STT-RAM
// way not yet used, else the used-free valid way of lowest CONF; move when
// the destination is empty or its CONF does not exceed the source's.
module tb_backup_select;
  import hc_pkg::*;

  logic [1:0] sram_valid, stt_valid, stt_saved;
  meta_t      sram_meta [2], stt_meta [2];
  logic       src_found, move;
  logic       src_way, dst_way;
  int checks = 0, failures = 0;

  backup_select #(.SRAM_WAYS(2), .STT_WAYS(2)) dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit e_src_found, e_dst_found, e_move;
    int e_src, e_dst, best;
    // worked example, step 1: c (01) in SRAM way 0, b (00) in way 1
    sram_valid = 2'b11; sram_meta[0] = '{conf: 1, ric: 0, wic: 3};
    sram_meta[1] = '{conf: 0, ric: 0, wic: 2};
    stt_valid = 2'b11; stt_meta[0] = '{conf: 0, ric: 4, wic: 0};
    stt_meta[1] = '{conf: 0, ric: 1, wic: 0}; stt_saved = 2'b00;
    #1;
    chk(src_found && src_way == 0 && move && dst_way == 0, "example step 1");
    // step 2: c moved into STT-RAM way 0
    sram_valid = 2'b10; stt_saved = 2'b01; stt_meta[0] = META_ZERO;
    #1;
    chk(src_found && src_way == 1 && move && dst_way == 1, "example step 2");
    // step 3: nothing left
    sram_valid = 2'b00; stt_saved = 2'b11;
    #1;
    chk(!src_found, "example step 3");

    for (int n = 0; n < 20000; n++) begin
      sram_valid = 2'($urandom); stt_valid = 2'($urandom); stt_saved = 2'($urandom);
      for (int w = 0; w < 2; w++) begin
        sram_meta[w] = meta_t'($urandom);
        stt_meta[w]  = meta_t'($urandom);
      end
      #1;
      e_src_found = 0; e_src = 0; best = -1;
      for (int w = 0; w < 2; w++)
        if (sram_valid[w] && int'(sram_meta[w].conf) > best) begin
          e_src_found = 1; e_src = w; best = sram_meta[w].conf;
        end
      e_dst_found = 0; e_dst = 0; best = 4;
      for (int w = 1; w >= 0; w--)
        if (!stt_valid[w] && !stt_saved[w]) begin e_dst_found = 1; e_dst = w; end
      if (!e_dst_found)
        for (int w = 0; w < 2; w++)
          if (stt_valid[w] && !stt_saved[w] && int'(stt_meta[w].conf) < best) begin
            e_dst_found = 1; e_dst = w; best = stt_meta[w].conf;
          end
      e_move = e_src_found && e_dst_found &&
               (!stt_valid[e_dst] || stt_meta[e_dst].conf <= sram_meta[e_src].conf);
      chk(src_found == e_src_found && (!e_src_found || src_way == 1'(e_src)), "source");
      chk(move == e_move && (!e_move || dst_way == 1'(e_dst)), "destination");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
