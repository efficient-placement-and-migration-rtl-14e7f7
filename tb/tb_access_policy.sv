// tb_access_policy: exhaustive check of the counter / confidence update.
// Every combination of RIC, WIC, CONF, read or write, region and
// migration permission is compared with a reference written from the rule
// (counter + 1 below 7; at 7 migrate and zero everything if the block is
// in the wrong region, else advance CONF, saturating at 11, and zero the
// counter that fired). It then walks one block through the confidence
// state diagram: 00 -> 01 -> 10 -> 11 -> 11 after every seventh write in
// SRAM, and back to 00 on a migration.
module tb_access_policy;
  import hc_pkg::*;

  meta_t   meta_in, meta_out;
  logic    is_write, allow_mig, migrate, conf_event;
  region_e region;
  int checks = 0, failures = 0;

  access_policy dut (.*);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    meta_t exp_m;
    bit    exp_mig, exp_conf;
    int    c;
    for (int ric = 0; ric < 7; ric++)
      for (int wic = 0; wic < 7; wic++)
        for (int conf = 0; conf < 4; conf++)
          for (int op = 0; op < 8; op++) begin
            meta_in   = '{conf: 2'(conf), ric: 3'(ric), wic: 3'(wic)};
            is_write  = op[0];
            region    = region_e'(op[1]);
            allow_mig = op[2];
            #1;
            c = is_write ? wic : ric;
            exp_m = meta_in; exp_mig = 0; exp_conf = 0;
            if (c + 1 < 7) begin
              if (is_write) exp_m.wic = 3'(c + 1); else exp_m.ric = 3'(c + 1);
            end else if (allow_mig && ((is_write && region == REG_STT) ||
                                       (!is_write && region == REG_SRAM))) begin
              exp_mig = 1; exp_m = '{conf: 0, ric: 0, wic: 0};
            end else begin
              exp_conf = 1;
              exp_m.conf = (conf == 3) ? 2'd3 : 2'(conf + 1);
              if (is_write) exp_m.wic = 0; else exp_m.ric = 0;
            end
            chk(meta_out == exp_m && migrate == exp_mig && conf_event == exp_conf,
                $sformatf("ric=%0d wic=%0d conf=%0d op=%0d -> %p mig=%0d", ric, wic, conf, op,
                          meta_out, migrate));
          end

    // confidence state diagram on one write-intensive block held in SRAM
    meta_in = META_ZERO; region = REG_SRAM; allow_mig = 1; is_write = 1;
    for (int k = 1; k <= 4; k++) begin
      for (int i = 0; i < 7; i++) begin #1; meta_in = meta_out; end
      chk(meta_in.conf == ((k < 3) ? 2'(k) : 2'd3) && meta_in.wic == 0,
          $sformatf("CONF after %0d thresholds: %0d", k, meta_in.conf));
    end
    // seven reads of that block in SRAM make it read-intensive: back to 00
    is_write = 0;
    for (int i = 0; i < 6; i++) begin #1; meta_in = meta_out; end
    #1;
    chk(migrate && meta_out == META_ZERO, "migration resets CONF to 00");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
