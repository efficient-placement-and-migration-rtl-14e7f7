// traffic_gen: testbench harness that drives one hybrid_l1_cache of a
// given configuration with a random, conflict-heavy stream of word reads
// and writes and checks every read against a reference memory.
//
// NTAGS blocks map onto each of 4 sets, and half of the requests go to the
// first four of them (a hot group); blocks with an odd tag are
// write-mostly (85 % writes), the others read-mostly (95 % reads). After
// every power-failure interval (PF_MIN requests, or a random count between
// PF_MIN and PF_MAX when PF_RANDOM is set; 0 disables failures) pwr_fail
// is raised until the backup is over. When N_REQ requests are done, done
// rises and the counts are reported. Counts kept: reads checked, read
// mismatches, hits, migrations each way, STT-RAM and SRAM array writes,
// memory writes, power failures and backup cycles.
module traffic_gen
  import hc_pkg::*;
#(
  parameter string       NAME        = "cfg",
  parameter int unsigned CACHE_BYTES = 16384,
  parameter int unsigned SRAM_WAYS   = 2,
  parameter int unsigned STT_WAYS    = 2,
  parameter int unsigned THRESH      = 7,
  parameter int unsigned NTAGS       = 6,
  parameter int unsigned N_REQ       = 10000,
  parameter int unsigned PF_MIN      = 0,
  parameter int unsigned PF_MAX      = 0,
  parameter bit          PF_RANDOM   = 1'b0,
  parameter int unsigned SEED        = 1
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   n_checked,
  output int   n_bad,
  output int   n_hit,
  output int   n_mig,
  output int   n_pf
);

  localparam int unsigned ADDR_W = 27;
  localparam int unsigned BA_W   = 21;

  logic              req_valid, req_ready, req_we, resp_valid;
  logic [ADDR_W-1:0] req_addr;
  logic [31:0]       req_wdata, resp_rdata;
  logic              pwr_fail, bk_busy, pwr_off;
  logic              mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  logic [BA_W-1:0]   mem_req_addr;
  logic [511:0]      mem_req_wdata, mem_resp_rdata;
  cache_events_t     ev;
  int                n_reads, n_writes;

  hybrid_l1_cache #(
    .CACHE_BYTES (CACHE_BYTES), .SRAM_WAYS (SRAM_WAYS), .STT_WAYS (STT_WAYS), .THRESH (THRESH)
  ) dut (.*);

  pcm_model #(.BA_W(BA_W), .LINE_W(512)) u_mem (.*);

  logic [31:0] ref_mem [logic [ADDR_W-3:0]];

  function automatic logic [31:0] ref_read(input logic [ADDR_W-1:0] a);
    logic [BA_W-1:0] b = a[ADDR_W-1:6];
    if (ref_mem.exists(a[ADDR_W-1:2])) return ref_mem[a[ADDR_W-1:2]];
    return (32'(b) << 4) ^ 32'(a[5:2]) ^ 32'h5A00_0000;
  endfunction

  int s_wr, t_wr, bk_cyc;
  always @(posedge clk) if (rst_n && !done) begin
    if (ev.hit) n_hit++;
    if (ev.mig_to_stt || ev.mig_to_sram) n_mig++;
    if (ev.sram_write) s_wr++;
    if (ev.stt_write && !bk_busy) t_wr++;
    if (ev.bk_cycle) bk_cyc++;
  end

  initial begin
    logic [ADDR_W-1:0] a;
    logic [14:0]       tag;
    bit                we;
    logic [31:0]       exp;
    int unsigned       next_pf, seed;
    done = 0; n_checked = 0; n_bad = 0; n_hit = 0; n_mig = 0; n_pf = 0;
    s_wr = 0; t_wr = 0; bk_cyc = 0;
    req_valid = 0; req_we = 0; req_addr = '0; req_wdata = '0; pwr_fail = 0;
    seed = $urandom(SEED);
    next_pf = PF_MIN;
    @(posedge rst_n);
    for (int n = 1; n <= N_REQ; n++) begin
      // half of the requests go to a hot group of four blocks per set
      tag = 15'(($urandom % 2) ? $urandom % 4 : $urandom % NTAGS);
      a   = {tag, 4'd0, 2'($urandom % 4), 4'($urandom), 2'b00};
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
      if (!we) begin
        n_checked++;
        if (resp_rdata != exp) begin
          n_bad++;
          if (n_bad < 5) $display("FAIL %s: read %h got %h expected %h", NAME, a, resp_rdata, exp);
        end
      end
      if (PF_MIN != 0 && n == int'(next_pf)) begin
        @(negedge clk); pwr_fail = 1'b1;
        while (!pwr_off) @(negedge clk);
        n_pf++;
        repeat (5) @(negedge clk);
        pwr_fail = 1'b0;
        next_pf += PF_RANDOM ? PF_MIN + ($urandom % (PF_MAX - PF_MIN + 1)) : PF_MIN;
      end
    end
    $display("%-16s hits %5d migrations %4d  writes SRAM %5d STT-RAM %5d (%0d %%)  memory writes %5d  failures %0d, backup cycles %0d",
             NAME, n_hit, n_mig, s_wr, t_wr, (s_wr + t_wr) ? 100 * t_wr / (s_wr + t_wr) : 0,
             n_writes, n_pf, bk_cyc);
    done = 1'b1;
  end

endmodule
