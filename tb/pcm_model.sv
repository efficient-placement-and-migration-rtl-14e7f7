// pcm_model: behavioural model of the phase-change main memory (128 MB)
// behind the hybrid L1 cache; it is a testbench part, not synthesizable
// design. It serves one block request at a time over the cache's memory
// port: a request is taken when mem_req_valid and mem_req_ready are high,
// and mem_resp_valid pulses RD_LAT cycles later for a read (with the block)
// or WR_LAT cycles later for a write (35 and 100 cycles of the 2 ns clock
// in the evaluated system). Storage is sparse: a block never written reads
// as a fixed pattern, word k of block b being (b << 4) ^ k ^ 32'h5A00_0000,
// so that a testbench can predict it. Counts of reads and writes are kept
// for the testbench.
module pcm_model #(
  parameter int unsigned BA_W   = 21,
  parameter int unsigned LINE_W = 512,
  parameter int unsigned RD_LAT = 35,
  parameter int unsigned WR_LAT = 100
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              mem_req_valid,
  output logic              mem_req_ready,
  input  logic              mem_req_we,
  input  logic [BA_W-1:0]   mem_req_addr,
  input  logic [LINE_W-1:0] mem_req_wdata,
  output logic              mem_resp_valid,
  output logic [LINE_W-1:0] mem_resp_rdata,
  output int                n_reads,
  output int                n_writes
);

  logic [LINE_W-1:0] store [logic [BA_W-1:0]];
  logic              busy;
  int                cnt;
  logic [LINE_W-1:0] rdata_q;

  function automatic logic [LINE_W-1:0] block_init(input logic [BA_W-1:0] b);
    logic [LINE_W-1:0] l;
    for (int k = 0; k < LINE_W / 32; k++)
      l[k*32 +: 32] = (32'(b) << 4) ^ 32'(k) ^ 32'h5A00_0000;
    return l;
  endfunction

  assign mem_req_ready = !busy;

  // the sparse store is updated with a blocking assignment of its own
  always @(posedge clk) begin
    if (rst_n && mem_req_valid && !busy && mem_req_we) store[mem_req_addr] = mem_req_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy           <= 1'b0;
      cnt            <= 0;
      mem_resp_valid <= 1'b0;
      mem_resp_rdata <= '0;
      rdata_q        <= '0;
      n_reads        <= 0;
      n_writes       <= 0;
    end else begin
      mem_resp_valid <= 1'b0;
      if (mem_req_valid && !busy) begin
        busy <= 1'b1;
        if (mem_req_we) begin
          cnt      <= WR_LAT - 1;
          n_writes <= n_writes + 1;
        end else begin
          rdata_q <= store.exists(mem_req_addr) ? store[mem_req_addr] : block_init(mem_req_addr);
          cnt     <= RD_LAT - 1;
          n_reads <= n_reads + 1;
        end
      end else if (busy) begin
        if (cnt <= 1) begin
          busy           <= 1'b0;
          mem_resp_valid <= 1'b1;
          mem_resp_rdata <= rdata_q;
        end
        cnt <= cnt - 1;
      end
    end
  end

endmodule
