// access_policy: the per-block counter and confidence update applied on
// every access to a resident block, and the migration decision it implies.
//
// A read increments the block's read-intensive counter RIC, a write its
// write-intensive counter WIC. When the incremented counter reaches
// THRESHOLD (7) the block has proved read- or write-intensive:
//   * a read-intensive block that sits in SRAM, or a write-intensive block
//     that sits in STT-RAM, is in the wrong region: migrate is raised and
//     RIC, WIC and CONF all return to zero (the block restarts in its new
//     region);
//   * otherwise the block is already where it belongs: CONF advances one
//     state 00 -> 01 -> 10 -> 11, staying at 11, and the counter that fired
//     returns to zero (conf_event is raised).
// Below the threshold only the counter is incremented.
//
// The threshold is taken as reached by the access that brings the counter
// to 7, as in the worked example of the policy (a block migrates on its
// seventh read or write). The pseudo-code instead tests the counter before
// incrementing it, which would delay every decision by one access; the
// worked example is followed here. allow_mig = 0 (used right after a
// block is filled) suppresses migration; the CONF path still applies.
//
// Purely combinational.
module access_policy
  import hc_pkg::*;
#(
  parameter int unsigned THRESH = THRESHOLD
) (
  input  meta_t   meta_in,
  input  logic    is_write,
  input  region_e region,
  input  logic    allow_mig,
  output meta_t   meta_out,
  output logic    migrate,
  output logic    conf_event
);

  logic [CNT_W-1:0] cnt;
  logic [CNT_W:0]   cnt_inc;
  logic             reached;
  logic             wrong_region;

  always_comb begin
    cnt          = is_write ? meta_in.wic : meta_in.ric;
    cnt_inc      = {1'b0, cnt} + 1'b1;
    reached      = (cnt_inc >= (CNT_W+1)'(THRESH));
    wrong_region = is_write ? (region == REG_STT) : (region == REG_SRAM);

    meta_out   = meta_in;
    migrate    = 1'b0;
    conf_event = 1'b0;

    if (!reached) begin
      if (is_write) meta_out.wic = cnt_inc[CNT_W-1:0];
      else          meta_out.ric = cnt_inc[CNT_W-1:0];
    end else if (wrong_region && allow_mig) begin
      migrate  = 1'b1;
      meta_out = META_ZERO;
    end else begin
      conf_event = 1'b1;
      if (meta_in.conf != '1) meta_out.conf = meta_in.conf + 1'b1;
      if (is_write) meta_out.wic = '0;
      else          meta_out.ric = '0;
    end
  end

endmodule
