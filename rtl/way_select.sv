// way_select: picks one way of a set, the building block of the
// replacement choice and of the backup choice.
//
// A way flagged in prefer wins outright (lowest index first); this is how
// an empty way is chosen before any valid block is evicted. Otherwise the
// way with the smallest key among those flagged in cand wins, ties going to
// the lowest index. found is 0 when no way is preferred or a candidate.
//
// Uses in the cache: the STT-RAM victim is the valid way with the lowest
// RIC and the SRAM victim the valid way with the lowest WIC, an empty way
// being taken first; the backup takes the SRAM block with the highest CONF
// (key = inverted CONF) and the STT-RAM block with the lowest CONF. The
// lowest-index tie break is this design's choice.
//
// Purely combinational.
module way_select #(
  parameter int unsigned WAYS  = 2,
  parameter int unsigned KEY_W = 3
) (
  input  logic [WAYS-1:0]         prefer,
  input  logic [WAYS-1:0]         cand,
  input  logic [KEY_W-1:0]        key [WAYS],
  output logic                    found,
  output logic [$clog2(WAYS)-1:0] way
);

  logic             pref_hit;
  logic [KEY_W-1:0] best;

  always_comb begin
    found    = 1'b0;
    pref_hit = 1'b0;
    way      = '0;
    best     = '1;
    for (int w = 0; w < WAYS; w++) begin
      if (prefer[w] && !pref_hit) begin
        pref_hit = 1'b1;
        found    = 1'b1;
        way      = w[$clog2(WAYS)-1:0];
      end
    end
    if (!pref_hit) begin
      for (int w = 0; w < WAYS; w++) begin
        if (cand[w] && (!found || key[w] < best)) begin
          found = 1'b1;
          best  = key[w];
          way   = w[$clog2(WAYS)-1:0];
        end
      end
    end
  end

endmodule
