// srcp_victim_select: replacement victim of a miss.
//
// Combinational. Only ways of the requesting core's own partition
// (`own_mask`) can be chosen: other cores may hit in them but never evict
// from them. Among those ways the choice is made on the key
// {valid, AFC, GCount, LC}, smallest first: an empty way is used before any
// line is evicted; otherwise the line with the lowest AFC is taken, then the
// lowest GCount, then one the local core has not touched recently (LC = 0);
// a remaining tie goes to the lowest way number. `victim_valid` tells
// whether a live line is being evicted. Lowest AFC, lowest GCount and the
// local-core recency tie-break are the paper's; ranking AFC ahead of GCount,
// the empty-way preference and the final lowest-way rule are this design's
// choices. The counter values given here are the ones after the miss
// decrement.
module srcp_victim_select #(
  parameter int unsigned ASSOC  = srcp_pkg::ASSOC,
  parameter int unsigned AFC_W  = srcp_pkg::AFC_W,
  parameter int unsigned GC_W   = srcp_pkg::id_w(srcp_pkg::NUM_CORES),
  localparam int unsigned WAY_W = (ASSOC > 1) ? $clog2(ASSOC) : 1
) (
  input  logic [ASSOC-1:0]            own_mask,
  input  logic [ASSOC-1:0]            valid,
  input  logic [ASSOC-1:0]            lc,
  input  logic [ASSOC-1:0][AFC_W-1:0] afc,
  input  logic [ASSOC-1:0][GC_W-1:0]  gc,
  output logic [WAY_W-1:0]            victim_way,
  output logic                        victim_valid
);

  localparam int unsigned KEY_W = 1 + AFC_W + GC_W + 1;

  logic [KEY_W-1:0] best_key, key;
  logic             found;

  always_comb begin
    best_key   = '1;
    victim_way = '0;
    found      = 1'b0;
    for (int unsigned w = 0; w < ASSOC; w++) begin
      // an empty way ranks below every line, whatever its stale counters
      key = valid[w] ? {1'b1, afc[w], gc[w], lc[w]} : '0;
      if (own_mask[w] && (!found || key < best_key)) begin
        best_key   = key;
        victim_way = WAY_W'(w);
        found      = 1'b1;
      end
    end
    victim_valid = found && best_key[KEY_W-1];
  end

endmodule
