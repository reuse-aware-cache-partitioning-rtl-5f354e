// srcp_counter_update: next-state logic of the LC / AFC / GCount counters of
// one LLC set.
//
// Combinational. It is given the set's current state, the valid bits, the
// requesting core's partition (`own_mask`) and the outcome of the lookup:
//   * hit by the local core (the way lies in the requester's partition):
//     AFC of that way +1 (saturating) and LC of that way set;
//   * hit by a global core (way in another core's partition): GCount of
//     that way +1 (saturating); AFC and LC are left alone;
//   * miss: AFC and GCount of every way of the requester's partition in this
//     set -1 (stopping at 0). These decremented values go out on `dec_afc` /
//     `dec_gc` for the victim choice; the way chosen (`fill_way`) is then
//     loaded with AFC = I = ceil((max+min)/2) = 2^(AFC_W-1), GCount = 0 and
//     its LC set, the fill being an access by the local core.
// The counting rules are the paper's. Three points are this design's own:
// counters saturate instead of wrapping; "all blocks in the partition" is
// read as the partition's ways in the accessed set (a decrement over every
// set would need a sweep of the whole cache per miss); and LC is kept as a
// not-recently-used bit, so that it can break victim ties as "least used in
// the recent past by the local core": when setting an LC would leave every
// valid way of the partition with LC = 1, the partition's other LC bits are
// cleared.
module srcp_counter_update #(
  parameter int unsigned ASSOC  = srcp_pkg::ASSOC,
  parameter int unsigned AFC_W  = srcp_pkg::AFC_W,
  parameter int unsigned GC_W   = srcp_pkg::id_w(srcp_pkg::NUM_CORES),
  localparam int unsigned WAY_W = (ASSOC > 1) ? $clog2(ASSOC) : 1
) (
  input  logic                        hit,       // lookup hit
  input  logic [WAY_W-1:0]            hit_way,   // way that hit
  input  logic [WAY_W-1:0]            fill_way,  // victim way, used on a miss
  input  logic [ASSOC-1:0]            own_mask,  // requester's partition
  input  logic [ASSOC-1:0]            valid,     // valid bits before the access
  input  logic [ASSOC-1:0]            lc,
  input  logic [ASSOC-1:0][AFC_W-1:0] afc,
  input  logic [ASSOC-1:0][GC_W-1:0]  gc,
  output logic [ASSOC-1:0][AFC_W-1:0] dec_afc,   // after the miss decrement
  output logic [ASSOC-1:0][GC_W-1:0]  dec_gc,
  output logic                        local_hit, // hit in own partition
  output logic [ASSOC-1:0]            new_lc,
  output logic [ASSOC-1:0][AFC_W-1:0] new_afc,
  output logic [ASSOC-1:0][GC_W-1:0]  new_gc
);

  localparam logic [AFC_W-1:0] AFC_MAX  = '1;
  localparam logic [GC_W-1:0]  GC_MAX   = '1;
  localparam logic [AFC_W-1:0] AFC_INIT = AFC_W'(srcp_pkg::afc_init(AFC_W));

  // Miss: decrement the requester's partition.
  always_comb begin
    for (int unsigned w = 0; w < ASSOC; w++) begin
      dec_afc[w] = afc[w];
      dec_gc[w]  = gc[w];
      if (!hit && own_mask[w]) begin
        if (afc[w] != '0) dec_afc[w] = afc[w] - 1'b1;
        if (gc[w]  != '0) dec_gc[w]  = gc[w]  - 1'b1;
      end
    end
  end

  assign local_hit = hit && own_mask[hit_way];

  logic [ASSOC-1:0] valid_next;
  logic [ASSOC-1:0] lc_set;
  logic             touch_local;
  logic [WAY_W-1:0] touch_way;

  always_comb begin
    new_afc     = dec_afc;
    new_gc      = dec_gc;
    valid_next  = valid;
    touch_local = 1'b0;
    touch_way   = hit_way;
    if (hit) begin
      if (local_hit) begin
        if (afc[hit_way] != AFC_MAX) new_afc[hit_way] = afc[hit_way] + 1'b1;
        touch_local = 1'b1;
      end else begin
        if (gc[hit_way] != GC_MAX) new_gc[hit_way] = gc[hit_way] + 1'b1;
      end
    end else begin
      new_afc[fill_way]    = AFC_INIT;
      new_gc[fill_way]     = '0;
      valid_next[fill_way] = 1'b1;
      touch_local          = 1'b1;
      touch_way            = fill_way;
    end

    // LC as a not-recently-used bit within the partition.
    lc_set = lc;
    if (touch_local) lc_set[touch_way] = 1'b1;
    new_lc = lc_set;
    if (touch_local && ((lc_set | ~valid_next) & own_mask) == own_mask) begin
      new_lc = lc_set & ~own_mask;
      new_lc[touch_way] = 1'b1;
    end
  end

endmodule
