// srcp_llc: shared last-level cache controller with reuse-aware,
// sharing-aware replacement over static way partitions.
//
// What it does. NUM_CORES cores share an ASSOC-way LLC. Each core owns
// ASSOC/NUM_CORES ways of every set (srcp_way_partition). A lookup searches
// all ways of the set, so a core hits on a line that sits in another core's
// partition and shared data is never loaded twice. On a miss the line is
// brought into the requester's own partition only, evicting the victim
// chosen by srcp_victim_select. Every line carries LC / AFC / GCount
// (srcp_act), updated by srcp_counter_update: local hits count reuse (AFC),
// hits from other cores count sharing (GCount), misses age the requester's
// partition. srcp_access_classifier then tells the requester whether the
// line may go into its private L1 or the access bypasses it.
//
// Interface. A request (`req_valid`, core id, address, write flag) is taken
// when `req_ready` is high. The answer appears for one cycle on `resp_*`
// with `resp_valid`, two clocks after the request was taken; there is no
// back-pressure on the answer. On a miss the tag is allocated at once and
// `resp_evict*` name the line that was replaced; moving the data (from main
// memory, and of a dirty victim back to it) is left to the surrounding
// system, since the LLC data array is not part of this block.
//
// Timing. After reset `req_ready` stays low for NUM_SETS clocks while the
// tag store clears its valid bits. Then a two-state controller: IDLE takes a request and starts the
// synchronous read of the set from the tag store and the ACT; LOOKUP
// compares tags, updates the counters, picks the victim, writes the set back
// and registers the answer. `req_ready` is low in LOOKUP, so one request is
// accepted every two cycles and the set written back is never read in the
// same cycle. This pipeline, the handshake and the dirty bit are this
// design's own; the partitioning, counters, victim rule and bypass rule
// follow the paper.
module srcp_llc #(
  parameter int unsigned NUM_CORES  = srcp_pkg::NUM_CORES,
  parameter int unsigned ASSOC      = srcp_pkg::ASSOC,
  parameter int unsigned NUM_SETS   = srcp_pkg::NUM_SETS,
  parameter int unsigned LINE_BYTES = srcp_pkg::LINE_BYTES,
  parameter int unsigned ADDR_W     = srcp_pkg::ADDR_W,
  parameter int unsigned AFC_W      = srcp_pkg::AFC_W,
  localparam int unsigned CORE_W    = srcp_pkg::id_w(NUM_CORES),
  localparam int unsigned WAY_W     = (ASSOC > 1) ? $clog2(ASSOC) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // request from a core (through its private cache)
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [CORE_W-1:0] req_core,
  input  logic [ADDR_W-1:0] req_addr,
  input  logic              req_write,
  // answer
  output logic              resp_valid,
  output logic [CORE_W-1:0] resp_core,
  output logic [ADDR_W-1:0] resp_addr,
  output logic              resp_hit,        // line was present
  output logic [WAY_W-1:0]  resp_way,        // way holding the line now
  output logic              resp_local,      // hit in the requester's partition
  output logic              resp_freq_used,  // AFC >= I
  output logic              resp_shared,     // GCount >= 1
  output logic              resp_l1_fill,    // may be loaded into the L1
  output logic              resp_evict,      // miss replaced a valid line
  output logic              resp_evict_dirty,
  output logic [ADDR_W-1:0] resp_evict_addr
);

  localparam int unsigned GC_W  = srcp_pkg::id_w(NUM_CORES);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned IDX_W = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1;
  localparam int unsigned TAG_W = ADDR_W - OFF_W - IDX_W;

  typedef enum logic {S_IDLE, S_LOOKUP} state_e;
  state_e state;

  // request being served
  logic [CORE_W-1:0] cur_core;
  logic [ADDR_W-1:0] cur_addr;
  logic              cur_write;

  logic [IDX_W-1:0] req_idx, cur_idx;
  logic [TAG_W-1:0] cur_tag;
  assign req_idx = req_addr[OFF_W +: IDX_W];
  assign cur_idx = cur_addr[OFF_W +: IDX_W];
  assign cur_tag = cur_addr[ADDR_W-1 -: TAG_W];

  logic accept;
  logic init_busy;
  assign req_ready = (state == S_IDLE) && !init_busy;
  assign accept    = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur_core  <= '0;
      cur_addr  <= '0;
      cur_write <= 1'b0;
    end else begin
      case (state)
        S_IDLE: if (accept) begin
          state     <= S_LOOKUP;
          cur_core  <= req_core;
          cur_addr  <= req_addr;
          cur_write <= req_write;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- storage ----------------
  logic [ASSOC-1:0]            t_valid, t_dirty, w_valid, w_dirty;
  logic [ASSOC-1:0][TAG_W-1:0] t_tag, w_tag;
  logic [ASSOC-1:0]            a_lc, n_lc;
  logic [ASSOC-1:0][AFC_W-1:0] a_afc, d_afc, n_afc;
  logic [ASSOC-1:0][GC_W-1:0]  a_gc, d_gc, n_gc;
  logic                        wr_en;

  assign wr_en = (state == S_LOOKUP);

  srcp_tag_array #(.NUM_SETS(NUM_SETS), .ASSOC(ASSOC), .TAG_W(TAG_W)) u_tags (
    .clk, .rst_n, .init_busy,
    .rd_en(accept), .rd_idx(req_idx),
    .rd_valid(t_valid), .rd_dirty(t_dirty), .rd_tag(t_tag),
    .wr_en, .wr_idx(cur_idx),
    .wr_valid(w_valid), .wr_dirty(w_dirty), .wr_tag(w_tag)
  );

  srcp_act #(.NUM_SETS(NUM_SETS), .ASSOC(ASSOC), .AFC_W(AFC_W), .GC_W(GC_W)) u_act (
    .clk,
    .rd_en(accept), .rd_idx(req_idx),
    .rd_lc(a_lc), .rd_afc(a_afc), .rd_gc(a_gc),
    .wr_en, .wr_idx(cur_idx),
    .wr_lc(n_lc), .wr_afc(n_afc), .wr_gc(n_gc)
  );

  // ---------------- lookup ----------------
  logic [ASSOC-1:0] hit_vec, own_mask;
  logic             hit, local_hit;
  logic [WAY_W-1:0] hit_way, victim_way, line_way;
  logic             victim_valid;

  always_comb begin
    hit_vec = '0;
    hit_way = '0;
    for (int unsigned w = 0; w < ASSOC; w++) begin
      hit_vec[w] = t_valid[w] && (t_tag[w] == cur_tag);
      if (hit_vec[w]) hit_way = WAY_W'(w);
    end
    hit = |hit_vec;
  end

  srcp_way_partition #(.NUM_CORES(NUM_CORES), .ASSOC(ASSOC)) u_part (
    .core(cur_core), .own_mask
  );

  srcp_counter_update #(.ASSOC(ASSOC), .AFC_W(AFC_W), .GC_W(GC_W)) u_upd (
    .hit, .hit_way, .fill_way(victim_way), .own_mask, .valid(t_valid),
    .lc(a_lc), .afc(a_afc), .gc(a_gc),
    .dec_afc(d_afc), .dec_gc(d_gc), .local_hit,
    .new_lc(n_lc), .new_afc(n_afc), .new_gc(n_gc)
  );

  srcp_victim_select #(.ASSOC(ASSOC), .AFC_W(AFC_W), .GC_W(GC_W)) u_victim (
    .own_mask, .valid(t_valid), .lc(a_lc), .afc(d_afc), .gc(d_gc),
    .victim_way, .victim_valid
  );

  assign line_way = hit ? hit_way : victim_way;

  logic freq_used, shared, l1_fill;

  srcp_access_classifier #(.AFC_W(AFC_W), .GC_W(GC_W)) u_class (
    .afc(n_afc[line_way]), .gc(n_gc[line_way]), .write(cur_write),
    .freq_used, .shared, .line_class(), .l1_fill
  );

  // tag store write-back
  always_comb begin
    w_valid = t_valid;
    w_dirty = t_dirty;
    w_tag   = t_tag;
    if (hit) begin
      w_dirty[hit_way] = t_dirty[hit_way] | cur_write;
    end else begin
      w_valid[victim_way] = 1'b1;
      w_dirty[victim_way] = cur_write;
      w_tag[victim_way]   = cur_tag;
    end
  end

  // ---------------- answer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resp_valid       <= 1'b0;
      resp_core        <= '0;
      resp_addr        <= '0;
      resp_hit         <= 1'b0;
      resp_way         <= '0;
      resp_local       <= 1'b0;
      resp_freq_used   <= 1'b0;
      resp_shared      <= 1'b0;
      resp_l1_fill     <= 1'b0;
      resp_evict       <= 1'b0;
      resp_evict_dirty <= 1'b0;
      resp_evict_addr  <= '0;
    end else begin
      resp_valid <= (state == S_LOOKUP);
      if (state == S_LOOKUP) begin
        resp_core        <= cur_core;
        resp_addr        <= cur_addr;
        resp_hit         <= hit;
        resp_way         <= line_way;
        resp_local       <= hit ? local_hit : 1'b1;
        resp_freq_used   <= freq_used;
        resp_shared      <= shared;
        resp_l1_fill     <= l1_fill;
        resp_evict       <= !hit && victim_valid;
        resp_evict_dirty <= !hit && victim_valid && t_dirty[victim_way];
        resp_evict_addr  <= {t_tag[victim_way], cur_idx, OFF_W'(0)};
      end
    end
  end

  // A line is never present in two ways of a set: shared data is not
  // replicated across partitions.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_LOOKUP |-> $onehot0(hit_vec))
    else $error("line present in more than one way");

  // Partition isolation: a miss only ever replaces a way of the requester.
  assert property (@(posedge clk) disable iff (!rst_n)
                   state == S_LOOKUP && !hit |-> own_mask[victim_way])
    else $error("victim outside the requester's partition");

endmodule
