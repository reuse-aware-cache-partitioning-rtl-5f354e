// srcp_act: access count table (ACT) of the shared LLC.
//
// Stores the replacement state of every line: the 1-bit Local Count (LC),
// which marks a line touched by the core that owns its partition, the
// AFC_W-bit Access Frequency Count (AFC) of that core's accesses, and the
// GC_W-bit Global Count (GCount) of accesses by the other cores. The counters
// and their widths are the paper's; keeping them in one set-wide RAM beside
// the tag store is this design's choice. Like the tag store, a whole set is
// read (result one clock after `rd_en`) and written at once. The contents
// need no reset: a line's state is written when the line is filled and is
// not looked at while the line is invalid.
module srcp_act #(
  parameter int unsigned NUM_SETS = srcp_pkg::NUM_SETS,
  parameter int unsigned ASSOC    = srcp_pkg::ASSOC,
  parameter int unsigned AFC_W    = srcp_pkg::AFC_W,
  parameter int unsigned GC_W     = srcp_pkg::id_w(srcp_pkg::NUM_CORES),
  localparam int unsigned IDX_W   = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1
) (
  input  logic                        clk,
  // read port
  input  logic                        rd_en,
  input  logic [IDX_W-1:0]            rd_idx,
  output logic [ASSOC-1:0]            rd_lc,
  output logic [ASSOC-1:0][AFC_W-1:0] rd_afc,
  output logic [ASSOC-1:0][GC_W-1:0]  rd_gc,
  // write port
  input  logic                        wr_en,
  input  logic [IDX_W-1:0]            wr_idx,
  input  logic [ASSOC-1:0]            wr_lc,
  input  logic [ASSOC-1:0][AFC_W-1:0] wr_afc,
  input  logic [ASSOC-1:0][GC_W-1:0]  wr_gc
);

  typedef struct packed {
    logic [ASSOC-1:0]            lc;
    logic [ASSOC-1:0][AFC_W-1:0] afc;
    logic [ASSOC-1:0][GC_W-1:0]  gc;
  } row_t;

  row_t mem [NUM_SETS];
  row_t rd_row;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_idx] <= '{lc: wr_lc, afc: wr_afc, gc: wr_gc};
    if (rd_en) rd_row <= mem[rd_idx];
  end

  assign rd_lc  = rd_row.lc;
  assign rd_afc = rd_row.afc;
  assign rd_gc  = rd_row.gc;

endmodule
