// srcp_tag_array: tag store of the shared LLC.
//
// Holds valid, dirty and tag for every way of every set in one memory array,
// one row per set. A whole set is read at once: `rd_en` with `rd_idx` returns
// the set's valid/dirty/tag vectors on the outputs one clock later
// (synchronous read, as a RAM macro would). A whole set is written at once
// with `wr_en`. After the active-low reset the block clears the valid bits by
// sweeping the array, one set per clock (NUM_SETS clocks); `init_busy` is
// high meanwhile and the controller must not use the store until it falls.
// Reading and writing the same set in the same cycle returns the old
// contents; the controller never does that. The paper names the LLC but not
// its tag store, so this organisation (including the dirty bit and the
// clearing sweep) is this design's own.
module srcp_tag_array #(
  parameter int unsigned NUM_SETS = srcp_pkg::NUM_SETS,
  parameter int unsigned ASSOC    = srcp_pkg::ASSOC,
  parameter int unsigned TAG_W    = 15,
  localparam int unsigned IDX_W   = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1
) (
  input  logic                           clk,
  input  logic                           rst_n,
  output logic                           init_busy,
  // read port
  input  logic                           rd_en,
  input  logic [IDX_W-1:0]               rd_idx,
  output logic [ASSOC-1:0]               rd_valid,
  output logic [ASSOC-1:0]               rd_dirty,
  output logic [ASSOC-1:0][TAG_W-1:0]    rd_tag,
  // write port
  input  logic                           wr_en,
  input  logic [IDX_W-1:0]               wr_idx,
  input  logic [ASSOC-1:0]               wr_valid,
  input  logic [ASSOC-1:0]               wr_dirty,
  input  logic [ASSOC-1:0][TAG_W-1:0]    wr_tag
);

  typedef struct packed {
    logic [ASSOC-1:0]            valid;
    logic [ASSOC-1:0]            dirty;
    logic [ASSOC-1:0][TAG_W-1:0] tag;
  } row_t;

  row_t             mem [NUM_SETS];
  row_t             rd_row;
  logic [IDX_W-1:0] sweep_idx;

  // clearing sweep after reset
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      sweep_idx <= '0;
    end else if (init_busy) begin
      sweep_idx <= sweep_idx + 1'b1;
      if (sweep_idx == IDX_W'(NUM_SETS - 1)) init_busy <= 1'b0;
    end
  end

  logic             mem_we;
  logic [IDX_W-1:0] mem_widx;
  row_t             mem_wrow;

  always_comb begin
    if (init_busy) begin
      mem_we   = 1'b1;
      mem_widx = sweep_idx;
      mem_wrow = '0;
    end else begin
      mem_we   = wr_en;
      mem_widx = wr_idx;
      mem_wrow = '{valid: wr_valid, dirty: wr_dirty, tag: wr_tag};
    end
  end

  always_ff @(posedge clk) begin
    if (mem_we) mem[mem_widx] <= mem_wrow;
    if (rd_en)  rd_row <= mem[rd_idx];
  end

  assign rd_valid = rd_row.valid;
  assign rd_dirty = rd_row.dirty;
  assign rd_tag   = rd_row.tag;

endmodule
