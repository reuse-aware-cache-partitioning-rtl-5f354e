// srcp_access_classifier: reuse and sharing class of an accessed line and
// the private-cache fill / bypass decision.
//
// Combinational. A line is frequently used when its AFC is at least the
// intermediate value I = 2^(AFC_W-1) (128 for 8-bit counters), and shared
// when its GCount is at least 1. A line may be loaded into the requesting
// core's private L1 only when it is frequently used and the access is not a
// write to shared data: less frequently used lines are served from the LLC
// only, and writes to shared lines are done directly in the LLC so that one
// copy of shared data exists. `l1_fill` = 0 means the access bypasses the L1.
// The two thresholds and the bypass rules are the paper's; reading "reads
// and writes on private data, which are less frequent" as "private and
// less frequently used" is this design's reading.
module srcp_access_classifier #(
  parameter int unsigned AFC_W = srcp_pkg::AFC_W,
  parameter int unsigned GC_W  = srcp_pkg::id_w(srcp_pkg::NUM_CORES)
) (
  input  logic [AFC_W-1:0]          afc,
  input  logic [GC_W-1:0]           gc,
  input  logic                      write,
  output logic                      freq_used,
  output logic                      shared,
  output srcp_pkg::line_class_e     line_class,
  output logic                      l1_fill
);

  localparam logic [AFC_W-1:0] AFC_INIT = AFC_W'(srcp_pkg::afc_init(AFC_W));

  always_comb begin
    freq_used  = (afc >= AFC_INIT);
    shared     = (gc != '0);
    line_class = srcp_pkg::line_class_e'({shared, freq_used});
    l1_fill    = freq_used && !(shared && write);
  end

endmodule
