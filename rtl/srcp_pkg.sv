// srcp_pkg: sizes and helpers shared by the reuse-aware partitioned LLC.
//
// The cache is a shared last-level cache divided into per-core way
// partitions. Every line carries three pieces of replacement state: a 1-bit
// Local Count (LC), a k-bit Access Frequency Count (AFC) and an n-bit Global
// Count (GCount). Four cores, 16 ways, k = 8 and n = log2(cores) follow the
// paper. The number of sets, the line size and the address width are not
// given there; 2048 sets of 64-byte lines (a 2 MiB LLC) and 32-bit physical
// addresses are this design's own choices.
package srcp_pkg;

  localparam int unsigned NUM_CORES  = 4;     // paper: four cores
  localparam int unsigned ASSOC      = 16;    // paper: 16-way LLC
  localparam int unsigned AFC_W      = 8;     // paper: k = 8
  localparam int unsigned NUM_SETS   = 2048;  // own choice
  localparam int unsigned LINE_BYTES = 64;    // own choice
  localparam int unsigned ADDR_W     = 32;    // own choice

  // Width of a core id; at least one bit.
  function automatic int unsigned id_w(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

  // Intermediate AFC value given to a freshly loaded line:
  // I = ceil((max + min) / 2) of a w-bit counter, i.e. 2^(w-1).
  function automatic int unsigned afc_init(int unsigned w);
    return (((1 << w) - 1) + 0 + 1) / 2;
  endfunction

  // Class of a line as seen by the L1 fill/bypass decision.
  typedef enum logic [1:0] {
    CLS_PRIVATE_LESS = 2'b00,  // GCount = 0, AFC < I
    CLS_PRIVATE_FREQ = 2'b01,  // GCount = 0, AFC >= I
    CLS_SHARED_LESS  = 2'b10,  // GCount >= 1, AFC < I
    CLS_SHARED_FREQ  = 2'b11   // GCount >= 1, AFC >= I
  } line_class_e;

endpackage
