// srcp_way_partition: static way partitioning of the shared LLC.
//
// Each core owns ASSOC/NUM_CORES consecutive ways of every set (core 0 owns
// ways 0..3, core 1 ways 4..7, ... in the default 4-core, 16-way cache). The
// block is purely combinational: for the core id on `core` it raises the bits
// of `own_mask` that belong to that core's partition. The per-core way count
// is the paper's equation (Associativity / Number of cores); giving each core
// a contiguous group of ways is this design's choice, the paper does not say
// which ways a core gets.
module srcp_way_partition #(
  parameter int unsigned NUM_CORES = srcp_pkg::NUM_CORES,
  parameter int unsigned ASSOC     = srcp_pkg::ASSOC,
  localparam int unsigned CORE_W   = srcp_pkg::id_w(NUM_CORES)
) (
  input  logic [CORE_W-1:0] core,
  output logic [ASSOC-1:0]  own_mask
);

  localparam int unsigned WAYS_PER_CORE = ASSOC / NUM_CORES;

  initial begin
    assert (ASSOC % NUM_CORES == 0 && WAYS_PER_CORE >= 1)
      else $error("ASSOC must be a multiple of NUM_CORES");
  end

  always_comb begin
    for (int unsigned w = 0; w < ASSOC; w++) begin
      own_mask[w] = (CORE_W'(w / WAYS_PER_CORE) == core);
    end
  end

endmodule
