// tb_srcp_tag_array: checks the tag store against a reference copy. After
// reset the clearing sweep must take exactly 8 clocks (one per set) and then
// every valid bit must read 0, whatever the memory held before; then random whole-set writes and reads
// are issued and each read, returned one clock after it was requested, is
// compared with the reference. Runs a small 8-set, 4-way, 6-bit-tag instance.
module tb_srcp_tag_array;
  localparam int SETS = 8, WAYS = 4, TW = 6;
  int checks = 0, failures = 0, cycles = 0;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic            rd_en, wr_en, init_busy;
  logic [2:0]      rd_idx, wr_idx;
  logic [WAYS-1:0] rd_valid, rd_dirty, wr_valid, wr_dirty;
  logic [WAYS-1:0][TW-1:0] rd_tag, wr_tag;

  srcp_tag_array #(.NUM_SETS(SETS), .ASSOC(WAYS), .TAG_W(TW)) dut (.*);

  logic [WAYS-1:0]         ref_valid [SETS];
  logic [WAYS-1:0]         ref_dirty [SETS];
  logic [WAYS-1:0][TW-1:0] ref_tag   [SETS];
  logic [SETS-1:0]         written;

  initial begin
    rd_en = 0; wr_en = 0; rd_idx = 0; wr_idx = 0;
    wr_valid = 0; wr_dirty = 0; wr_tag = 0; written = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    begin
      int n = 0;
      while (init_busy) begin @(negedge clk); n++; end
      checks++;
      if (n != SETS) begin failures++; $display("FAIL sweep took %0d clocks", n); end
    end
    // after reset: nothing valid
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk); rd_en = 1; rd_idx = 3'(s);
      @(negedge clk); rd_en = 0;
      checks++;
      if (rd_valid !== '0) begin failures++; $display("FAIL set %0d valid after reset", s); end
    end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 1;
      wr_idx = 3'($urandom);
      wr_valid = WAYS'($urandom); wr_dirty = WAYS'($urandom); wr_tag = (WAYS*TW)'($urandom);
      rd_en = 1;
      rd_idx = 3'($urandom);
      if (rd_idx == wr_idx) rd_idx = rd_idx + 1;   // never read the set being written
      @(posedge clk);
      #1;
      if (wr_en) begin
        ref_valid[wr_idx] = wr_valid; ref_dirty[wr_idx] = wr_dirty; ref_tag[wr_idx] = wr_tag;
        written[wr_idx] = 1;
      end
      checks++;
      if (rd_valid !== (written[rd_idx] ? ref_valid[rd_idx] : '0)) begin
        failures++; $display("FAIL valid set %0d", rd_idx);
      end
      if (written[rd_idx]) begin
        checks++;
        if (rd_dirty !== ref_dirty[rd_idx] || rd_tag !== ref_tag[rd_idx]) begin
          failures++; $display("FAIL dirty/tag set %0d", rd_idx);
        end
      end
      wr_en = 0; rd_en = 0;
    end
    // reset clears the valid bits again
    rst_n = 0; @(negedge clk); rst_n = 1;
    while (init_busy) @(negedge clk);
    rd_en = 1; rd_idx = wr_idx; @(negedge clk); rd_en = 0;
    checks++;
    if (rd_valid !== '0) begin failures++; $display("FAIL valid after second reset"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wait (cycles == 5000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
