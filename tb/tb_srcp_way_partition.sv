// tb_srcp_way_partition: checks the static way partition of every core in
// the default 4-core, 16-way cache (core c owns ways 4c..4c+3) and in an
// 8-core, 16-way instance (core c owns ways 2c, 2c+1), and that the
// partitions of all cores cover every way exactly once.
module tb_srcp_way_partition;
  int checks = 0, failures = 0;

  logic [1:0]  core4;
  logic [15:0] mask4;
  logic [2:0]  core8;
  logic [15:0] mask8;

  srcp_way_partition dut4 (.core(core4), .own_mask(mask4));
  srcp_way_partition #(.NUM_CORES(8), .ASSOC(16)) dut8 (.core(core8), .own_mask(mask8));

  initial begin
    logic [15:0] expect_mask, cover4, cover8;
    cover4 = '0; cover8 = '0;
    for (int c = 0; c < 4; c++) begin
      core4 = 2'(c); #1;
      expect_mask = 16'h000F << (4 * c);
      checks++;
      if (mask4 !== expect_mask) begin
        failures++; $display("FAIL 4-core c=%0d mask=%h expect=%h", c, mask4, expect_mask);
      end
      checks++;
      if ((cover4 & mask4) != 0) begin failures++; $display("FAIL overlap c=%0d", c); end
      cover4 |= mask4;
    end
    for (int c = 0; c < 8; c++) begin
      core8 = 3'(c); #1;
      expect_mask = 16'h0003 << (2 * c);
      checks++;
      if (mask8 !== expect_mask) begin
        failures++; $display("FAIL 8-core c=%0d mask=%h expect=%h", c, mask8, expect_mask);
      end
      cover8 |= mask8;
    end
    checks++; if (cover4 != 16'hFFFF) failures++;
    checks++; if (cover8 != 16'hFFFF) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
