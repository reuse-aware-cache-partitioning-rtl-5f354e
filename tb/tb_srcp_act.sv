// tb_srcp_act: checks the access count table against a reference copy with
// random whole-set writes and reads (read data one clock after the request)
// on a small 8-set, 4-way instance with 8-bit AFC and 2-bit GCount.
module tb_srcp_act;
  localparam int SETS = 8, WAYS = 4, AW = 8, GW = 2;
  int checks = 0, failures = 0, cycles = 0;

  logic clk = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  logic            rd_en, wr_en;
  logic [2:0]      rd_idx, wr_idx;
  logic [WAYS-1:0] rd_lc, wr_lc;
  logic [WAYS-1:0][AW-1:0] rd_afc, wr_afc;
  logic [WAYS-1:0][GW-1:0] rd_gc, wr_gc;

  srcp_act #(.NUM_SETS(SETS), .ASSOC(WAYS), .AFC_W(AW), .GC_W(GW)) dut (.*);

  logic [WAYS-1:0]         ref_lc  [SETS];
  logic [WAYS-1:0][AW-1:0] ref_afc [SETS];
  logic [WAYS-1:0][GW-1:0] ref_gc  [SETS];

  initial begin
    rd_en = 0; rd_idx = 0;
    // fill every set once
    for (int s = 0; s < SETS; s++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 3'(s);
      wr_lc = WAYS'($urandom); wr_afc = (WAYS*AW)'($urandom); wr_gc = (WAYS*GW)'($urandom);
      ref_lc[s] = wr_lc; ref_afc[s] = wr_afc; ref_gc[s] = wr_gc;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en = ($urandom % 2) == 1;
      wr_idx = 3'($urandom);
      wr_lc = WAYS'($urandom); wr_afc = (WAYS*AW)'($urandom); wr_gc = (WAYS*GW)'($urandom);
      rd_en = 1; rd_idx = 3'($urandom);
      if (rd_idx == wr_idx) rd_idx = rd_idx + 1;
      @(posedge clk); #1;
      if (wr_en) begin
        ref_lc[wr_idx] = wr_lc; ref_afc[wr_idx] = wr_afc; ref_gc[wr_idx] = wr_gc;
      end
      checks++;
      if (rd_lc !== ref_lc[rd_idx] || rd_afc !== ref_afc[rd_idx] || rd_gc !== ref_gc[rd_idx]) begin
        failures++; $display("FAIL set %0d", rd_idx);
      end
      // output holds while rd_en is low
      @(negedge clk); wr_en = 0; rd_en = 0;
      @(posedge clk); #1;
      checks++;
      if (rd_afc !== ref_afc[rd_idx]) begin failures++; $display("FAIL hold"); end
    end
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
