// tb_srcp_access_classifier: exhaustive check of the reuse / sharing class
// and the L1 fill decision for every 8-bit AFC, 2-bit GCount and read/write.
// Expected values: frequently used iff AFC >= 128, shared iff GCount >= 1,
// L1 fill iff frequently used and not a write to a shared line.
module tb_srcp_access_classifier;
  int checks = 0, failures = 0;
  int n_fill = 0, n_bypass_less = 0, n_bypass_shared_write = 0;

  logic [7:0] afc;
  logic [1:0] gc;
  logic       write, freq_used, shared, l1_fill;
  srcp_pkg::line_class_e line_class;

  srcp_access_classifier dut (.*);

  initial begin
    bit e_freq, e_shared, e_fill;
    for (int a = 0; a < 256; a++)
      for (int g = 0; g < 4; g++)
        for (int w = 0; w < 2; w++) begin
          afc = 8'(a); gc = 2'(g); write = w[0];
          #1;
          e_freq   = (a >= 128);
          e_shared = (g >= 1);
          e_fill   = e_freq && !(e_shared && w == 1);
          checks++;
          if (freq_used !== e_freq || shared !== e_shared || l1_fill !== e_fill ||
              line_class !== srcp_pkg::line_class_e'({e_shared, e_freq})) begin
            failures++;
            $display("FAIL afc=%0d gc=%0d w=%0d -> f=%b s=%b fill=%b", a, g, w, freq_used, shared, l1_fill);
          end
          if (e_fill) n_fill++;
          else if (!e_freq) n_bypass_less++;
          else n_bypass_shared_write++;
        end
    checks++;
    if (n_fill == 0 || n_bypass_less == 0 || n_bypass_shared_write == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
