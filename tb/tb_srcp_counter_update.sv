// tb_srcp_counter_update: random check of the LC / AFC / GCount next-state
// logic in the default 16-way, 4-core configuration. The reference applies
// the rules one by one: local hit -> AFC+1 (stop at 255) and LC set; global
// hit -> GCount+1 (stop at 3); miss -> AFC-1 and GCount-1 (stop at 0) over
// the requester's four ways, then the fill way gets AFC = 128, GCount = 0
// and LC set; whenever a local touch would leave all valid ways of the
// partition with LC = 1, the partition's other LC bits are cleared.
// Counter values are biased to the limits so saturation is exercised.
module tb_srcp_counter_update;
  int checks = 0, failures = 0;
  int n_local = 0, n_global = 0, n_miss = 0, n_sat = 0, n_lc_clear = 0;

  logic        hit;
  logic [3:0]  hit_way, fill_way;
  logic [15:0] own_mask, valid, lc, new_lc;
  logic [15:0][7:0] afc, dec_afc, new_afc;
  logic [15:0][1:0] gc, dec_gc, new_gc;
  logic local_hit;

  srcp_counter_update dut (.*);

  function automatic logic [7:0] pick_afc();
    case ($urandom % 4)
      0: return 8'd0;
      1: return 8'd255;
      2: return 8'd1;
      default: return 8'($urandom);
    endcase
  endfunction

  initial begin
    logic [15:0]      e_lc, vn;
    logic [15:0][7:0] e_afc, e_dafc;
    logic [15:0][1:0] e_gc, e_dgc;
    bit e_local, all_set;
    int c, lo, t;
    for (int i = 0; i < 5000; i++) begin
      c = $urandom % 4; lo = 4 * c;
      own_mask = 16'h000F << lo;
      hit = ($urandom % 2) == 1;
      hit_way = 4'($urandom);
      fill_way = 4'(lo + $urandom % 4);
      valid = ($urandom % 3 == 0) ? 16'($urandom) : 16'hFFFF;
      lc = 16'($urandom);
      for (int w = 0; w < 16; w++) begin afc[w] = pick_afc(); gc[w] = 2'($urandom); end
      #1;
      e_afc = afc; e_gc = gc; e_lc = lc; e_dafc = afc; e_dgc = gc;
      e_local = hit && (hit_way / 4 == c);
      t = -1;
      if (!hit) begin
        for (int w = lo; w < lo + 4; w++) begin
          e_dafc[w] = (afc[w] == 0) ? 8'd0 : afc[w] - 8'd1;
          e_dgc[w]  = (gc[w] == 0) ? 2'd0 : gc[w] - 2'd1;
        end
        e_afc = e_dafc; e_gc = e_dgc;
        e_afc[fill_way] = 8'd128; e_gc[fill_way] = 2'd0;
        t = fill_way; n_miss++;
      end else if (e_local) begin
        e_afc[hit_way] = (afc[hit_way] == 255) ? 8'd255 : afc[hit_way] + 8'd1;
        if (afc[hit_way] == 255) n_sat++;
        t = hit_way; n_local++;
      end else begin
        e_gc[hit_way] = (gc[hit_way] == 3) ? 2'd3 : gc[hit_way] + 2'd1;
        if (gc[hit_way] == 3) n_sat++;
        n_global++;
      end
      if (t >= 0) begin
        vn = valid; if (!hit) vn[fill_way] = 1;
        e_lc[t] = 1;
        all_set = 1;
        for (int w = lo; w < lo + 4; w++) if (vn[w] && !e_lc[w]) all_set = 0;
        if (all_set) begin
          for (int w = lo; w < lo + 4; w++) if (w != t) e_lc[w] = 0;
          n_lc_clear++;
        end
      end
      checks++;
      if (new_afc !== e_afc || new_gc !== e_gc || new_lc !== e_lc ||
          dec_afc !== e_dafc || dec_gc !== e_dgc || local_hit !== e_local) begin
        failures++;
        $display("FAIL i=%0d hit=%b way=%0d core=%0d", i, hit, hit ? hit_way : fill_way, c);
      end
    end
    $display("local=%0d global=%0d miss=%0d saturated=%0d lc_clear=%0d",
             n_local, n_global, n_miss, n_sat, n_lc_clear);
    checks++;
    if (n_local == 0 || n_global == 0 || n_miss == 0 || n_sat == 0 || n_lc_clear == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
