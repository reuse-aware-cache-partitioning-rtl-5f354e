// tb_srcp_victim_select: random check of the victim choice in the default
// 16-way, 4-core configuration. The expected victim is worked out step by
// step: an empty way of the partition if any (lowest number), else among the
// partition's lines those with the lowest AFC, of those the lowest GCount,
// of those one with LC = 0 if there is one, lowest way number last.
// Counter values are drawn from small ranges so that ties are common.
module tb_srcp_victim_select;
  int checks = 0, failures = 0;
  int n_empty = 0, n_afc = 0, n_gc = 0, n_lc = 0, n_index = 0;

  logic [15:0] own_mask, valid, lc;
  logic [15:0][7:0] afc;
  logic [15:0][1:0] gc;
  logic [3:0] victim_way;
  logic victim_valid;

  srcp_victim_select dut (.*);

  initial begin
    int e_way, cnt, min_a, min_g, c;
    bit e_valid;
    bit cand [16];
    for (int i = 0; i < 4000; i++) begin
      c = $urandom % 4;
      own_mask = 16'h000F << (4 * c);
      valid = ($urandom % 4 == 0) ? 16'($urandom) : 16'hFFFF;
      lc = 16'($urandom);
      for (int w = 0; w < 16; w++) begin
        afc[w] = 8'($urandom % 3);
        gc[w]  = 2'($urandom % 3);
      end
      #1;
      e_way = -1; e_valid = 0;
      for (int w = 4 * c; w < 4 * c + 4; w++)
        if (!valid[w] && e_way < 0) e_way = w;
      if (e_way >= 0) n_empty++;
      else begin
        e_valid = 1;
        min_a = 999; min_g = 999;
        for (int w = 4 * c; w < 4 * c + 4; w++) if (afc[w] < min_a) min_a = afc[w];
        cnt = 0;
        for (int w = 4 * c; w < 4 * c + 4; w++) begin cand[w] = (afc[w] == min_a); cnt += cand[w]; end
        if (cnt == 1) n_afc++;
        for (int w = 4 * c; w < 4 * c + 4; w++) if (cand[w] && gc[w] < min_g) min_g = gc[w];
        cnt = 0;
        for (int w = 4 * c; w < 4 * c + 4; w++) begin cand[w] = cand[w] && (gc[w] == min_g); cnt += cand[w]; end
        if (cnt == 1 && e_way < 0) begin
          for (int w = 4 * c; w < 4 * c + 4; w++) if (cand[w]) e_way = w;
        end
        if (e_way < 0) begin
          // tie after AFC and GCount: prefer LC = 0
          cnt = 0;
          for (int w = 4 * c; w < 4 * c + 4; w++) if (cand[w] && !lc[w]) cnt++;
          if (cnt > 0)
            for (int w = 4 * c; w < 4 * c + 4; w++) if (cand[w] && lc[w]) cand[w] = 0;
          cnt = 0;
          for (int w = 4 * c; w < 4 * c + 4; w++) if (cand[w]) cnt++;
          if (cnt == 1) n_lc++; else n_index++;
          for (int w = 4 * c + 3; w >= 4 * c; w--) if (cand[w]) e_way = w;
        end else n_gc++;
      end
      checks++;
      if (victim_way !== 4'(e_way) || victim_valid !== e_valid) begin
        failures++;
        $display("FAIL c=%0d valid=%h lc=%h got %0d/%b expect %0d/%b", c, valid, lc,
                 victim_way, victim_valid, e_way, e_valid);
      end
    end
    $display("decided by: empty=%0d afc-or-gcount=%0d lc=%0d index=%0d", n_empty, n_gc, n_lc, n_index);
    checks++;
    if (n_empty == 0 || n_gc == 0 || n_lc == 0 || n_index == 0) failures++;
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
