// tb_vf_pair_select: exhaustive test of V-f pair choice.
// The 5x5 table of levels printed in the paper's V-f figure is written here
// row by row; for each level, mode and kept frequency the chosen pair must
// carry the requested level, and must be the pair with the highest
// frequency (sprint), the lowest voltage (low power) or the kept frequency
// when one exists at that level.
module tb_vf_pair_select;
  import aim_pkg::*;

  level_t      level;
  boost_mode_e mode;
  logic        keep_f;
  logic [2:0]  cur_f;
  vf_pair_t    vf;
  int checks = 0, failures = 0;

  vf_pair_select dut (.*);

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // grid[f-1][v-1]: rows f1..f5, columns V1..V5 (figure prints V5..V1 left to right)
  int grid [5][5] = '{
    '{60, 55, 50, 45, 40},   // f1
    '{55, 50, 45, 40, 35},   // f2
    '{50, 45, 40, 35, 30},   // f3
    '{45, 40, 35, 30, 25},   // f4
    '{40, 35, 30, 25, 20}    // f5
  };

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    int best_f, best_v, want_f, want_v;
    for (int L = 20; L <= 60; L += 5) begin
      for (int md = 0; md < 2; md++) begin
        for (int kf = 0; kf <= 5; kf++) begin
          level = 7'(L); mode = boost_mode_e'(md); keep_f = (kf != 0); cur_f = 3'(kf);
          #1;
          chk(!vf.dvfs && vf.v_idx >= 1 && vf.v_idx <= 5 && vf.f_idx >= 1 && vf.f_idx <= 5, "range");
          if (vf.v_idx >= 1 && vf.v_idx <= 5 && vf.f_idx >= 1 && vf.f_idx <= 5)
            chk(grid[vf.f_idx-1][vf.v_idx-1] == L, $sformatf("L=%0d got V%0d f%0d", L, vf.v_idx, vf.f_idx));
          // reference choice
          best_f = 0; best_v = 0;
          for (int f = 1; f <= 5; f++) for (int v = 1; v <= 5; v++)
            if (grid[f-1][v-1] == L) begin
              if (md == 1 && f > best_f) begin best_f = f; best_v = v; end
              if (md == 0 && v > best_v) begin best_f = f; best_v = v; end
            end
          want_f = best_f; want_v = best_v;
          if (kf != 0)
            for (int v = 1; v <= 5; v++) if (grid[kf-1][v-1] == L) begin want_f = kf; want_v = v; end
          chk(int'(vf.f_idx) == want_f && int'(vf.v_idx) == want_v,
              $sformatf("L=%0d md=%0d kf=%0d got V%0d f%0d want V%0d f%0d", L, md, kf, vf.v_idx, vf.f_idx, want_v, want_f));
        end
      end
    end
    level = 7'd100; mode = MODE_SPRINT; keep_f = 0; cur_f = 0; #1;
    chk(vf.dvfs && vf.v_idx == 0 && vf.f_idx == 0, "DVFS at 100%");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
