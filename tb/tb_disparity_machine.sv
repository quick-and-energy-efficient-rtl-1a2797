// tb_disparity_machine: end-to-end test of the disparity machine at its default
// size (81 disparities + no-match line, 246 generators, counters up to 16).
//
// Each scenario loads all 82 lines from synthetic feature values and runs the pixel:
//   match       one disparity matches exactly: it must win in exactly n_max cycles
//               (its stream is always on), for n_max = 16 and n_max = 1;
//   occlusion   no disparity matches, strong texture: the no-match line (p = pnm0)
//               must win, after a run of plausible length for a rate of 0.01;
//   flat        uniform, untextured area: every line is always on, the tie goes to
//               the no-match line after exactly n_max cycles;
//   graded      two disparities with fractional likelihoods, run 300 times without
//               reloading: the MAP frequency, the mean normalised count of the
//               runner-up and the mean run time are compared with values computed
//               in floating point from the model's equations.
// It also checks the start-to-done latency (2 + cycles clocks), that the winner's
// count is n_max and no count exceeds it. Each mechanism (match overflow, no-match
// by occlusion, no-match by flat area, tie, n_max change, reload, restart from done)
// is counted and must occur at least once.
module tb_disparity_machine;
  import sbm_pkg::*;
  localparam int unsigned D_MAX = 80, M = D_MAX + 2, NM = D_MAX + 1;

  logic clk = 1'b0, rst_n = 1'b1;
  logic wr_en = 1'b0, start = 1'b0;
  logic [6:0] wr_row = '0;
  feat3_t wr_fl = '0, wr_fr = '0;
  logic [4:0] n_max = 5'd16;
  logic busy, done, no_match;
  logic [6:0] map_idx;
  logic [M-1:0][4:0] counts;
  logic [31:0] cycles;
  logic [M-1:0] post;

  disparity_machine dut (
    .clk, .rst_n, .wr_en, .wr_row, .wr_fl, .wr_fr, .start, .n_max,
    .busy, .done, .map_idx, .no_match, .counts, .cycles, .post
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_match = 0, n_occl = 0, n_flat = 0, n_tie = 0, n_nmax_change = 0, n_reload = 0, n_restart = 0;
  int last_nmax = 16;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // right features per disparity
  feat3_t fr_tab [M];
  feat3_t fl;

  task automatic load_pixel();
    for (int d = 0; d < M; d++) begin
      wr_en  = 1'b1;
      wr_row = 7'(d);
      wr_fl  = fl;
      wr_fr  = (d == NM) ? '0 : fr_tab[d];
      @(posedge clk); #1;
    end
    wr_en = 1'b0;
    n_reload++;
  endtask

  // a right feature value whose difference to v is at least 70 (likelihood = p0)
  function automatic feat_t far_from(input feat_t v, input int lo, input int hi);
    int r;
    do r = $urandom_range(0, hi - lo) + lo; while (r - int'(v) < 70 && int'(v) - r < 70);
    return feat_t'(r);
  endfunction

  task automatic run_pixel(input int nm, output int lat);
    if (done) n_restart++;
    if (nm != last_nmax) n_nmax_change++;
    last_nmax = nm;
    n_max = 5'(nm);
    start = 1'b1; @(posedge clk); #1; start = 1'b0;
    lat = 0;  // clocks after the edge that samples start
    while (!done && lat < 20000) begin @(posedge clk); #1; lat++; end
    if (!done) begin
      // a run that never ends: report and stop here
      failures++;
      $display("FAIL: no counter overflowed within %0d clocks", lat);
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
    chk(lat == int'(cycles) + 2, $sformatf("latency %0d cycles %0d", lat, cycles));
    chk(int'(counts[map_idx]) == nm, "winner count is n_max");
    for (int j = 0; j < M; j++) chk(int'(counts[j]) <= nm, "count above n_max");
  endtask

  function automatic int nfull(input int nm);
    int c = 0;
    for (int j = 0; j < M; j++) if (int'(counts[j]) == nm) c++;
    return c;
  endfunction

  real p_lh [3];

  function automatic real lh(input real p0, input real sg, input int d);
    return p0 + (1.0 - p0) * $exp(-(real'(d) * real'(d)) / (2.0 * sg * sg));
  endfunction

  initial begin
    int lat, d_true;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    // ---------------- match ----------------
    for (int t = 0; t < 4; t++) begin
      d_true = (t == 0) ? 37 : (t == 1) ? 0 : (t == 2) ? 80 : $urandom_range(0, 80);
      fl.m  = feat_t'($urandom_range(60, 200));
      fl.gv = feat_t'($urandom_range(60, 120));      // textured: P(nomatch) ~ pnm0
      fl.gh = -feat_t'($urandom_range(0, 127));
      for (int d = 0; d <= D_MAX; d++) begin
        fr_tab[d].m  = far_from(fl.m, 0, 255);
        fr_tab[d].gv = far_from(fl.gv, -127, 127);
        fr_tab[d].gh = far_from(fl.gh, -127, 127);
      end
      fr_tab[d_true] = fl;
      load_pixel();
      run_pixel((t == 3) ? 1 : 16, lat);
      chk(int'(map_idx) == d_true && !no_match, $sformatf("match: map %0d want %0d", map_idx, d_true));
      chk(int'(cycles) == ((t == 3) ? 1 : 16), $sformatf("match: cycles %0d", cycles));
      if (int'(map_idx) == d_true) n_match++;
      // same pixel again with the other counter size, without reloading
      run_pixel((t == 3) ? 16 : 1, lat);
      chk(int'(map_idx) == d_true, "match rerun");
      chk(int'(cycles) == ((t == 3) ? 16 : 1), "match rerun cycles");
    end

    // ---------------- occlusion ----------------
    for (int t = 0; t < 3; t++) begin
      fl.m  = feat_t'($urandom_range(60, 200));
      fl.gv = feat_t'($urandom_range(80, 127));
      fl.gh = feat_t'($urandom_range(0, 100));
      for (int d = 0; d <= D_MAX; d++) begin
        fr_tab[d].m  = far_from(fl.m, 0, 255);
        fr_tab[d].gv = far_from(fl.gv, -127, 127);
        fr_tab[d].gh = far_from(fl.gh, -127, 127);
      end
      load_pixel();
      run_pixel(16, lat);
      chk(no_match && int'(map_idx) == NM, "occlusion: no match");
      // 16 ones at rate ~0.01: mean 1600 cycles
      chk(int'(cycles) > 700 && int'(cycles) < 3500, $sformatf("occlusion: cycles %0d", cycles));
      if (no_match) n_occl++;
    end

    // ---------------- flat, untextured area ----------------
    fl.m = 9'sd128; fl.gv = 9'sd0; fl.gh = 9'sd0;
    for (int d = 0; d <= D_MAX; d++) fr_tab[d] = fl;
    load_pixel();
    for (int nm = 16; nm >= 1; nm -= 5) begin
      run_pixel(nm, lat);
      chk(no_match, "flat: no match");
      chk(int'(cycles) == nm, $sformatf("flat: cycles %0d want %0d", cycles, nm));
      chk(nfull(nm) == M, "flat: every counter full (tie)");
      if (no_match) n_flat++;
      if (nfull(nm) > 1) n_tie++;
    end

    // ---------------- graded likelihoods, statistics ----------------
    begin
      int wins10 = 0, runs = 300;
      real sum_c20 = 0.0, sum_cyc = 0.0, pa, pb, want_ratio;
      fl.m = 9'sd100; fl.gv = 9'sd90; fl.gh = 9'sd10;
      for (int d = 0; d <= D_MAX; d++) begin
        fr_tab[d].m  = far_from(fl.m, 0, 255);
        fr_tab[d].gv = far_from(fl.gv, -127, 127);
        fr_tab[d].gh = far_from(fl.gh, -127, 127);
      end
      fr_tab[10] = fl; fr_tab[10].m = 9'sd90;                      // m differs by 10
      fr_tab[20] = fl; fr_tab[20].m = 9'sd86; fr_tab[20].gh = 9'sd5; // 14 and 5
      load_pixel();
      pa = lh(0.02, 10.0, 10);
      pb = lh(0.02, 10.0, 14) * lh(0.02, 10.0, 5);
      want_ratio = pb / pa;
      for (int r = 0; r < runs; r++) begin
        run_pixel(16, lat);
        if (map_idx == 7'd10) wins10++;
        sum_c20 += real'(counts[20]) / 16.0;
        sum_cyc += real'(cycles);
      end
      $display("graded: P(win 10)=%f  mean n20/nmax=%f (ratio %f)  mean cycles=%f (16/pa=%f)",
               real'(wins10) / runs, sum_c20 / runs, want_ratio, sum_cyc / runs, 16.0 / pa);
      chk(wins10 > runs * 9 / 10, "graded: MAP mostly 10");
      chk(sum_c20 / runs > want_ratio - 0.08 && sum_c20 / runs < want_ratio + 0.08,
          "graded: runner-up normalised count");
      chk(sum_cyc / runs > 16.0 / pa - 3.0 && sum_cyc / runs < 16.0 / pa + 1.0,
          "graded: mean run time");
    end

    $display("mechanisms: match=%0d occlusion=%0d flat=%0d tie=%0d nmax_change=%0d reload=%0d restart=%0d",
             n_match, n_occl, n_flat, n_tie, n_nmax_change, n_reload, n_restart);
    chk(n_match > 0, "match never happened");
    chk(n_occl > 0, "occlusion no-match never happened");
    chk(n_flat > 0, "flat-area no-match never happened");
    chk(n_tie > 0, "tie never happened");
    chk(n_nmax_change > 0, "n_max change never happened");
    chk(n_reload > 1, "reload never happened");
    chk(n_restart > 0, "restart from done never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
