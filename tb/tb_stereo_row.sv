// tb_stereo_row: workload test - one full feature row of a 640 x 480 stereo pair.
//
// The testbench synthesises a 640 x 5 pixel stereo strip: a textured background at
// disparity 12 and a textured foreground object (left-image columns 300..419) at
// disparity 45, plus a little sensor noise in the right image. The background
// columns just left of the object are hidden from the right camera (occlusion).
// It applies its own 5x5 filters (box average; horizontal and vertical gradients as
// the difference of the two outer column / row pairs, divided by 8 and clamped to
// -127..127) to get the left and right feature maps, then runs every pixel of the
// row that has all 81 disparities (x = 80..635 of the 636-wide feature row, i.e.
// 556 pixels) through the machine at its default size, with counter maximum 16 and
// again with 1.
//
// For each pixel a floating-point evaluation of the same model (likelihood product
// per disparity, no-match probability) gives the reference MAP decision. Checked:
// agreement of the machine's MAP/no-match decision with the reference, accuracy
// against the true disparity on visible pixels, and the run time. The no-match rate
// on occluded pixels is only printed: with these filters and random textures many
// occluded pixels find a chance match, in the floating-point model as well.
// The mean run time per pixel is printed next to the clocks per pixel including
// the loading (82 clocks) and control (2 clocks) overhead.
module tb_stereo_row;
  import sbm_pkg::*;
  localparam int W = 640, H = 5, WF = W - 4, D_MAX = 80, M = D_MAX + 2, NM = D_MAX + 1;
  localparam int OBJ_L = 300, OBJ_R = 420, D_BG = 12, D_FG = 45;

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

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int il [H][W], ir [H][W];
  int bg [H][W + 64], fg [H][W + 64];
  feat3_t fl [WF], fr [WF];

  function automatic int clamp127(input int v);
    return (v > 127) ? 127 : (v < -127) ? -127 : v;
  endfunction

  function automatic feat3_t filt(input int img [H][W], input int x0);
    int s = 0, gh = 0, gv = 0;
    feat3_t f;
    for (int r = 0; r < 5; r++)
      for (int c = 0; c < 5; c++) begin
        s += img[r][x0 + c];
        if (c >= 3) gh += img[r][x0 + c];
        if (c <= 1) gh -= img[r][x0 + c];
        if (r >= 3) gv += img[r][x0 + c];
        if (r <= 1) gv -= img[r][x0 + c];
      end
    f.m  = feat_t'(s / 25);
    f.gh = feat_t'(clamp127(gh / 8));
    f.gv = feat_t'(clamp127(gv / 8));
    return f;
  endfunction

  function automatic real lh(input real p0, input real sg, input int d);
    return p0 + (1.0 - p0) * $exp(-(real'(d) * real'(d)) / (2.0 * sg * sg));
  endfunction

  // reference MAP: 0..D_MAX, or NM for no match
  function automatic int ref_map(input int x);
    real best, v, pnm;
    int arg = 0;
    best = -1.0;
    for (int d = 0; d <= D_MAX; d++) begin
      v = lh(0.02, 10.0, int'(fl[x].m)  - int'(fr[x-d].m))
        * lh(0.02, 10.0, int'(fl[x].gv) - int'(fr[x-d].gv))
        * lh(0.02, 10.0, int'(fl[x].gh) - int'(fr[x-d].gh));
      if (v > best) begin best = v; arg = d; end
    end
    pnm = lh(0.01, 8.0, int'(fl[x].gv));
    return (pnm >= best) ? NM : arg;
  endfunction

  // true disparity of left feature column x (image column x+2); -1 if occluded
  function automatic int truth(input int x);
    int xi = x + 2;
    if (xi >= OBJ_L && xi < OBJ_R) return D_FG;
    if (xi - D_BG + D_FG >= OBJ_L && xi - D_BG + D_FG < OBJ_R) return -1;
    return D_BG;
  endfunction

  task automatic do_row(input int nm, output real agree, output real acc, output real occ_nm,
                        output real mean_cyc);
    int n = 0, n_agree = 0, n_vis = 0, n_ok = 0, n_occ = 0, n_occ_nm = 0, n_vis_nm = 0;
    longint cyc_sum = 0;
    n_max = 5'(nm);
    for (int x = D_MAX; x < WF; x++) begin
      for (int d = 0; d < M; d++) begin
        wr_en = 1'b1; wr_row = 7'(d);
        wr_fl = fl[x];
        wr_fr = (d == NM) ? '0 : fr[x - d];
        @(posedge clk); #1;
      end
      wr_en = 1'b0;
      start = 1'b1; @(posedge clk); #1; start = 1'b0;
      while (!done) begin @(posedge clk); #1; end
      n++;
      cyc_sum += cycles;
      if (int'(map_idx) == ref_map(x)) n_agree++;
      if (truth(x) >= 0) begin
        n_vis++;
        if (int'(map_idx) == truth(x)) n_ok++;
        if (no_match) n_vis_nm++;
      end else begin
        n_occ++;
        if (no_match) n_occ_nm++;
      end
    end
    agree    = real'(n_agree) / n;
    acc      = real'(n_ok) / n_vis;
    occ_nm   = real'(n_occ_nm) / n_occ - real'(n_vis_nm) / n_vis;
    mean_cyc = real'(cyc_sum) / n;
    $display("n_max=%0d: %0d pixels, MAP agreement with float model %f, correct on visible %f, no-match on %0d occluded minus on visible %f, mean run cycles %f, mean clocks per pixel incl. load %f",
             nm, n, agree, acc, n_occ, occ_nm, mean_cyc, mean_cyc + real'(M) + 2.0);
  endtask

  initial begin
    real agree, acc, occ_nm, mc;
    // scene textures and images
    for (int r = 0; r < H; r++)
      for (int u = 0; u < W + 64; u++) begin
        bg[r][u] = $urandom_range(0, 255);
        fg[r][u] = $urandom_range(0, 255);
      end
    for (int r = 0; r < H; r++)
      for (int x = 0; x < W; x++) begin
        int noise;
        il[r][x] = (x >= OBJ_L && x < OBJ_R) ? fg[r][x] : bg[r][x];
        noise = int'($urandom_range(0, 8)) - 4;
        ir[r][x] = ((x + D_FG >= OBJ_L && x + D_FG < OBJ_R) ? fg[r][x + D_FG] : bg[r][x + D_BG]) + noise;
        if (ir[r][x] < 0) ir[r][x] = 0;
        if (ir[r][x] > 255) ir[r][x] = 255;
      end
    for (int x = 0; x < WF; x++) begin
      fl[x] = filt(il, x);
      fr[x] = filt(ir, x);
    end

    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    do_row(16, agree, acc, occ_nm, mc);
    chk(agree >= 0.9, "n_max=16: MAP agreement with the float model below 90 %");
    chk(acc >= 0.85, "n_max=16: accuracy on visible pixels below 85 %");
    chk(mc >= 16.0 && mc < 60.0, "n_max=16: mean run time out of range");
    do_row(1, agree, acc, occ_nm, mc);
    chk(agree >= 0.45, "n_max=1: MAP agreement with the float model below 45 %");
    chk(mc >= 1.0 && mc < 10.0, "n_max=1: mean run time out of range");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
