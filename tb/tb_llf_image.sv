// tb_llf_image: whole-image run of the accelerator with a software model of
// the host side.
//
// The host part builds the Gaussian pyramid of a 64x64, three-channel test
// image (a gradient, a sharp step edge and texture, different per channel),
// then, for every pixel of levels 0, 1 and 2 whose 32x32 sub-image lies
// inside the image, cuts out the sub-image so that its coarse grid lines up
// with the image's and sends it to the unit of that channel and level with
// the matching phase. All nine units run at once, one column per cycle.
//
// Three passes:
//   1. identity remap (every table entry T[d] = d): the local pyramid must
//      then equal the ordinary Laplacian pyramid of the image,
//      L_k = G_k - expand(G_{k+1}), coefficient by coefficient;
//   2. detail enhancement (alpha 0.25, beta 1, sigma 0.2): every coefficient
//      is checked against the sub-image reference model, and the number of
//      coefficients that differ from the ordinary pyramid is reported;
//   3. tone mapping (alpha 1, beta 0, sigma 0.2), checked the same way.
// Per level the number of coefficients and the cycles taken are printed.
module tb_llf_image;
  import llf_pkg::*;
  import llf_ref_pkg::*;

  localparam int N0 = 64;                 // image side, full resolution
  localparam int W  = 32;                 // sub-image side
  localparam int NU = NUM_CH * NUM_LVL;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg;
  logic [NUM_CH-1:0][NUM_LVL-1:0]               in_valid, in_first;
  logic [NUM_CH-1:0][NUM_LVL-1:0][PIX_W-1:0]    in_g;
  logic [NUM_CH-1:0][NUM_LVL-1:0][1:0]          in_phase;
  logic [NUM_CH-1:0][NUM_LVL-1:0][STREAM_W-1:0] in_pix;
  logic [NUM_CH-1:0][NUM_LVL-1:0]               out_valid;
  logic [NUM_CH-1:0][NUM_LVL-1:0][COEF_W-1:0]   out_coef;
  logic perf_clear;
  logic [NUM_CH-1:0][NUM_LVL-1:0][PERF_W-1:0]   perf_active, perf_idle;

  llf_accel dut (.clk, .rst_n, .cfg, .in_valid, .in_first, .in_g, .in_phase, .in_pix,
                 .out_valid, .out_coef, .perf_clear, .perf_active, .perf_idle);

  // Gaussian pyramid of every channel: gp[c][k][y][x], level k side lev_n[k].
  int gp [NUM_CH][4][N0][N0];
  int lev_n [4];
  int td[256], te[256], sigma;

  int checks = 0, failures = 0;
  int exp_q [NU][$];
  int lap_q [NU][$];       // ordinary Laplacian coefficient at the same pixel
  int n_out [NU], n_sent [NU], n_differ [NU];
  int t_done [NU];
  int cyc = 0;
  int pass_id = 0;
  int n_done = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // Valid 3x3 filter of level k of channel c at output position (y, x).
  function automatic int filt(int c, int k, int y, int x);
    int s [3];
    for (int j = 0; j < 3; j++)
      s[j] = sau_f(gp[c][k][y][x+j], gp[c][k][y+1][x+j], gp[c][k][y+2][x+j], FILT_SHIFT);
    return s[0] + 2 * s[1] + s[2];
  endfunction

  // Sample (u, v) of the zero-inserted, x4 image of level k+1.
  function automatic int up_at(int c, int k, int u, int v);
    if (u < 0 || v < 0 || u % 2 != 0 || v % 2 != 0) return 0;
    return 4 * gp[c][k+1][u/2][v/2];
  endfunction

  // expand(G_{k+1}): the filter applied to the zero-inserted image, centred
  // on upsampled sample (u, v).
  function automatic int expand_at(int c, int k, int u, int v);
    int acc = 0;
    for (int dx = -1; dx <= 1; dx++)
      acc += (dx == 0 ? 2 : 1) * sau_f(up_at(c, k, u - 1, v + dx), up_at(c, k, u, v + dx),
                                       up_at(c, k, u + 1, v + dx), FILT_SHIFT);
    return acc;
  endfunction

  // Ordinary Laplacian coefficient L_k = G_k - expand(G_{k+1}) at level-k
  // pixel (y, x). Level-(k+1) sample m lies over level-k sample 2m+1, so
  // upsampled sample m lies over level-k sample m+1.
  function automatic int lap_at(int c, int k, int y, int x);
    return gp[c][k][y][x] - expand_at(c, k, y - 1, x - 1);
  endfunction

  task automatic load_tables_raw();
    for (int d = 0; d < 256; d++) begin
      cfg = '{we: 1'b1, sel: CFG_DETAIL, addr: 8'(d), data: 8'(td[d])};
      @(posedge clk); #1;
      cfg = '{we: 1'b1, sel: CFG_EDGE, addr: 8'(d), data: 8'(te[d])};
      @(posedge clk); #1;
    end
    cfg = '{we: 1'b1, sel: CFG_SIGMA, addr: 8'd0, data: 8'(sigma)};
    @(posedge clk); #1;
    cfg = '0;
  endtask

  // Host: stream every level-k pixel of channel c whose sub-image fits.
  task automatic drive_unit(int c, int k);
    int u = c * NUM_LVL + k;
    int p = level_center(CENTER0, k);
    int scale = 1 << k;
    for (int qy = p; qy < lev_n[k]; qy++)
      for (int qx = p; qx < lev_n[k]; qx++) begin
        int jy, jx, oy, ox, g;
        img_t img;
        jy = (qy % 2 == p % 2) ? p : p + 1;
        jx = (qx % 2 == p % 2) ? p : p + 1;
        oy = scale * (qy - jy);
        ox = scale * (qx - jx);
        if (oy + W > N0 || ox + W > N0) continue;
        g = gp[c][k][qy][qx];
        for (int y = 0; y < W; y++)
          for (int x = 0; x < W; x++)
            img[y][x] = gp[c][0][oy + y][ox + x];
        exp_q[u].push_back(lpu_coef(img, W, W, g, sigma, td, te, k + 1, CENTER0,
                                    FILT_SHIFT, UP_SHIFT, jy - p, jx - p));
        lap_q[u].push_back(lap_at(c, k, qy, qx));
        n_sent[u]++;
        for (int x = 0; x < W; x++) begin
          in_valid[c][k] = 1'b1;
          in_first[c][k] = (x == 0);
          in_g[c][k]     = 8'(g);
          in_phase[c][k] = {1'(jx - p), 1'(jy - p)};
          for (int y = 0; y < W; y++) in_pix[c][k][8*y +: 8] = 8'(img[y][x]);
          @(posedge clk); #1;
          in_valid[c][k] = 1'b0;
        end
      end
  endtask

  for (genvar gc = 0; gc < NUM_CH; gc++) begin : g_drv_c
    for (genvar gl = 0; gl < NUM_LVL; gl++) begin : g_drv_l
      initial begin
        int seen = 0;
        forever begin
          while (pass_id == seen) @(posedge clk);
          seen = pass_id;
          #1;
          drive_unit(gc, gl);
          n_done++;
        end
      end
    end
  end

  always @(posedge clk) begin
    if (rst_n)
      for (int c = 0; c < NUM_CH; c++)
        for (int l = 0; l < NUM_LVL; l++)
          if (out_valid[c][l]) begin
            automatic int u = c * NUM_LVL + l;
            int e, lp, got;
            got = int'($signed(out_coef[c][l]));
            n_out[u]++;
            t_done[u] = cyc;
            checks++;
            if (exp_q[u].size() == 0) begin
              failures++;
              $display("FAIL c%0d L%0d: unexpected output", c, l + 1);
            end else begin
              e  = exp_q[u].pop_front();
              lp = lap_q[u].pop_front();
              if (got != e) begin
                failures++;
                $display("FAIL c%0d L%0d: coef %0d expected %0d", c, l + 1, got, e);
              end
              if (got != lp) n_differ[u]++;
              if (pass_id == 1) begin
                checks++;
                if (got != lp) begin
                  failures++;
                  $display("FAIL c%0d L%0d: identity remap gave %0d, Laplacian %0d",
                           c, l + 1, got, lp);
                end
              end
            end
          end
  end

  task automatic run_pass();
    int t0;
    for (int u = 0; u < NU; u++) begin n_out[u] = 0; n_sent[u] = 0; n_differ[u] = 0; end
    t0 = cyc;
    n_done = 0;
    pass_id++;
    while (n_done < NU) begin @(posedge clk); #1; end
    repeat (60) begin @(posedge clk); #1; end
    for (int u = 0; u < NU; u++) begin
      checks++;
      if (n_out[u] != n_sent[u] || n_sent[u] == 0) begin
        failures++;
        $display("FAIL unit %0d: %0d sub-images, %0d coefficients", u, n_sent[u], n_out[u]);
      end
    end
    for (int l = 0; l < NUM_LVL; l++)
      $display("pass %0d L%0d: %0d coefficients per channel in %0d cycles, %0d differ from the ordinary pyramid",
               pass_id, l + 1, n_out[l], t_done[l] - t0, n_differ[l]);
  endtask

  initial begin
    cfg = '0; in_valid = '0; in_first = '0; in_g = '0; in_phase = '0; in_pix = '0;
    perf_clear = 1'b0;
    // Test image and its Gaussian pyramid.
    for (int c = 0; c < NUM_CH; c++)
      for (int y = 0; y < N0; y++)
        for (int x = 0; x < N0; x++) begin
          int v;
          v = 40 + 2 * x + c * 20 + ((x + 2 * y > 70 + 10 * c) ? 90 : 0)
              + $urandom_range(0, 24) - 12;
          gp[c][0][y][x] = (v < 0) ? 0 : (v > 255 ? 255 : v);
        end
    lev_n[0] = N0;
    for (int k = 1; k < 4; k++) begin
      lev_n[k] = (lev_n[k-1] - 2 + 1) / 2;
      for (int c = 0; c < NUM_CH; c++)
        for (int y = 0; y < lev_n[k]; y++)
          for (int x = 0; x < lev_n[k]; x++)
            gp[c][k][y][x] = filt(c, k - 1, 2 * y, 2 * x);
    end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Pass 1: identity remap.
    for (int d = 0; d < 256; d++) begin td[d] = d; te[d] = d; end
    sigma = 50;
    load_tables_raw();
    run_pass();

    // Pass 2: detail enhancement.
    make_tables(0.25, 1.0, 0.2, td, te, sigma);
    load_tables_raw();
    run_pass();
    checks++;
    if (n_differ[0] == 0) begin
      failures++;
      $display("FAIL detail enhancement left the pyramid unchanged");
    end

    // Pass 3: tone mapping (alpha 1, beta 0): only the edge table changes
    // anything.
    make_tables(1.0, 0.0, 0.2, td, te, sigma);
    load_tables_raw();
    run_pass();
    checks++;
    if (n_differ[0] == 0) begin
      failures++;
      $display("FAIL tone mapping left the pyramid unchanged");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
