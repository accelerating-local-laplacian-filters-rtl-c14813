// tb_lpu: runs the three level processing units (DEPTH 1, 2 and 3, i.e. L1,
// L2 and L3) side by side on the same 32x32 sub-image streams and checks
// every output coefficient against the reference model. Tables come from
// alpha/beta/sigma settings of the detail and tone-mapping kinds.
// Sub-images are sent back to back (one column per cycle) and with random
// gaps. Checked besides the values: exactly one coefficient per sub-image,
// a fixed latency for gap-free sub-images, a sustained rate of one
// coefficient per 32 cycles, and the active/idle cycle counters, which
// must show a lower active fraction at one column every 8 cycles (a 32-bit
// feed) than at one column per cycle (256-bit feed). Each
// sub-image carries a random row/column phase; all four occur.
module tb_lpu;
  import llf_pkg::*;
  import llf_ref_pkg::*;

  localparam int W = 32;  // columns per sub-image

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg;
  logic in_valid, in_first;
  logic [PIX_W-1:0] in_g;
  logic [1:0] in_phase;
  logic [LANES-1:0][PIX_W-1:0] in_pix;
  logic [2:0] out_valid;
  logic signed [COEF_W-1:0] out_coef [3];
  logic perf_clear;
  logic [PERF_W-1:0] perf_active [3], perf_idle [3];

  int checks = 0, failures = 0;
  int td[256], te[256], sigma;
  int exp_q [3][$];
  int t_first_q [3][$];   // cycle of the first beat of each sub-image
  int lat_nogap [3][4];
  bit gap_q [3][$];
  int ph_q [3][$];
  int n_out [3];
  int cyc = 0;
  int n_phase [4] = '{0, 0, 0, 0};
  int n_gap = 0, n_b2b = 0, n_edge = 0, n_detail = 0;

  for (genvar d = 0; d < 3; d++) begin : g_dut
    lpu #(.DEPTH(d + 1)) dut (
      .clk, .rst_n, .cfg, .in_valid, .in_first, .in_g, .in_phase, .in_pix,
      .out_valid (out_valid[d]), .out_coef (out_coef[d]),
      .perf_clear, .perf_active (perf_active[d]), .perf_idle (perf_idle[d]));
  end

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  for (genvar d = 0; d < 3; d++) begin : g_mon
    always @(posedge clk) begin
      if (rst_n && out_valid[d]) begin
        int e, lat, ph;
        bit gp;
        n_out[d]++;
        checks++;
        if (exp_q[d].size() == 0) begin
          failures++;
          $display("FAIL L%0d: unexpected output", d + 1);
        end else begin
          e   = exp_q[d].pop_front();
          lat = cyc - t_first_q[d].pop_front();
          gp  = gap_q[d].pop_front();
          ph  = ph_q[d].pop_front();
          if (int'(out_coef[d]) != e) begin
            failures++;
            $display("FAIL L%0d: coef %0d expected %0d", d + 1, out_coef[d], e);
          end
          if (!gp) begin
            checks++;
            if (lat_nogap[d][ph] < 0) lat_nogap[d][ph] = lat;
            else if (lat != lat_nogap[d][ph]) begin
              failures++;
              $display("FAIL L%0d: latency %0d, earlier %0d", d + 1, lat, lat_nogap[d][ph]);
            end
          end
        end
      end
    end
  end

  task automatic load_tables();
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

  task automatic send_subimage(bit gaps, int period = 1);
    img_t img;
    int g, spread, ph;
    g  = $urandom_range(0, 255);
    ph = $urandom_range(0, 3);
    n_phase[ph]++;
    spread = ($urandom_range(0, 1) == 1) ? 255 : 40;
    for (int y = 0; y < LANES; y++)
      for (int x = 0; x < W; x++) begin
        int v = g + $urandom_range(0, 2 * spread) - spread;
        img[y][x] = (v < 0) ? 0 : (v > 255 ? 255 : v);
        if (is_edge(img[y][x], g, sigma)) n_edge++; else n_detail++;
      end
    for (int d = 0; d < 3; d++) begin
      exp_q[d].push_back(lpu_coef(img, LANES, W, g, sigma, td, te, d + 1, CENTER0, FILT_SHIFT, UP_SHIFT,
                                  ph % 2, ph / 2));
      t_first_q[d].push_back(cyc);
      gap_q[d].push_back(gaps || period > 1);
      ph_q[d].push_back(ph);
    end
    if (gaps) n_gap++; else n_b2b++;
    for (int x = 0; x < W; x++) begin
      in_valid = 1'b1;
      in_first = (x == 0);
      in_g     = (x == 0) ? 8'(g) : 8'($urandom);
      in_phase = (x == 0) ? 2'(ph) : 2'($urandom);
      for (int y = 0; y < LANES; y++) in_pix[y] = 8'(img[y][x]);
      @(posedge clk); #1;
      in_valid = 1'b0;
      if (gaps) repeat ($urandom_range(0, 3)) begin @(posedge clk); #1; end
      repeat (period - 1) begin @(posedge clk); #1; end
    end
  endtask

  initial begin
    int t0, n0;
    cfg = '0; in_valid = 1'b0; in_first = 1'b0; in_g = '0; in_phase = '0; in_pix = '0; perf_clear = 1'b0;
    for (int d = 0; d < 3; d++) begin lat_nogap[d] = '{-1, -1, -1, -1}; n_out[d] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    // Detail enhancement (alpha 0.25, beta 1, sigma 0.4).
    make_tables(0.25, 1.0, 0.4, td, te, sigma);
    load_tables();
    perf_clear = 1'b1; @(posedge clk); #1; perf_clear = 1'b0;
    t0 = cyc;
    n0 = 0;
    repeat (16) send_subimage(1'b0);
    repeat (60) begin @(posedge clk); #1; end
    // Rate: sixteen back-to-back sub-images, one coefficient each.
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (n_out[d] != 16) begin failures++; $display("FAIL L%0d: %0d outputs", d + 1, n_out[d]); end
      checks++;
      if (perf_active[d] + perf_idle[d] != PERF_W'(cyc - t0) || perf_active[d] < 16 * W
          || perf_idle[d] == 0) begin
        failures++;
        $display("FAIL L%0d: active %0d idle %0d over %0d cycles", d + 1, perf_active[d],
                 perf_idle[d], cyc - t0);
      end
      $display("L%0d: latency by phase %0d %0d %0d %0d cycles from first column, active %0d idle %0d",
               d + 1, lat_nogap[d][0], lat_nogap[d][1], lat_nogap[d][2], lat_nogap[d][3],
               perf_active[d], perf_idle[d]);
    end
    // Efficiency at a 32-bit-per-cycle feed (one column every 8 cycles)
    // must be below that at the full 256-bit feed.
    begin
      real eff_fast [3], eff_slow [3];
      for (int d = 0; d < 3; d++) eff_fast[d] = real'(perf_active[d]) / real'(perf_active[d] + perf_idle[d]);
      perf_clear = 1'b1; @(posedge clk); #1; perf_clear = 1'b0;
      repeat (4) send_subimage(1'b0, 8);
      repeat (60) begin @(posedge clk); #1; end
      for (int d = 0; d < 3; d++) begin
        eff_slow[d] = real'(perf_active[d]) / real'(perf_active[d] + perf_idle[d]);
        $display("L%0d: active fraction %.1f%% at 256 bits/cycle, %.1f%% at 32 bits/cycle",
                 d + 1, 100.0 * eff_fast[d], 100.0 * eff_slow[d]);
        checks++;
        if (!(eff_slow[d] < eff_fast[d])) begin
          failures++; $display("FAIL L%0d: efficiency does not drop with bandwidth", d + 1);
        end
      end
    end
    // Tone mapping (alpha 1, beta 0, sigma 0.1), with gaps.
    make_tables(1.0, 0.0, 0.1, td, te, sigma);
    load_tables();
    repeat (6) send_subimage(1'b1);
    // Inverse tone mapping with detail smoothing, mixed.
    make_tables(2.0, 1.5, 0.2, td, te, sigma);
    load_tables();
    repeat (6) send_subimage($urandom_range(0, 1) == 1);
    repeat (80) begin @(posedge clk); #1; end
    for (int d = 0; d < 3; d++) begin
      checks++;
      if (n_out[d] != 32 || exp_q[d].size() != 0) begin
        failures++; $display("FAIL L%0d: %0d outputs in total", d + 1, n_out[d]);
      end
    end
    if (n_gap == 0 || n_b2b == 0 || n_edge == 0 || n_detail == 0 ||
        n_phase[0] == 0 || n_phase[1] == 0 || n_phase[2] == 0 || n_phase[3] == 0) begin
      failures++; $display("FAIL coverage");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
