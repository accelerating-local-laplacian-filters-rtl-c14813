// tb_llf_accel: end-to-end test of the nine-unit accelerator at its default
// size (3 channels x L1/L2/L3, 32-pixel columns, 32x32 sub-images).
//
// In each phase the remap tables are rewritten for one (alpha, beta, sigma)
// setting (detail enhancement, detail smoothing, tone mapping), then all
// nine units receive their own independent sub-image streams at once, each
// at its own input rate: one column per cycle (full 256-bit bandwidth) or
// one column every 8 cycles (32 bits per cycle). Every coefficient is
// checked against the reference model. The test counts, and requires at
// least once: detail and edge remaps, saturation in the remap, waiting
// (input gap) cycles, back-to-back sub-images, table rewrites between
// sub-images, all nine units busy in the same cycle, and several units
// delivering in the same cycle. It prints the active/idle counts of L3 at
// the two input rates.
module tb_llf_accel;
  import llf_pkg::*;
  import llf_ref_pkg::*;

  localparam int W = 32;
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

  int checks = 0, failures = 0;
  int td[256], te[256], sigma;
  int exp_q [NU][$];
  int n_out [NU];
  int n_sent [NU];
  int cnt_detail = 0, cnt_edge = 0, cnt_sat = 0, cnt_wait = 0, cnt_b2b = 0;
  int cnt_rewrite = 0, cnt_all_busy = 0, cnt_multi_out = 0;

  always #5 clk = ~clk;

  always @(posedge clk) begin
    if (rst_n) begin
      automatic int nv = 0;
      for (int c = 0; c < NUM_CH; c++)
        for (int l = 0; l < NUM_LVL; l++)
          if (out_valid[c][l]) begin
            automatic int u = c * NUM_LVL + l;
            int e;
            nv++;
            n_out[u]++;
            checks++;
            if (exp_q[u].size() == 0) begin
              failures++;
              $display("FAIL unit c%0d L%0d: unexpected output", c, l + 1);
            end else begin
              e = exp_q[u].pop_front();
              if (int'($signed(out_coef[c][l])) != e) begin
                failures++;
                $display("FAIL unit c%0d L%0d: coef %0d expected %0d", c, l + 1,
                         $signed(out_coef[c][l]), e);
              end
            end
          end
      if (nv > 1) cnt_multi_out++;
      if (&in_valid) cnt_all_busy++;
    end
  end

  task automatic load_tables(real alpha, real beta, real s);
    make_tables(alpha, beta, s, td, te, sigma);
    for (int d = 0; d < 256; d++) begin
      cfg = '{we: 1'b1, sel: CFG_DETAIL, addr: 8'(d), data: 8'(td[d])};
      @(posedge clk); #1;
      cfg = '{we: 1'b1, sel: CFG_EDGE, addr: 8'(d), data: 8'(te[d])};
      @(posedge clk); #1;
    end
    cfg = '{we: 1'b1, sel: CFG_SIGMA, addr: 8'd0, data: 8'(sigma)};
    @(posedge clk); #1;
    cfg = '0;
    cnt_rewrite++;
  endtask

  // Stream `count` sub-images into unit (c, l); `period` cycles per column.
  task automatic drive_unit(int c, int l, int count, int period);
    int u = c * NUM_LVL + l;
    for (int s = 0; s < count; s++) begin
      img_t img;
      int g, spread, ph;
      g  = $urandom_range(0, 255);
      ph = $urandom_range(0, 3);
      spread = (s % 2 == 0) ? 255 : 30;
      for (int y = 0; y < LANES; y++)
        for (int x = 0; x < W; x++) begin
          int v = g + $urandom_range(0, 2 * spread) - spread;
          img[y][x] = (v < 0) ? 0 : (v > 255 ? 255 : v);
          if (is_edge(img[y][x], g, sigma)) cnt_edge++; else cnt_detail++;
          if (img[y][x] != g) begin
            int r = remap_px(img[y][x], g, sigma, td, te);
            if (r == 0 || r == 255) cnt_sat++;
          end
        end
      exp_q[u].push_back(lpu_coef(img, LANES, W, g, sigma, td, te, l + 1, CENTER0,
                                  FILT_SHIFT, UP_SHIFT, ph % 2, ph / 2));
      n_sent[u]++;
      if (period == 1 && s > 0) cnt_b2b++;
      for (int x = 0; x < W; x++) begin
        in_valid[c][l] = 1'b1;
        in_first[c][l] = (x == 0);
        in_g[c][l]     = 8'(g);
        in_phase[c][l] = 2'(ph);
        for (int y = 0; y < LANES; y++) in_pix[c][l][8*y +: 8] = 8'(img[y][x]);
        @(posedge clk); #1;
        in_valid[c][l] = 1'b0;
        repeat (period - 1) begin
          cnt_wait++;
          @(posedge clk); #1;
        end
      end
    end
  endtask

  // One driver process per unit; run_phase starts them all and waits.
  int  phase_count = 0;
  bit  phase_slow_l3 = 1'b0;
  int  phase_id = 0;
  int  n_done = 0;

  for (genvar gc = 0; gc < NUM_CH; gc++) begin : g_drv_c
    for (genvar gl = 0; gl < NUM_LVL; gl++) begin : g_drv_l
      initial begin
        int seen = 0;
        forever begin
          while (phase_id == seen) @(posedge clk);
          seen = phase_id;
          #1;
          drive_unit(gc, gl, phase_count,
                     (phase_slow_l3 && gl == 2) ? 8 : ((gc + gl) % 3 == 0 ? 2 : 1));
          n_done++;
        end
      end
    end
  end

  task automatic run_phase(int count, bit slow_l3_only);
    phase_count   = count;
    phase_slow_l3 = slow_l3_only;
    n_done        = 0;
    phase_id++;
    while (n_done < NU) begin @(posedge clk); #1; end
    repeat (60) begin @(posedge clk); #1; end
  endtask

  initial begin
    cfg = '0; in_valid = '0; in_first = '0; in_g = '0; in_phase = '0; in_pix = '0; perf_clear = 1'b0;
    for (int u = 0; u < NU; u++) begin n_out[u] = 0; n_sent[u] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Detail enhancement, full input rate on most units.
    load_tables(0.25, 1.0, 0.1);
    perf_clear = 1'b1; @(posedge clk); #1; perf_clear = 1'b0;
    run_phase(10, 1'b0);
    $display("L3 (R) at 256 bits/cycle: active %0d idle %0d", perf_active[0][2], perf_idle[0][2]);

    // Detail smoothing; L3 fed at 32 bits per cycle.
    load_tables(2.0, 1.0, 0.4);
    perf_clear = 1'b1; @(posedge clk); #1; perf_clear = 1'b0;
    run_phase(6, 1'b1);
    $display("L3 (R) at 32 bits/cycle:  active %0d idle %0d", perf_active[0][2], perf_idle[0][2]);

    // Tone mapping.
    load_tables(1.0, 0.0, 0.2);
    run_phase(6, 1'b0);

    for (int u = 0; u < NU; u++) begin
      checks++;
      if (n_out[u] != n_sent[u] || exp_q[u].size() != 0) begin
        failures++;
        $display("FAIL unit %0d: %0d sub-images, %0d coefficients", u, n_sent[u], n_out[u]);
      end
    end
    $display("mechanisms: detail=%0d edge=%0d saturate=%0d wait=%0d back_to_back=%0d rewrite=%0d all_busy=%0d multi_out=%0d",
             cnt_detail, cnt_edge, cnt_sat, cnt_wait, cnt_b2b, cnt_rewrite, cnt_all_busy, cnt_multi_out);
    if (cnt_detail == 0) begin failures++; $display("FAIL never: detail remap"); end
    if (cnt_edge == 0) begin failures++; $display("FAIL never: edge remap"); end
    if (cnt_sat == 0) begin failures++; $display("FAIL never: saturation"); end
    if (cnt_wait == 0) begin failures++; $display("FAIL never: waiting for data"); end
    if (cnt_b2b == 0) begin failures++; $display("FAIL never: back-to-back sub-images"); end
    if (cnt_rewrite < 2) begin failures++; $display("FAIL never: table rewrite"); end
    if (cnt_all_busy == 0) begin failures++; $display("FAIL never: all nine units busy"); end
    if (cnt_multi_out == 0) begin failures++; $display("FAIL never: parallel outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
