// tb_remap_unit: loads detail/edge tables computed from alpha, beta, sigma
// (and, in a second phase, random tables), streams random columns with
// random g and checks every remapped lane, the edge flags and the one-cycle
// latency against the reference remap function.
module tb_remap_unit;
  import llf_pkg::*;
  import llf_ref_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  cfg_wr_t cfg;
  logic in_valid, in_first;
  logic [PIX_W-1:0] in_g;
  logic [LANES-1:0][PIX_W-1:0] in_pix;
  logic out_valid, out_first;
  logic [LANES-1:0][PIX_W-1:0] out_pix;
  logic [LANES-1:0] out_edge;

  int checks = 0, failures = 0;
  int td[256], te[256], sigma;
  int n_edge = 0, n_detail = 0, n_clamp = 0;

  remap_unit dut (.clk, .rst_n, .cfg, .in_valid, .in_first, .in_g, .in_pix,
                  .out_valid, .out_first, .out_pix, .out_edge);

  always #5 clk = ~clk;

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

  // Send one sub-image of ncol columns; check each output a cycle later.
  task automatic run_subimage(int ncol, int g);
    logic [LANES-1:0][PIX_W-1:0] pix;
    for (int col = 0; col < ncol; col++) begin
      for (int l = 0; l < LANES; l++) pix[l] = 8'($urandom);
      if (col == 1) pix[0] = 8'(g);  // exercise i == g
      in_valid = 1'b1;
      in_first = (col == 0);
      in_g     = (col == 0) ? 8'(g) : 8'($urandom);  // g only valid on first
      in_pix   = pix;
      @(posedge clk); #1;
      in_valid = 1'b0;
      #1;
      checks++;
      if (!out_valid || out_first != (col == 0)) begin
        failures++;
        $display("FAIL framing col=%0d valid=%0b first=%0b", col, out_valid, out_first);
      end
      for (int l = 0; l < LANES; l++) begin
        int exp;
        exp = remap_px(int'(pix[l]), g, sigma, td, te);
        if (is_edge(int'(pix[l]), g, sigma)) n_edge++; else n_detail++;
        if (int'(pix[l]) != g && (exp == 0 || exp == 255)) n_clamp++;
        checks++;
        if (int'(out_pix[l]) != exp || out_edge[l] != is_edge(int'(pix[l]), g, sigma)) begin
          failures++;
          $display("FAIL lane %0d i=%0d g=%0d out=%0d exp=%0d", l, pix[l], g, out_pix[l], exp);
        end
      end
      if ($urandom_range(0, 2) == 0) @(posedge clk);  // gap
    end
  endtask

  initial begin
    cfg = '0; in_valid = 1'b0; in_first = 1'b0; in_g = '0; in_pix = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    // Detail enhancement, then tone mapping, then random tables.
    make_tables(0.25, 1.0, 0.2, td, te, sigma);
    load_tables();
    repeat (20) run_subimage(4, $urandom_range(0, 255));
    make_tables(1.0, 0.0, 0.1, td, te, sigma);
    load_tables();
    repeat (20) run_subimage(4, $urandom_range(0, 255));
    for (int d = 0; d < 256; d++) begin td[d] = $urandom_range(0, 255); te[d] = $urandom_range(0, 255); end
    sigma = 60;
    load_tables();
    repeat (20) run_subimage(4, $urandom_range(0, 255));
    if (n_edge == 0 || n_detail == 0 || n_clamp == 0) begin
      failures++;
      $display("FAIL coverage edge=%0d detail=%0d clamp=%0d", n_edge, n_detail, n_clamp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk); #1;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
