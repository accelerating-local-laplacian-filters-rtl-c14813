// remap_unit: the remap stage R at the head of every level processing unit.
//
// For a sub-image belonging to the Gaussian pixel g, every pixel i of the
// incoming column is classified as a detail (|i-g| <= sigma) or an edge
// (|i-g| > sigma) and remapped to
//   detail: g + sign(i-g) * Td[|i-g|],   Td[d] = sigma * f_d(d / sigma)
//   edge:   g + sign(i-g) * Te[|i-g|],   Te[d] = f_e(d - sigma) + sigma
// Td and Te are 256-entry tables that the host pre-computes for its alpha,
// beta and sigma and writes through the cfg port; sigma is written the same
// way. All LANES pixels of a column are remapped in the same cycle, each
// lane with its own read of the tables.
//
// Interface: one column per in_valid beat; in_first marks the first column
// of a sub-image and carries g on in_g (g is held for the rest of the
// sub-image). Timing: the remapped column appears one cycle after its input
// beat, with out_valid/out_first delayed alike. out_edge flags the lanes
// that took the edge branch.
//
// The table lookup indexed by |i-g| and the detail/edge split follow the
// paper. Own choices: 8-bit table entries, saturation of the result to
// [0,255], g latched at the first column, and r = g when i = g (sign 0).
module remap_unit
  import llf_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned W     = PIX_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cfg_wr_t             cfg,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic [W-1:0]        in_g,
  input  logic [N-1:0][W-1:0] in_pix,
  output logic                out_valid,
  output logic                out_first,
  output logic [N-1:0][W-1:0] out_pix,
  output logic [N-1:0]        out_edge
);

  localparam int unsigned DEPTH = 1 << W;

  logic [W-1:0] detail_lut [DEPTH];
  logic [W-1:0] edge_lut   [DEPTH];
  logic [W-1:0] sigma_q;
  logic [W-1:0] g_q;
  logic [W-1:0] g_eff;

  logic [N-1:0][W-1:0] remap_d;
  logic [N-1:0]        edge_d;

  // Host-side configuration: table entries and the threshold sigma.
  always_ff @(posedge clk) begin
    if (cfg.we && cfg.sel == CFG_DETAIL) detail_lut[cfg.addr] <= cfg.data;
    if (cfg.we && cfg.sel == CFG_EDGE)   edge_lut[cfg.addr]   <= cfg.data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                           sigma_q <= '0;
    else if (cfg.we && cfg.sel == CFG_SIGMA) sigma_q <= cfg.data;
  end

  // g of the current sub-image: taken from in_g on its first column.
  assign g_eff = in_first ? in_g : g_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     g_q <= '0;
    else if (in_valid && in_first)  g_q <= in_g;
  end

  always_comb begin
    for (int unsigned l = 0; l < N; l++) begin
      logic [W-1:0] d;
      logic [W-1:0] t;
      logic [W:0]   up;
      logic         pos;
      up  = '0;
      pos = in_pix[l] > g_eff;
      d   = pos ? in_pix[l] - g_eff : g_eff - in_pix[l];
      edge_d[l] = d > sigma_q;
      t   = edge_d[l] ? edge_lut[d] : detail_lut[d];
      if (d == '0) begin
        remap_d[l] = g_eff;
      end else if (pos) begin
        up = {1'b0, g_eff} + {1'b0, t};
        remap_d[l] = up[W] ? {W{1'b1}} : up[W-1:0];
      end else begin
        remap_d[l] = (t > g_eff) ? '0 : g_eff - t;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_first <= in_valid && in_first;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      out_pix  <= remap_d;
      out_edge <= edge_d;
    end
  end

endmodule
