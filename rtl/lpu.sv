// lpu: Level Processing Unit. Computes one coefficient of the edge-aware
// output Laplacian pyramid per sub-image.
//
// The host streams, for one Gaussian pixel g at level DEPTH-1, the
// surrounding full-resolution sub-image (one LANES-pixel column per beat).
// The unit is the chain
//   R -> DEPTH x (CE -> D) -> U -> CE
// R remaps the sub-image around g; each (CE, D) pair builds the next level
// of the Gaussian pyramid of the remapped sub-image; U and the last CE
// expand level DEPTH back to level DEPTH-1. The output coefficient is
//   L = G_{DEPTH-1}[p][p] - expand(G_DEPTH)[p][p]
// taken at the pixel of interest. Its level-(DEPTH-1) row and column are
// P or P+1, where P is the full-resolution index CENTER0 mapped to level
// DEPTH-1 (llf_pkg::level_center). P lies on a sample of the coarser level
// G_DEPTH; P+1 lies between two. The host picks the phase per sub-image
// (in_phase[0] for the row, in_phase[1] for the column) so that the
// sub-image's coarse grid lines up with the image's: pixels at even
// level-(DEPTH-1) coordinates use phase 1, odd ones phase 0. L1, L2 and L3
// of the paper are DEPTH = 1, 2, 3.
//
// Interface: in_valid/in_first/in_g/in_pix as in remap_unit; cfg writes
// the remap tables; in_phase is sampled with in_first like in_g. out_valid
// pulses once per sub-image with out_coef, a signed COEF_W-bit coefficient.
// A sub-image is 32 columns (the lane count). Columns may arrive with gaps;
// the next sub-image may start right after the last column of the previous
// one, so at one column per cycle a unit delivers one coefficient every 32
// cycles. Latency from column 0 to out_valid without gaps: 23/27/33 cycles
// for DEPTH 1/2/3 with column phase 0, 24/30/40 with column phase 1.
//
// Activity counters: a cycle is active when any stage holds a valid column,
// otherwise the unit is waiting for data; both are counted until perf_clear.
//
// The stage chain and the lane-parallel, column-streaming organisation
// follow the paper. The final subtraction, the centre position, the phase
// input, the upsampler gain and the framing are this design's choices.
module lpu
  import llf_pkg::*;
#(
  parameter int unsigned DEPTH = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  cfg_wr_t                    cfg,
  input  logic                       in_valid,
  input  logic                       in_first,
  input  logic [PIX_W-1:0]           in_g,
  input  logic [1:0]                 in_phase,
  input  logic [LANES-1:0][PIX_W-1:0] in_pix,
  output logic                       out_valid,
  output logic signed [COEF_W-1:0]   out_coef,
  input  logic                       perf_clear,
  output logic [PERF_W-1:0]          perf_active,
  output logic [PERF_W-1:0]          perf_idle
);

  localparam int unsigned ND  = level_lanes(LANES, DEPTH);     // lanes of G_DEPTH
  localparam int unsigned NU  = 2 * ND;                         // after U
  localparam int unsigned NF  = NU - 2;                         // after the last CE
  localparam int unsigned UW  = PIX_W + UP_SHIFT;
  localparam int unsigned P   = level_center(CENTER0, DEPTH - 1);
  localparam int unsigned FI  = P - 2;                          // index in the last CE output

  // Level streams: level 0 is the remapped sub-image, level k is G_k of it.
  logic [DEPTH:0]                        lvl_valid;
  logic [DEPTH:0]                        lvl_first;
  logic [DEPTH:0][LANES-1:0][PIX_W-1:0]  lvl_data;
  logic [DEPTH:1]                        ce_valid;
  logic [LANES-1:0]                      edge_unused;

  remap_unit #(.N(LANES), .W(PIX_W)) u_remap (
    .clk, .rst_n, .cfg,
    .in_valid, .in_first, .in_g, .in_pix,
    .out_valid (lvl_valid[0]),
    .out_first (lvl_first[0]),
    .out_pix   (lvl_data[0]),
    .out_edge  (edge_unused)
  );

  for (genvar k = 1; k <= DEPTH; k++) begin : g_level
    localparam int unsigned NI = level_lanes(LANES, k - 1);
    localparam int unsigned NB = NI - 2;
    localparam int unsigned NO = level_lanes(LANES, k);

    logic                     b_first;
    logic [NB-1:0][PIX_W-1:0] b_data;
    logic [NO-1:0][PIX_W-1:0] a_data;

    conv_engine #(.N(NI), .DATA_W(PIX_W), .SHIFT(FILT_SHIFT)) u_ce (
      .clk, .rst_n,
      .in_valid  (lvl_valid[k-1]),
      .in_first  (lvl_first[k-1]),
      .in_data   (lvl_data[k-1][NI-1:0]),
      .out_valid (ce_valid[k]),
      .out_first (b_first),
      .out_data  (b_data)
    );

    downsampler #(.N(NB), .DATA_W(PIX_W)) u_ds (
      .clk, .rst_n,
      .in_valid  (ce_valid[k]),
      .in_first  (b_first),
      .in_data   (b_data),
      .out_valid (lvl_valid[k]),
      .out_first (lvl_first[k]),
      .out_data  (a_data)
    );

    assign lvl_data[k] = (LANES * PIX_W)'(a_data);
  end

  // Expand G_DEPTH to the resolution of level DEPTH-1.
  logic                   up_valid, up_first;
  logic [NU-1:0][UW-1:0]  up_data;
  logic                   f_valid, f_first;
  logic [NF-1:0][UW-1:0]  f_data;

  upsampler #(.N(ND), .IN_W(PIX_W), .GAIN_SHIFT(UP_SHIFT)) u_us (
    .clk, .rst_n,
    .in_valid  (lvl_valid[DEPTH]),
    .in_first  (lvl_first[DEPTH]),
    .in_data   (lvl_data[DEPTH][ND-1:0]),
    .out_valid (up_valid),
    .out_first (up_first),
    .out_data  (up_data)
  );

  conv_engine #(.N(NU), .DATA_W(UW), .SHIFT(FILT_SHIFT)) u_ce_up (
    .clk, .rst_n,
    .in_valid  (up_valid),
    .in_first  (up_first),
    .in_data   (up_data),
    .out_valid (f_valid),
    .out_first (f_first),
    .out_data  (f_data)
  );

  // Column index of the current beat of a stream, saturating.
  function automatic logic [COL_W-1:0] col_index(logic first, logic [COL_W-1:0] last_q);
    if (first)              return '0;
    if (last_q == '1)       return last_q;
    return last_q + 1'b1;
  endfunction

  logic [COL_W-1:0] g_col_q, f_col_q;   // index of the last beat seen
  logic [COL_W-1:0] g_col, f_col;
  logic [PIX_W-1:0] gc_q;               // G_{DEPTH-1} at the pixel of interest

  // The phase travels with its sub-image: sampled at the input, handed to
  // the level-(DEPTH-1) stream at its first column and to the last filter's
  // stream at its first column. A sub-image is long enough that the next
  // one cannot reach a stage before the current one has passed it.
  logic [1:0] ph_in_q, ph_g_q, ph_f_q;
  logic [1:0] ph_g, ph_f;

  assign g_col = col_index(lvl_first[DEPTH-1], g_col_q);
  assign f_col = col_index(f_first, f_col_q);
  assign ph_g  = lvl_first[DEPTH-1] ? ph_in_q : ph_g_q;
  assign ph_f  = f_first ? ph_g_q : ph_f_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph_in_q <= '0;
      ph_g_q  <= '0;
      ph_f_q  <= '0;
    end else begin
      if (in_valid && in_first)   ph_in_q <= in_phase;
      if (lvl_valid[DEPTH-1])     ph_g_q  <= ph_g;
      if (f_valid)                ph_f_q  <= ph_f;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_col_q   <= '1;
      f_col_q   <= '1;
      gc_q      <= '0;
      out_valid <= 1'b0;
      out_coef  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (lvl_valid[DEPTH-1]) begin
        g_col_q <= g_col;
        if (g_col == COL_W'(P + ph_g[1])) gc_q <= lvl_data[DEPTH-1][P + ph_g[0]];
      end
      if (f_valid) begin
        f_col_q <= f_col;
        if (f_col == COL_W'(FI + ph_f[1])) begin
          out_valid <= 1'b1;
          out_coef  <= COEF_W'($signed({1'b0, gc_q}))
                     - COEF_W'($signed({1'b0, f_data[FI + ph_f[0]]}));
        end
      end
    end
  end

  // Stream rule: a sub-image is exactly LANES columns long.
  logic [COL_W-1:0] in_col_q;
  logic             in_seen_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_col_q  <= '0;
      in_seen_q <= 1'b0;
    end else if (in_valid) begin
      in_col_q  <= col_index(in_first, in_col_q);
      in_seen_q <= 1'b1;
    end
  end

  a_subimage_len : assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && in_seen_q |-> (in_first == (in_col_q == COL_W'(LANES - 1))))
    else $error("lpu: sub-image is not %0d columns long", LANES);

  // Activity: busy while any stage carries a column, waiting otherwise.
  logic active;
  assign active = in_valid || (|lvl_valid) || (|ce_valid) || up_valid || f_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      perf_active <= '0;
      perf_idle   <= '0;
    end else if (perf_clear) begin
      perf_active <= '0;
      perf_idle   <= '0;
    end else if (active) begin
      perf_active <= perf_active + 1'b1;
    end else begin
      perf_idle   <= perf_idle + 1'b1;
    end
  end

endmodule
