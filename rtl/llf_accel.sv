// llf_accel: local Laplacian filter accelerator, the FPGA part of the
// host/FPGA system.
//
// The host builds the Gaussian pyramid of the input image, cuts out the
// sub-image belonging to every Gaussian pixel and streams it, column by
// column, into this block; it collects the output Laplacian coefficients and
// collapses the pyramid itself. On chip there are NUM_CH x NUM_LVL = 9
// level processing units: for each of the R, G, B channels one unit per
// output pyramid level (L1, L2, L3 with 1, 2 and 3 filter/downsample
// rounds). All nine run in parallel, each on its own input stream (one
// 256-bit column of 32 pixels plus the value g per beat) and its own output
// stream (one signed 16-bit coefficient per sub-image). The remap tables and
// sigma are written through one configuration port shared by all units.
//
// Interface: unit [c][l] is channel c (0 = R, 1 = G, 2 = B) and level l
// (0 = L1, 1 = L2, 2 = L3). Per unit, in_valid/in_first/in_g/in_phase/in_pix and
// out_valid/out_coef behave as described in lpu; perf_active/perf_idle count
// its busy and waiting cycles. Units are independent: no unit ever waits for
// another, and there is no back-pressure. Timing is that of lpu: one coefficient
// per 32-column sub-image, 23 to 40 cycles after its first column.
//
// The nine-unit organisation, the stream widths and the channel/level
// parallelism follow the paper. The memory controllers that move data
// between PCIe and the streams are not part of this block; the streams are
// its ports.
module llf_accel
  import llf_pkg::*;
(
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  cfg_wr_t                                        cfg,
  input  logic [NUM_CH-1:0][NUM_LVL-1:0]                 in_valid,
  input  logic [NUM_CH-1:0][NUM_LVL-1:0]                 in_first,
  input  logic [NUM_CH-1:0][NUM_LVL-1:0][PIX_W-1:0]      in_g,
  input  logic [NUM_CH-1:0][NUM_LVL-1:0][1:0]            in_phase,
  input  logic [NUM_CH-1:0][NUM_LVL-1:0][STREAM_W-1:0]   in_pix,
  output logic [NUM_CH-1:0][NUM_LVL-1:0]                 out_valid,
  output logic [NUM_CH-1:0][NUM_LVL-1:0][COEF_W-1:0]     out_coef,
  input  logic                                           perf_clear,
  output logic [NUM_CH-1:0][NUM_LVL-1:0][PERF_W-1:0]     perf_active,
  output logic [NUM_CH-1:0][NUM_LVL-1:0][PERF_W-1:0]     perf_idle
);

  for (genvar c = 0; c < NUM_CH; c++) begin : g_ch
    for (genvar l = 0; l < NUM_LVL; l++) begin : g_lvl
      logic signed [COEF_W-1:0] coef;

      lpu #(.DEPTH(l + 1)) u_lpu (
        .clk, .rst_n, .cfg,
        .in_valid    (in_valid[c][l]),
        .in_first    (in_first[c][l]),
        .in_g        (in_g[c][l]),
        .in_phase    (in_phase[c][l]),
        .in_pix      (in_pix[c][l]),
        .out_valid   (out_valid[c][l]),
        .out_coef    (coef),
        .perf_clear,
        .perf_active (perf_active[c][l]),
        .perf_idle   (perf_idle[c][l])
      );

      assign out_coef[c][l] = coef;
    end
  end

endmodule
