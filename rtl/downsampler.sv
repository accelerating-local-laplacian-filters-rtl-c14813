// downsampler: halves a column stream in both directions.
//
// Lanes: output lane k is input lane 2k (N lanes in, ceil(N/2) out).
// Columns: only the even-numbered columns of each sub-image are passed on;
// the column parity restarts at in_first.
//
// Timing: a kept column appears one cycle after its input beat; out_first
// marks column 0 of the sub-image. Because every kept column is followed by
// a dropped one, two output beats are never on consecutive cycles when the
// input is at most one beat per cycle.
//
// Keeping every alternate value follows the paper; the choice of the even
// samples and the framing are this design's.
module downsampler
  import llf_pkg::*;
#(
  parameter int unsigned N      = LANES - 2,
  parameter int unsigned DATA_W = PIX_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              in_valid,
  input  logic                              in_first,
  input  logic [N-1:0][DATA_W-1:0]          in_data,
  output logic                              out_valid,
  output logic                              out_first,
  output logic [(N+1)/2-1:0][DATA_W-1:0]    out_data
);

  localparam int unsigned M = (N + 1) / 2;

  logic odd_q;  // the next column of this sub-image has an odd index
  logic keep;

  assign keep = in_first || !odd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      odd_q     <= 1'b0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= in_valid && keep;
      out_first <= in_valid && in_first;
      if (in_valid) odd_q <= keep;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && keep) begin
      for (int unsigned k = 0; k < M; k++) out_data[k] <= in_data[2*k];
    end
  end

endmodule
