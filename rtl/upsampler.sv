// upsampler: doubles a column stream in both directions by inserting zeros.
//
// Lanes: output lane 2k carries input lane k multiplied by 2^GAIN_SHIFT,
// output lane 2k+1 is zero (N lanes in, 2N out). Columns: every input
// column is followed by an all-zero column.
//
// Timing: the data column appears one cycle after its input beat and the
// zero column on the cycle after that. The input may therefore carry at
// most one beat every other cycle, which a downsampler in front of it
// guarantees; an assertion checks it. out_first marks the data column of
// column 0.
//
// Zero insertion follows the paper. The gain of 4 is this design's: the
// filter that follows sums to 1 and would otherwise leave the upsampled
// image at a quarter of its level, as in the usual Burt-Adelson expand
// step.
module upsampler
  import llf_pkg::*;
#(
  parameter int unsigned N          = 3,
  parameter int unsigned IN_W       = PIX_W,
  parameter int unsigned GAIN_SHIFT = UP_SHIFT
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic                                 in_first,
  input  logic [N-1:0][IN_W-1:0]               in_data,
  output logic                                 out_valid,
  output logic                                 out_first,
  output logic [2*N-1:0][IN_W+GAIN_SHIFT-1:0]  out_data
);

  localparam int unsigned OW = IN_W + GAIN_SHIFT;

  logic zero_pending_q;  // the zero column is due this cycle

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid      <= 1'b0;
      out_first      <= 1'b0;
      zero_pending_q <= 1'b0;
    end else begin
      out_valid      <= in_valid || zero_pending_q;
      out_first      <= in_valid && in_first;
      zero_pending_q <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int unsigned k = 0; k < N; k++) begin
        out_data[2*k]   <= OW'(in_data[k]) << GAIN_SHIFT;
        out_data[2*k+1] <= '0;
      end
    end else if (zero_pending_q) begin
      out_data <= '0;
    end
  end

  // Two data columns back to back would overwrite the pending zero column.
  a_input_rate : assert property (@(posedge clk) disable iff (!rst_n)
    zero_pending_q |-> !in_valid)
    else $error("upsampler: input beats on consecutive cycles");

endmodule
