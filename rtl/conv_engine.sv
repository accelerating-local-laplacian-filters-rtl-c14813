// conv_engine: streaming 3x3 convolution with the modified Gaussian filter
//
//        | 1/16 1/8 1/16 |
//   G^ = | 1/8  1/4 1/8  |     (scale factor 4)
//        | 1/16 1/8 1/16 |
//
// on a stream of N-lane columns, giving N-2 filtered lanes per column.
// The second filter column is twice the first and the third is half the
// second, so no multiplier is needed:
//   stage 1: a bank of N-2 shift-and-accumulate units (sau) filters the
//            incoming column vertically, X1[i] = X0[i-1]>>4 + X0[i]>>3 +
//            X0[i+1]>>4;
//   stage 2: X2 = X1 << 1 of the previous column;
//   stage 3: X3 = X2 >> 1 of the column before that.
// The stages advance only on valid input beats, so after the third column
// of a sub-image the sum X1 + X2 + X3 held in the three stage registers is
// the filtered output column centred on the middle of the last three input
// columns. Gaps between beats are allowed.
//
// Interface: in_valid / in_first (first column of a sub-image) / in_data.
// Timing: out_valid is raised one cycle after the beat of input column t,
// t >= 2, with out_data = filtered column t-1; out_first marks output
// column 0 (input column 2). A sub-image of C columns gives C-2 outputs.
// Output is combinational from the stage registers.
//
// The three-stage structure and the shifts follow the paper. Own choices:
// valid/first framing, history cleared at in_first, truncating shifts on
// DATA_W-bit unsigned data.
module conv_engine
  import llf_pkg::*;
#(
  parameter int unsigned N      = LANES,
  parameter int unsigned DATA_W = PIX_W,
  parameter int unsigned SHIFT  = FILT_SHIFT
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic                       in_first,
  input  logic [N-1:0][DATA_W-1:0]   in_data,
  output logic                       out_valid,
  output logic                       out_first,
  output logic [N-3:0][DATA_W-1:0]   out_data
);

  localparam int unsigned M = N - 2;

  logic [M-1:0][DATA_W-1:0] sau_y;
  logic [M-1:0][DATA_W-1:0] x1_q;   // stage 1: SAU outputs
  logic [M-1:0][DATA_W:0]   x2_q;   // stage 2: 1-bit left shift
  logic [M-1:0][DATA_W-1:0] x3_q;   // stage 3: 1-bit right shift
  logic [1:0]               fill_q; // columns seen in this sub-image, saturating at 2
  logic [1:0]               fill_d;

  for (genvar i = 0; i < M; i++) begin : g_sau
    sau #(.DATA_W(DATA_W), .SHIFT(SHIFT)) u_sau (
      .a (in_data[i]),
      .b (in_data[i+1]),
      .c (in_data[i+2]),
      .y (sau_y[i])
    );
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      x1_q <= sau_y;
      for (int unsigned i = 0; i < M; i++) begin
        x2_q[i] <= {x1_q[i], 1'b0};
        x3_q[i] <= x2_q[i][DATA_W:1];
      end
    end
  end

  always_comb begin
    fill_d = fill_q;
    if (in_first)          fill_d = 2'd0;
    else if (fill_q != 2'd2) fill_d = fill_q + 2'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill_q    <= 2'd0;
      out_valid <= 1'b0;
      out_first <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      out_first <= 1'b0;
      if (in_valid) begin
        fill_q    <= fill_d;
        out_valid <= !in_first && fill_q >= 2'd1;
        out_first <= !in_first && fill_q == 2'd1;
      end
    end
  end

  // Sum of the three stages. Each SAU result is below 2^(DATA_W-2), so the
  // sum X1 + 2*X1' + X1'' fits DATA_W bits; the top bits are dropped.
  always_comb begin
    for (int unsigned i = 0; i < M; i++) begin
      logic [DATA_W+1:0] s;
      s = {2'b00, x1_q[i]} + {1'b0, x2_q[i]} + {2'b00, x3_q[i]};
      out_data[i] = s[DATA_W-1:0];
    end
  end

endmodule
