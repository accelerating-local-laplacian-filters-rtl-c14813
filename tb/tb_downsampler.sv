// tb_downsampler: streams random sub-images (1 to 9 columns, 30 lanes) with
// random gaps and checks that exactly the even columns come out, one cycle
// after their beat, holding the even lanes, with first on column 0.
module tb_downsampler;
  import llf_pkg::*;

  localparam int N = LANES - 2;
  localparam int M = (N + 1) / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first;
  logic [N-1:0][PIX_W-1:0] in_data;
  logic out_valid, out_first;
  logic [M-1:0][PIX_W-1:0] out_data;

  int checks = 0, failures = 0, n_drop = 0, n_keep = 0;

  downsampler #(.N(N), .DATA_W(PIX_W)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_data, .out_valid, .out_first, .out_data);

  always #5 clk = ~clk;

  initial begin
    in_valid = 1'b0; in_first = 1'b0; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    #1;
    for (int s = 0; s < 60; s++) begin
      int w = $urandom_range(1, 9);
      for (int x = 0; x < w; x++) begin
        logic [N-1:0][PIX_W-1:0] col;
        for (int y = 0; y < N; y++) col[y] = 8'($urandom);
        in_valid = 1'b1; in_first = (x == 0); in_data = col;
        @(posedge clk); #1;
        in_valid = 1'b0;
        #1;
        checks++;
        if (out_valid != (x % 2 == 0) || out_first != (x == 0)) begin
          failures++;
          $display("FAIL framing x=%0d valid=%0b first=%0b", x, out_valid, out_first);
        end else if (x % 2 == 0) begin
          n_keep++;
          for (int k = 0; k < M; k++) begin
            checks++;
            if (out_data[k] != col[2*k]) begin failures++; $display("FAIL lane %0d", k); end
          end
        end else n_drop++;
        if ($urandom_range(0, 2) == 0) @(posedge clk); #1;
      end
    end
    if (n_drop == 0 || n_keep == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk); #1;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
