// tb_upsampler: feeds 7-lane columns at one beat every two or more cycles
// and checks that each becomes a data column (even lanes = input * 4, odd
// lanes = 0) one cycle later followed by an all-zero column the cycle
// after, with first on the data column of column 0 and nothing in between.
module tb_upsampler;
  import llf_pkg::*;

  localparam int N = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first;
  logic [N-1:0][PIX_W-1:0] in_data;
  logic out_valid, out_first;
  logic [2*N-1:0][PIX_W+UP_SHIFT-1:0] out_data;

  int checks = 0, failures = 0;

  upsampler #(.N(N), .IN_W(PIX_W), .GAIN_SHIFT(UP_SHIFT)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_data, .out_valid, .out_first, .out_data);

  always #5 clk = ~clk;

  initial begin
    in_valid = 1'b0; in_first = 1'b0; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    #1;
    for (int s = 0; s < 40; s++) begin
      int w = $urandom_range(1, 6);
      for (int x = 0; x < w; x++) begin
        logic [N-1:0][PIX_W-1:0] col;
        for (int y = 0; y < N; y++) col[y] = 8'($urandom);
        in_valid = 1'b1; in_first = (x == 0); in_data = col;
        @(posedge clk); #1;
        in_valid = 1'b0;
        #1;
        checks++;
        if (!out_valid || out_first != (x == 0)) begin
          failures++; $display("FAIL data column framing");
        end
        for (int k = 0; k < N; k++) begin
          checks++;
          if (int'(out_data[2*k]) != 4 * int'(col[k]) || out_data[2*k+1] != '0) begin
            failures++; $display("FAIL lane %0d got %0d exp %0d", k, out_data[2*k], 4 * col[k]);
          end
        end
        @(posedge clk); #1;
        #1;
        checks++;
        if (!out_valid || out_first || out_data != '0) begin
          failures++; $display("FAIL zero column");
        end
        repeat ($urandom_range(0, 2)) begin
          @(posedge clk); #1;
          #1;
          checks++;
          if (out_valid) begin failures++; $display("FAIL output while idle"); end
        end
      end
    end
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
