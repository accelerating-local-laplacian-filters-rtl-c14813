// tb_conv_engine: streams random sub-images (3 to 12 columns of 32 lanes)
// through the convolution engine with random gaps between columns and
// back-to-back sub-images, and checks every filtered column against the
// reference 3x3 convolution. It also checks the timing: output column j
// appears exactly one cycle after the beat of input column j+2, flagged
// first for j = 0, and nothing appears otherwise.
module tb_conv_engine;
  import llf_pkg::*;
  import llf_ref_pkg::*;

  localparam int N = LANES;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, in_first;
  logic [N-1:0][PIX_W-1:0] in_data;
  logic out_valid, out_first;
  logic [N-3:0][PIX_W-1:0] out_data;

  int checks = 0, failures = 0;
  int n_gap = 0, n_b2b = 0;

  conv_engine #(.N(N), .DATA_W(PIX_W), .SHIFT(4)) dut (
    .clk, .rst_n, .in_valid, .in_first, .in_data, .out_valid, .out_first, .out_data);

  always #5 clk = ~clk;

  task automatic run_subimage(int w, bit gaps);
    sub_t s, o;
    s.h = N; s.w = w;
    for (int y = 0; y < N; y++) for (int x = 0; x < w; x++) s.a[y][x] = $urandom_range(0, 255);
    if (w >= 3) o = conv(s, 4);
    for (int x = 0; x < w; x++) begin
      in_valid = 1'b1;
      in_first = (x == 0);
      for (int y = 0; y < N; y++) in_data[y] = 8'(s.a[y][x]);
      @(posedge clk); #1;
      in_valid = 1'b0;
      in_data  = '1;  // junk while idle
      #1;
      checks++;
      if (out_valid != (x >= 2) || out_first != (x == 2)) begin
        failures++;
        $display("FAIL timing x=%0d valid=%0b first=%0b", x, out_valid, out_first);
      end else if (x >= 2) begin
        for (int y = 0; y < N - 2; y++) begin
          checks++;
          if (int'(out_data[y]) != o.a[y][x-2]) begin
            failures++;
            $display("FAIL col %0d lane %0d got %0d exp %0d", x - 2, y, out_data[y], o.a[y][x-2]);
          end
        end
      end
      if (gaps && $urandom_range(0, 1) == 1) begin
        int k = $urandom_range(1, 3);
        n_gap++;
        repeat (k) begin
          @(posedge clk); #1;
          #1;
          checks++;
          if (out_valid) begin failures++; $display("FAIL output during gap"); end
        end
      end
    end
  endtask

  initial begin
    in_valid = 1'b0; in_first = 1'b0; in_data = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1'b1;
    @(posedge clk); #1;
    #1;
    for (int i = 0; i < 40; i++) begin
      run_subimage($urandom_range(3, 12), i % 2 == 1);
      n_b2b++;
    end
    run_subimage(32, 1'b0);
    if (n_gap == 0 || n_b2b == 0) begin failures++; $display("FAIL coverage"); end
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
