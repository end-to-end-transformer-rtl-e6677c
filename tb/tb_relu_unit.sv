// tb_relu_unit: random vectors, including -128, 0 and 127, through the ReLU;
// every output must be max(0, x) one cycle after in_valid.
module tb_relu_unit;
  localparam int N = 9, DW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid;
  logic signed [DW-1:0] in_vec [N];
  logic signed [DW-1:0] out_vec [N];
  int checks = 0, failures = 0;

  relu_unit #(.N(N), .DW(DW)) dut (.*);

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0;
    for (int i = 0; i < N; i++) in_vec[i] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 20; v++) begin
      int x [N];
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        x[i] = (i == 0) ? -128 : (i == 1) ? 127 : (i == 2) ? 0 : $urandom_range(255) - 128;
        in_vec[i] = DW'(x[i]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL out_valid"); end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (out_vec[i] != DW'((x[i] > 0) ? x[i] : 0)) begin
          failures++;
          $display("FAIL relu(%0d) = %0d", x[i], out_vec[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
