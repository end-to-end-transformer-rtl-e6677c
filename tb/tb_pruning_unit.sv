// tb_pruning_unit: the 4x4 int8 example of the CPQ figure, pruned with
// threshold 9, must give the printed pruned matrix (8 of 16 kept, 50%).
// Random values then check |x| >= thr against the keep flag and counters.
module tb_pruning_unit;
  localparam int DW = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [DW-1:0] thr;
  logic in_valid, out_valid, out_keep;
  logic signed [DW-1:0] in_data, out_data;
  logic [31:0] kept_cnt, pruned_cnt;
  int checks = 0, failures = 0;

  pruning_unit #(.DW(DW)) dut (.*);

  int orig   [16] = '{3, 5, -7, 9, 20, 18, 35, -4, 8, -2, 11, 68, 0, -15, 30, 7};
  int pruned [16] = '{0, 0, 0, 9, 20, 18, 35, 0, 0, 0, 11, 68, 0, -15, 30, 0};

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nk;
    thr = 9; in_valid = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = DW'(orig[i]);
      @(posedge clk); #1;
      checks++;
      if (!out_valid || out_data != DW'(pruned[i]) || out_keep != (pruned[i] != 0)) begin
        failures++;
        $display("FAIL element %0d: %0d keep %0d", i, out_data, out_keep);
      end
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (kept_cnt != 8 || pruned_cnt != 8) begin failures++; $display("FAIL counts %0d %0d", kept_cnt, pruned_cnt); end
    nk = 8;
    thr = 40;
    for (int i = 0; i < 200; i++) begin
      int x, m;
      x = $urandom_range(255) - 128;
      m = (x < 0) ? -x : x;
      @(negedge clk);
      in_valid = 1; in_data = DW'(x);
      @(posedge clk); #1;
      checks++;
      if (out_keep != (m >= 40) || out_data != DW'((m >= 40) ? x : 0)) begin
        failures++;
        $display("FAIL random %0d", x);
      end
      if (m >= 40) nk++;
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (kept_cnt != 32'(nk) || kept_cnt + pruned_cnt != 216) begin failures++; $display("FAIL final counts"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
