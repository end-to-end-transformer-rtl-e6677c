// tb_dcim_macro: loads a random int8 matrix, streams random input vectors and
// compares y = x*W with a procedural product. Checks that done comes exactly
// ROWS cycles after the first input element (one element per cycle).
module tb_dcim_macro;
  localparam int ROWS = 12, COLS = 7, DW = 8, ACC_W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en, start, x_valid, done;
  logic [$clog2(ROWS)-1:0] wr_row;
  logic [COLS*DW-1:0] wr_data;
  logic signed [DW-1:0] x_in;
  logic signed [ACC_W-1:0] y [COLS];
  int checks = 0, failures = 0;
  int w [ROWS][COLS];
  int x [ROWS];

  dcim_macro #(.ROWS(ROWS), .COLS(COLS), .DW(DW), .ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; start = 0; x_valid = 0; wr_row = 0; wr_data = 0; x_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = $clog2(ROWS)'(r);
      for (int c = 0; c < COLS; c++) begin
        w[r][c] = $urandom_range(255) - 128;
        wr_data[c*DW +: DW] = DW'(w[r][c]);
      end
    end
    @(negedge clk) wr_en = 0;
    for (int v = 0; v < 3; v++) begin
      int lat;
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 0;
      for (int r = 0; r < ROWS; r++) begin
        x[r] = (v == 2) ? -128 : $urandom_range(255) - 128;
        x_valid = 1; x_in = DW'(x[r]);
        @(negedge clk);
        lat++;
        checks++;
        if (done != (r == ROWS - 1)) begin failures++; $display("FAIL done timing at %0d", r); end
      end
      x_valid = 0;
      for (int c = 0; c < COLS; c++) begin
        longint acc;
        acc = 0;
        for (int r = 0; r < ROWS; r++) acc += x[r] * w[r][c];
        checks++;
        if (y[c] != ACC_W'(acc)) begin
          failures++;
          $display("FAIL vec %0d col %0d: %0d vs %0d", v, c, y[c], acc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
