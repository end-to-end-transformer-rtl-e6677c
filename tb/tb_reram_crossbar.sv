// tb_reram_crossbar: programs a random matrix column by column (checking the
// WLAT busy time per column), then runs normal and transposed VMMs and
// compares them with procedural products; done must come LAT cycles after
// start.
module tb_reram_crossbar;
  localparam int ROWS = 6, COLS = 4, IW = 10, LAT = 4, WLAT = 8, VMAX = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_valid, start, transpose, busy, done;
  logic [$clog2(COLS)-1:0] prog_col;
  logic signed [7:0] prog_data [ROWS];
  logic signed [IW-1:0] vin [VMAX];
  logic signed [31:0] vout [VMAX];
  logic [31:0] prog_count;
  int checks = 0, failures = 0;
  int M [ROWS][COLS];

  reram_crossbar #(.ROWS(ROWS), .COLS(COLS), .IW(IW), .LAT(LAT), .WLAT(WLAT)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    prog_valid = 0; start = 0; transpose = 0; prog_col = 0;
    for (int r = 0; r < ROWS; r++) prog_data[r] = 0;
    for (int j = 0; j < VMAX; j++) vin[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < COLS; c++) begin
      int b;
      @(negedge clk);
      prog_valid = 1; prog_col = 2'(c);
      for (int r = 0; r < ROWS; r++) begin M[r][c] = $urandom_range(255) - 128; prog_data[r] = 8'(M[r][c]); end
      @(negedge clk);
      prog_valid = 0;
      b = 0;
      while (busy) begin @(negedge clk); b++; end
      checks++;
      if (b != WLAT) begin failures++; $display("FAIL write time %0d", b); end
    end
    checks++;
    if (prog_count != COLS) begin failures++; $display("FAIL prog_count"); end
    for (int k = 0; k < 8; k++) begin
      int v [VMAX], lat;
      transpose = k[0];
      for (int j = 0; j < VMAX; j++) begin
        v[j] = (j < (transpose ? COLS : ROWS)) ? $urandom_range(511) - 256 : 0;
        vin[j] = IW'(v[j]);
      end
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      lat = 0;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != LAT) begin failures++; $display("FAIL latency %0d", lat); end
      for (int o = 0; o < (transpose ? ROWS : COLS); o++) begin
        longint a;
        a = 0;
        if (!transpose) for (int r = 0; r < ROWS; r++) a += v[r] * M[r][o];
        else            for (int c = 0; c < COLS; c++) a += v[c] * M[o][c];
        checks++;
        if (vout[o] != 32'(a)) begin failures++; $display("FAIL vmm t%0d out %0d: %0d vs %0d", transpose, o, vout[o], a); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
