// tb_sda_submatrix_pipeline: programs W_Q, W_K^T, X and W_V column by column,
// streams the N rows of X and compares every result row with a procedural
// attention computed the standard way (K = X W_K, V = X W_V are never formed
// by the unit; the reference uses the decomposed products with the same
// fixed-point scaling and the softmax table arithmetic). Also checks that
// rows overlap (overlap_cycles > 0, total time well below N times the latency
// of one row), that the shared X crossbar made stage 3 wait at least once,
// and that no crossbar was written after initialisation.
module tb_sda_submatrix_pipeline;
  import pim_ref_pkg::*;
  localparam int N = 6, D = 16, DK = 8, SHIFT = 8, PW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prog_valid, prog_ready, x_valid, x_ready, res_valid;
  logic [1:0] prog_sel;
  logic [$clog2(D)-1:0] prog_col;
  logic signed [7:0] prog_data [PW];
  logic signed [7:0] x_row [D];
  logic [$clog2(N)-1:0] res_idx;
  logic signed [7:0] res_row [DK];
  logic [31:0] overlap_cycles, x_stalls, prog_columns;
  int checks = 0, failures = 0;

  sda_submatrix_pipeline #(.N(N), .D(D), .DK(DK), .SHIFT(SHIFT)) dut (.*);

  int X [N][D];
  int WQ [D][DK];
  int WK [D][DK];
  int WV [D][DK];
  int ref_res [N][DK];
  int got [N];
  int t_start, t_first, t_end, nres;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic prog(input int sel, input int col, input int vals [], input int n);
    @(negedge clk);
    while (!prog_ready) @(negedge clk);
    prog_valid = 1; prog_sel = 2'(sel); prog_col = $clog2(D)'(col);
    for (int r = 0; r < PW; r++) prog_data[r] = (r < n) ? 8'(vals[r]) : 8'sd0;
    @(negedge clk);
    prog_valid = 0;
  endtask

  function automatic void model();
    for (int i = 0; i < N; i++) begin
      int q [DK], r [D], p [D], s [N];
      longint o [N], e [N], mx, es, a;
      for (int c = 0; c < DK; c++) begin
        a = 0; for (int j = 0; j < D; j++) a += X[i][j] * WQ[j][c];
        q[c] = sat8i(a >>> SHIFT);
      end
      for (int j = 0; j < D; j++) begin     // R = Q * W_K^T
        a = 0; for (int c = 0; c < DK; c++) a += q[c] * WK[j][c];
        r[j] = sat8i(a >>> SHIFT);
      end
      for (int t = 0; t < N; t++) begin     // Out = R * X^T
        o[t] = 0; for (int j = 0; j < D; j++) o[t] += r[j] * X[t][j];
        if (t == 0 || o[t] > mx) mx = o[t];
      end
      es = 0;
      for (int t = 0; t < N; t++) begin e[t] = sm_e(o[t], mx); es += e[t]; end
      for (int t = 0; t < N; t++) s[t] = int'((e[t] * 256 + es / 2) / es);
      for (int j = 0; j < D; j++) begin     // P = S * X
        a = 0; for (int t = 0; t < N; t++) a += s[t] * X[t][j];
        p[j] = sat8i(a >>> 8);
      end
      for (int c = 0; c < DK; c++) begin    // Res = P * W_V
        a = 0; for (int j = 0; j < D; j++) a += p[j] * WV[j][c];
        ref_res[i][c] = sat8i(a >>> SHIFT);
      end
    end
  endfunction

  int cyc = 0, x_interleave = 0;
  always @(posedge clk) begin
    cyc++;
    // a later row's R*X^T starts while an earlier row still needs S*X
    if (rst_n && dut.go3 && (dut.sm_busy || dut.fs)) x_interleave++;
    if (rst_n && res_valid) begin
      if (nres == 0) t_first = cyc;
      t_end = cyc;
      nres++;
      for (int c = 0; c < DK; c++) begin
        checks++;
        if (res_row[c] != 8'(ref_res[res_idx][c])) begin
          failures++;
          $display("FAIL row %0d col %0d: %0d vs %0d", res_idx, c, res_row[c], ref_res[res_idx][c]);
        end
      end
      checks++;
      if (res_idx != $clog2(N)'(nres - 1)) begin failures++; $display("FAIL row order"); end
    end
  end

  initial begin
    int col [];
    prog_valid = 0; prog_sel = 0; prog_col = 0; x_valid = 0; nres = 0;
    for (int r = 0; r < PW; r++) prog_data[r] = 0;
    for (int j = 0; j < D; j++) x_row[j] = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < D; j++) X[i][j] = $urandom_range(255) - 128;
    for (int j = 0; j < D; j++) for (int c = 0; c < DK; c++) begin
      WQ[j][c] = $urandom_range(255) - 128; WK[j][c] = $urandom_range(255) - 128; WV[j][c] = $urandom_range(255) - 128;
    end
    model();
    repeat (2) @(negedge clk);
    rst_n = 1;
    col = new[PW];
    for (int c = 0; c < DK; c++) begin for (int j = 0; j < D; j++) col[j] = WQ[j][c]; prog(0, c, col, D); end
    for (int j = 0; j < D; j++) begin for (int c = 0; c < DK; c++) col[c] = WK[j][c]; prog(1, j, col, DK); end
    for (int j = 0; j < D; j++) begin for (int i = 0; i < N; i++) col[i] = X[i][j]; prog(2, j, col, N); end
    for (int c = 0; c < DK; c++) begin for (int j = 0; j < D; j++) col[j] = WV[j][c]; prog(3, c, col, D); end
    @(negedge clk);
    while (!prog_ready) @(negedge clk);
    t_start = cyc;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < D; j++) x_row[j] = 8'(X[i][j]);
      x_valid = 1;
      while (!x_ready) @(negedge clk);
      @(negedge clk);
      x_valid = 0;
    end
    while (nres < N) @(negedge clk);
    $display("first row after %0d cycles, all %0d rows after %0d; overlap %0d, X stalls %0d, X interleaved %0d",
             t_first - t_start, N, t_end - t_start, overlap_cycles, x_stalls, x_interleave);
    checks += 4;
    if (overlap_cycles == 0) begin failures++; $display("FAIL no overlap"); end
    if (t_end - t_start >= N * (t_first - t_start) * 3 / 4) begin failures++; $display("FAIL no pipelining gain"); end
    if (x_interleave == 0) begin failures++; $display("FAIL X crossbar never shared between rows"); end
    if (prog_columns != 32'(2 * DK + 2 * D)) begin failures++; $display("FAIL crossbar written during inference"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
