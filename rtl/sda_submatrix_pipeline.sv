// sda_submatrix_pipeline: scaled dot-product attention of one head on ReRAM
// crossbars, with the matrix decomposition and the sub-matrix pipeline.
//
// Instead of computing K = X*W_K and writing K^T into a crossbar before
// Q*K^T can run (a compute-write-compute dependency), the unit uses
//     Out = Q * K^T = (Q * W_K^T) * X^T,      Res = S * V = (S * X) * W_V
// so that only matrices known before inference are stored: W_Q, W_K^T, W_V
// and the token matrix X (written once, column by column). X sits in a
// single dual-access crossbar that serves both R * X^T (transposed access)
// and S * X (normal access).
//
// Rows i = 0..N-1 of X enter on the x port (x_valid/x_ready) and move through
// six stages, each holding one row in its output register:
//   1 Q_i = sat8((X_i * W_Q) >>> SHIFT)           crossbar W_Q
//   2 R_i = sat8((Q_i * W_K^T) >>> SHIFT)         crossbar W_K^T
//   3 Out_i = R_i * X^T  (raw, N scores)          crossbar X, transposed
//   4 S_i = softmax(Out_i / sqrt(DK))             softmax_unit (256 = 1.0)
//   5 P_i = sat8((S_i * X) >>> 8)                 crossbar X, normal
//   6 Res_i = sat8((P_i * W_V) >>> SHIFT)         crossbar W_V -> res port
// A stage starts as soon as its input register is full, its own register is
// free and its crossbar is idle, so successive rows overlap in time (the
// sub-matrix pipeline) instead of each matrix product finishing for all rows
// before the next begins. Stages 3 and 5 share the X crossbar; stage 5 has
// priority; x_stalls counts the cycles in which one X access waited for the
// other.
// overlap_cycles counts cycles in which two or more crossbars computed at
// once. res_valid pulses once per row, in row order; the sink cannot stall.
//
// From the paper: the decomposition, the reuse of one dual-access copy of X
// for both products, the split of Q into row vectors streamed from the
// W_K^T engine to the X engine. This design's choices: the stage registers
// and start rule, the shared-crossbar priority, the fixed-point scaling and
// the softmax placement between the two X accesses.
module sda_submatrix_pipeline
  import pim_pkg::*;
#(
  parameter int N     = MAX_TOKENS,
  parameter int D     = D_MODEL,
  parameter int DK    = HEAD_DIM,
  parameter int SHIFT = 8,
  parameter int LAT   = 4,
  parameter int WLAT  = 8,
  parameter int PW    = (D > N) ? D : N
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // crossbar programming: sel 0 = W_Q (D x DK), 1 = W_K^T (DK x D),
  // 2 = X (N x D), 3 = W_V (D x DK); one column per request
  input  logic                     prog_valid,
  input  logic [1:0]               prog_sel,
  input  logic [$clog2(D)-1:0]     prog_col,
  input  logic signed [7:0]        prog_data [PW],
  output logic                     prog_ready,
  // token rows in
  input  logic                     x_valid,
  input  logic signed [7:0]        x_row [D],
  output logic                     x_ready,
  // attention result rows out
  output logic                     res_valid,
  output logic [$clog2(N)-1:0]     res_idx,
  output logic signed [7:0]        res_row [DK],
  // statistics
  output logic [31:0]              overlap_cycles,
  output logic [31:0]              x_stalls,
  output logic [31:0]              prog_columns
);
  localparam int VX = (N > D) ? N : D;

  // ---------------------------------------------------------------- crossbars
  logic              q_busy, q_done, k_busy, k_done, x_busy, x_done, v_busy, v_done;
  logic              q_start, k_start, x_start, x_trans, v_start;
  logic              q_prog, k_prog, x_prog, v_prog;
  logic signed [9:0] q_vin [D];
  logic signed [9:0] k_vin [D];
  logic signed [9:0] x_vin [VX];
  logic signed [9:0] v_vin [D];
  logic signed [31:0] q_out [D];
  logic signed [31:0] k_out [D];
  logic signed [31:0] x_out [VX];
  logic signed [31:0] v_out [D];
  logic signed [7:0] pd_d  [D];
  logic signed [7:0] pd_dk [DK];
  logic signed [7:0] pd_n  [N];
  logic [31:0]       pc_q, pc_k, pc_x, pc_v;

  always_comb begin
    for (int r = 0; r < D; r++)  pd_d[r]  = prog_data[r];
    for (int r = 0; r < DK; r++) pd_dk[r] = prog_data[r];
    for (int r = 0; r < N; r++)  pd_n[r]  = prog_data[r];
  end

  assign q_prog = prog_valid && prog_sel == 2'd0;
  assign k_prog = prog_valid && prog_sel == 2'd1;
  assign x_prog = prog_valid && prog_sel == 2'd2;
  assign v_prog = prog_valid && prog_sel == 2'd3;
  assign prog_ready = !(q_busy || k_busy || x_busy || v_busy);
  assign prog_columns = pc_q + pc_k + pc_x + pc_v;

  reram_crossbar #(.ROWS(D), .COLS(DK), .LAT(LAT), .WLAT(WLAT)) u_wq (.clk, .rst_n,
    .prog_valid(q_prog), .prog_col(prog_col[$clog2(DK)-1:0]), .prog_data(pd_d),
    .start(q_start), .transpose(1'b0), .vin(q_vin), .busy(q_busy), .done(q_done), .vout(q_out),
    .prog_count(pc_q));
  reram_crossbar #(.ROWS(DK), .COLS(D), .LAT(LAT), .WLAT(WLAT)) u_wkt (.clk, .rst_n,
    .prog_valid(k_prog), .prog_col(prog_col), .prog_data(pd_dk),
    .start(k_start), .transpose(1'b0), .vin(k_vin), .busy(k_busy), .done(k_done), .vout(k_out),
    .prog_count(pc_k));
  reram_crossbar #(.ROWS(N), .COLS(D), .LAT(LAT), .WLAT(WLAT)) u_x (.clk, .rst_n,
    .prog_valid(x_prog), .prog_col(prog_col), .prog_data(pd_n),
    .start(x_start), .transpose(x_trans), .vin(x_vin), .busy(x_busy), .done(x_done), .vout(x_out),
    .prog_count(pc_x));
  reram_crossbar #(.ROWS(D), .COLS(DK), .LAT(LAT), .WLAT(WLAT)) u_wv (.clk, .rst_n,
    .prog_valid(v_prog), .prog_col(prog_col[$clog2(DK)-1:0]), .prog_data(pd_d),
    .start(v_start), .transpose(1'b0), .vin(v_vin), .busy(v_busy), .done(v_done), .vout(v_out),
    .prog_count(pc_v));

  // ---------------------------------------------------------------- stage registers
  logic              f1, f2, f3, fs, f5;       // register full
  logic              i1, i2, i3, i5, i6;       // crossbar working for this stage
  logic [$clog2(N)-1:0] r1, r2, r3, rs, r5, r6, rin, rfeed;
  logic signed [7:0] qr [DK];
  logic signed [7:0] rr [D];
  logic signed [31:0] orow [N];
  logic [8:0]        srow [N];
  logic signed [7:0] pr [D];

  // softmax between the two X accesses
  logic              sm_in_v, sm_last, sm_out_v, sm_done, sm_busy, feeding;
  logic [$clog2(N)-1:0] sm_idx;
  logic [8:0]        sm_p;
  logic [$clog2(N+1)-1:0] fcnt;

  softmax_unit #(.L_MAX(N)) u_sm (.clk, .rst_n, .in_valid(sm_in_v), .in_last(sm_last),
    .in_score(orow[fcnt[$clog2(N)-1:0]]), .out_valid(sm_out_v), .out_idx(sm_idx), .out_p(sm_p),
    .done(sm_done), .busy(sm_busy));

  assign sm_in_v = feeding;
  assign sm_last = feeding && (fcnt == $clog2(N+1)'(N - 1));

  // start conditions
  logic go5, go3;
  always_comb begin
    x_ready = !f1 && !i1 && !q_busy;
    q_start = x_valid && x_ready;
    k_start = f1 && !f2 && !i2 && !k_busy;
    go5     = fs && !f5 && !i5 && !i3 && !x_busy;
    go3     = f2 && !f3 && !i3 && !i5 && !x_busy && !go5;
    x_start = go5 || go3;
    x_trans = go3;
    v_start = f5 && !i6 && !v_busy;
    for (int j = 0; j < D; j++) q_vin[j] = 10'(x_row[j]);
    for (int j = 0; j < D; j++) k_vin[j] = (j < DK) ? 10'(qr[j]) : '0;
    for (int j = 0; j < VX; j++)
      x_vin[j] = go5 ? ((j < N) ? $signed({1'b0, srow[j]}) : '0)
                     : ((j < D) ? 10'(rr[j]) : '0);
    for (int j = 0; j < D; j++) v_vin[j] = 10'(pr[j]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      {f1, f2, f3, fs, f5, i1, i2, i3, i5, i6, feeding} <= '0;
      {r1, r2, r3, rs, r5, r6, rin, rfeed} <= '0;
      fcnt <= '0;
      res_valid <= 1'b0;
      res_idx   <= '0;
      overlap_cycles <= '0;
      x_stalls  <= '0;
      for (int j = 0; j < DK; j++) begin qr[j] <= '0; res_row[j] <= '0; end
      for (int j = 0; j < D; j++)  begin rr[j] <= '0; pr[j] <= '0; end
      for (int j = 0; j < N; j++)  begin orow[j] <= '0; srow[j] <= '0; end
    end else begin
      res_valid <= 1'b0;
      if (32'(i1) + 32'(i2) + 32'(i3) + 32'(i5) + 32'(i6) >= 2) overlap_cycles <= overlap_cycles + 1'b1;
      if ((f2 && !f3 && !i3 && (go5 || i5)) || (fs && !f5 && !i5 && i3)) x_stalls <= x_stalls + 1'b1;
      // stage 1
      if (q_start) begin i1 <= 1'b1; r1 <= rin; rin <= (rin == $clog2(N)'(N - 1)) ? '0 : rin + 1'b1; end
      if (q_done) begin
        i1 <= 1'b0; f1 <= 1'b1;
        for (int j = 0; j < DK; j++) qr[j] <= sat8(48'(q_out[j] >>> SHIFT));
      end
      // stage 2
      if (k_start) begin i2 <= 1'b1; f1 <= 1'b0; r2 <= r1; end
      if (k_done) begin
        i2 <= 1'b0; f2 <= 1'b1;
        for (int j = 0; j < D; j++) rr[j] <= sat8(48'(k_out[j] >>> SHIFT));
      end
      // stages 3 and 5 on the X crossbar
      if (go3) begin i3 <= 1'b1; f2 <= 1'b0; r3 <= r2; end
      if (go5) begin i5 <= 1'b1; fs <= 1'b0; r5 <= rs; end
      if (x_done && i3) begin
        i3 <= 1'b0; f3 <= 1'b1;
        for (int j = 0; j < N; j++) orow[j] <= x_out[j];
      end
      if (x_done && i5) begin
        i5 <= 1'b0; f5 <= 1'b1;
        for (int j = 0; j < D; j++) pr[j] <= sat8(48'(x_out[j] >>> 8));
      end
      // stage 4: feed the N scores to the softmax, collect the probabilities
      if (f3 && !feeding && !sm_busy && !fs) begin
        feeding <= 1'b1; fcnt <= '0; rfeed <= r3;
      end
      if (feeding) begin
        fcnt <= fcnt + 1'b1;
        if (sm_last) begin feeding <= 1'b0; f3 <= 1'b0; end
      end
      if (sm_out_v) srow[sm_idx] <= sm_p;
      if (sm_done) begin fs <= 1'b1; rs <= rfeed; end
      // stage 6
      if (v_start) begin i6 <= 1'b1; f5 <= 1'b0; r6 <= r5; end
      if (v_done) begin
        i6 <= 1'b0;
        res_valid <= 1'b1;
        res_idx   <= r6;
        for (int j = 0; j < DK; j++) res_row[j] <= sat8(48'(v_out[j] >>> SHIFT));
      end
    end
  end
endmodule
