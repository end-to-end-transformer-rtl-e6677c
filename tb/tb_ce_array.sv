// tb_ce_array: scores of every head for random query and key vectors with
// many zeros (pruned elements), once through each side of the key selector;
// then probability-weighted value sums over several tokens and a clear.
// Results and the count of activated lanes (both operands non-zero) are
// compared with procedural sums. Scores appear one cycle after sc_valid.
module tb_ce_array;
  localparam int NH = 3, HD = 8, D = NH * HD;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic sc_valid, key_sel, score_valid, av_clear, av_valid, cnt_clear;
  logic signed [7:0] q_vec [D];
  logic signed [7:0] fresh_k [D];
  logic signed [7:0] cache_k [D];
  logic signed [7:0] v_vec [D];
  logic signed [31:0] scores [NH];
  logic signed [31:0] acc [D];
  logic [8:0] p [NH];
  logic [31:0] active_total;
  int checks = 0, failures = 0;
  longint lanes = 0;

  ce_array #(.N_HEADS(NH), .HEAD_DIM(HD)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd_sparse();
    return ($urandom_range(2) == 0) ? 0 : $urandom_range(255) - 128;
  endfunction

  initial begin
    longint ea [D];
    sc_valid = 0; key_sel = 0; av_clear = 0; av_valid = 0; cnt_clear = 0;
    for (int i = 0; i < D; i++) begin q_vec[i] = 0; fresh_k[i] = 0; cache_k[i] = 0; v_vec[i] = 0; end
    for (int h = 0; h < NH; h++) p[h] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 10; r++) begin
      @(negedge clk);
      for (int i = 0; i < D; i++) begin
        q_vec[i] = 8'(rnd_sparse()); fresh_k[i] = 8'(rnd_sparse()); cache_k[i] = 8'(rnd_sparse());
      end
      key_sel = r[0];
      sc_valid = 1;
      @(negedge clk);
      sc_valid = 0;
      checks++;
      if (!score_valid) begin failures++; $display("FAIL score_valid"); end
      for (int h = 0; h < NH; h++) begin
        longint s;
        s = 0;
        for (int i = 0; i < HD; i++) begin
          int k;
          k = key_sel ? fresh_k[h*HD + i] : cache_k[h*HD + i];
          s += q_vec[h*HD + i] * k;
          if (q_vec[h*HD + i] != 0 && k != 0) lanes++;
        end
        checks++;
        if (scores[h] != 32'(s)) begin failures++; $display("FAIL score h%0d sel %0d", h, key_sel); end
      end
    end
    // value sums
    @(negedge clk) av_clear = 1;
    @(negedge clk) av_clear = 0;
    for (int i = 0; i < D; i++) ea[i] = 0;
    for (int t = 0; t < 6; t++) begin
      for (int h = 0; h < NH; h++) p[h] = ($urandom_range(3) == 0) ? 9'd0 : 9'($urandom_range(256));
      for (int i = 0; i < D; i++) begin
        v_vec[i] = 8'(rnd_sparse());
        ea[i] += longint'(p[i / HD]) * longint'(v_vec[i]);
        if (p[i / HD] != 0 && v_vec[i] != 0) lanes++;
      end
      av_valid = 1;
      @(negedge clk);
      av_valid = 0;
    end
    @(negedge clk);
    for (int i = 0; i < D; i++) begin
      checks++;
      if (acc[i] != 32'(ea[i])) begin failures++; $display("FAIL acc %0d: %0d vs %0d", i, acc[i], ea[i]); end
    end
    checks++;
    if (active_total != 32'(lanes)) begin failures++; $display("FAIL lanes %0d vs %0d", active_total, lanes); end
    checks++;
    if (lanes >= 16 * D) begin failures++; $display("FAIL no lane was gated"); end
    @(negedge clk) av_clear = 1;
    @(negedge clk) av_clear = 0;
    for (int i = 0; i < D; i++) begin
      checks++;
      if (acc[i] != 0) begin failures++; $display("FAIL clear"); end
    end
    @(negedge clk) cnt_clear = 1;
    @(negedge clk) cnt_clear = 0;
    checks++;
    if (active_total != 0) begin failures++; $display("FAIL cnt_clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
