// tb_softmax_unit: score vectors of several lengths; each probability is
// compared with 256 * exp((s_i - max) / 8) / sum, computed in floating point
// (1/sqrt(64) scaling), within 3/256, and exactly with the documented table
// arithmetic. The probabilities must sum to about 256. Also checks that all
// n outputs come out on consecutive cycles, the first n + 2 cycles after the
// last input.
module tb_softmax_unit;
  import pim_ref_pkg::*;
  localparam int L_MAX = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_last, out_valid, done, busy;
  logic signed [31:0] in_score;
  logic [$clog2(L_MAX)-1:0] out_idx;
  logic [8:0] out_p;
  int checks = 0, failures = 0;

  softmax_unit #(.L_MAX(L_MAX)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_last = 0; in_score = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 12; v++) begin
      int n, lat, psum;
      longint s [L_MAX];
      longint e [L_MAX];
      longint mx, es;
      real er [L_MAX];
      real ers;
      n = (v == 0) ? 1 : (v == 1) ? L_MAX : $urandom_range(L_MAX - 1, 2);
      for (int i = 0; i < n; i++) begin
        s[i] = longint'($urandom_range(200)) - 100;
        if (v == 3) s[i] = 1000 * i;    // one dominant score
        if (i == 0 || s[i] > mx) mx = s[i];
      end
      es = 0; ers = 0;
      for (int i = 0; i < n; i++) begin
        e[i] = sm_e(s[i], mx); es += e[i];
        er[i] = $exp(real'(s[i] - mx) / 8.0); ers += er[i];
      end
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        in_valid = 1; in_last = (i == n - 1); in_score = 32'(s[i]);
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != n + 2) begin failures++; $display("FAIL latency %0d for n %0d", lat, n); end
      psum = 0;
      for (int i = 0; i < n; i++) begin
        longint pe;
        real pr;
        pe = (e[i] * 256 + es / 2) / es;
        pr = 256.0 * er[i] / ers;
        checks += 3;
        if (!out_valid || out_idx != $clog2(L_MAX)'(i)) begin failures++; $display("FAIL order"); end
        if (out_p != 9'(pe)) begin failures++; $display("FAIL v%0d p[%0d] %0d vs %0d", v, i, out_p, pe); end
        if (real'(out_p) - pr > 3.0 || pr - real'(out_p) > 3.0) begin failures++; $display("FAIL v%0d p[%0d] %0d vs real %f", v, i, out_p, pr); end
        psum += int'(out_p);
        if (i == n - 1) begin
          checks++;
          if (!done) begin failures++; $display("FAIL done"); end
        end
        @(negedge clk);
      end
      checks++;
      if (psum < 256 - n || psum > 256 + n) begin failures++; $display("FAIL sum %0d", psum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
