// tb_layernorm: random and constant vectors. Each output is compared with
// (x - mean) / std * 2^5 computed in floating point (within 1 LSB, after
// saturation) and exactly with the documented integer formula. Checks that
// the first output appears SQRT_BITS + 2 cycles after the last input and that
// the N outputs come on consecutive cycles.
module tb_layernorm;
  import pim_ref_pkg::*;
  localparam int N = 24, OUT_FRAC = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid, done, busy;
  logic signed [7:0] in_data, out_data;
  logic [$clog2(N)-1:0] out_idx;
  int checks = 0, failures = 0;

  layernorm #(.N(N), .OUT_FRAC(OUT_FRAC)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int v = 0; v < 8; v++) begin
      int x [N];
      real mean, var_r;
      longint s, q, r;
      int lat, got;
      s = 0; q = 0; mean = 0; var_r = 0;
      for (int i = 0; i < N; i++) begin
        x[i] = (v == 0) ? 17 : (v == 1) ? ((i % 2) ? 100 : -100) : $urandom_range(255) - 128;
        s += x[i]; q += x[i] * x[i];
        mean += x[i];
      end
      mean = mean / N;
      for (int i = 0; i < N; i++) var_r += (x[i] - mean) * (x[i] - mean);
      var_r = var_r / N;
      r = isqrt_ref(longint'(N) * q - s * s);
      for (int i = 0; i < N; i++) begin
        @(negedge clk);
        in_valid = 1; in_data = 8'(x[i]);
      end
      @(negedge clk);
      in_valid = 0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 34) begin failures++; $display("FAIL latency %0d", lat); end
      got = 0;
      for (int i = 0; i < N; i++) begin
        int e_int;
        real e_real;
        checks += 3;
        if (!out_valid || out_idx != $clog2(N)'(i)) begin failures++; $display("FAIL stream order %0d", i); end
        e_int  = (r == 0) ? 0 : sat8i(rdiv_ref((longint'(N) * x[i] - s) * (1 << OUT_FRAC), r));
        e_real = (var_r == 0.0) ? 0.0 : (x[i] - mean) / $sqrt(var_r) * (1 << OUT_FRAC);
        if (e_real > 127.0) e_real = 127.0;
        if (e_real < -128.0) e_real = -128.0;
        if (out_data != 8'(e_int)) begin failures++; $display("FAIL v%0d el %0d: %0d vs %0d", v, i, out_data, e_int); end
        if (real'(out_data) - e_real > 1.01 || e_real - real'(out_data) > 1.01) begin failures++; $display("FAIL v%0d el %0d real %f", v, i, e_real); end
        if (i == N - 1) begin
          checks++;
          if (!done) begin failures++; $display("FAIL done"); end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
