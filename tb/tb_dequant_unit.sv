// tb_dequant_unit: restores the compressed record of the CPQ figure
// (index, label 1 0 0 0 1 1 1 0, data -1 -1 1 -2; s = 28, z = -1 for every
// channel) and must give the printed int8 matrix. A second record with
// per-channel (s, z) checks the SZ read address (ch_base + c, token) and
// the CH + 2 cycle latency. The SZ buffer is modelled in the testbench.
module tb_dequant_unit;
  import pim_pkg::*;
  localparam int CH = 16, QB = 2, SZ_CH = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, sz_re, busy, done;
  logic [CH-1:0] rec_index, rec_label;
  logic [CH*QB-1:0] rec_data;
  logic [TOK_W-1:0] tok, sz_rtok;
  logic [$clog2(SZ_CH)-1:0] ch_base, sz_rch;
  sz_entry_t sz_rdata;
  logic signed [7:0] out_vec [CH];
  int checks = 0, failures = 0;
  int sc [SZ_CH], zp [SZ_CH];
  logic [TOK_W-1:0] last_tok;

  dequant_unit #(.CH(CH), .QB(QB), .SZ_CH(SZ_CH)) dut (.*);

  // SZ buffer model: one cycle read latency.
  always_ff @(posedge clk)
    if (sz_re) begin
      sz_rdata.scale     <= SCALE_W'(sc[sz_rch]);
      sz_rdata.zero      <= ZERO_W'(zp[sz_rch]);
      sz_rdata.start_tok <= '0;
      last_tok           <= sz_rtok;
    end

  int restored [16] = '{0, 0, 0, 0, 28, 28, 28, 0, 0, 0, 0, 56, 0, -28, 28, 0};

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(output int cyc);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc;
    start = 0; tok = 0; ch_base = 0;
    for (int c = 0; c < SZ_CH; c++) begin sc[c] = 28; zp[c] = -1; end
    rec_index = 16'b0110_1100_0111_1000;
    rec_label = 16'b0000_0000_0111_0001;
    rec_data  = '0;
    rec_data[7:0] = {2'sb10, 2'sb01, 2'sb11, 2'sb11};
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(cyc);
    for (int i = 0; i < CH; i++) begin
      checks++;
      if (out_vec[i] != 8'(restored[i])) begin
        failures++;
        $display("FAIL figure element %0d: %0d vs %0d", i, out_vec[i], restored[i]);
      end
    end
    checks++;
    if (cyc != CH + 2) begin failures++; $display("FAIL latency %0d", cyc); end
    // random record, per-channel parameters in the upper half of the SZ space
    for (int r = 0; r < 10; r++) begin
      int q [CH], e [CH], nk, nz;
      for (int c = 0; c < SZ_CH; c++) begin sc[c] = $urandom_range(1, 60); zp[c] = $urandom_range(8) - 4; end
      rec_index = '0; rec_label = '0; rec_data = '0; nk = 0; nz = 0;
      for (int i = 0; i < CH; i++) begin
        int v;
        if ($urandom_range(3) != 0) begin
          rec_index[i] = 1;
          q[i] = $urandom_range(3) - 2;
          if (q[i] != 0) begin rec_label[nk] = 1; rec_data[nz*QB +: QB] = QB'(q[i]); nz++; end
          nk++;
          v = sc[CH + i] * (q[i] - zp[CH + i]);
          e[i] = (v > 127) ? 127 : (v < -128) ? -128 : v;
        end else e[i] = 0;
      end
      ch_base = CH; tok = TOK_W'(r + 5);
      run(cyc);
      for (int i = 0; i < CH; i++) begin
        checks++;
        if (out_vec[i] != 8'(e[i])) begin failures++; $display("FAIL rec %0d el %0d: %0d vs %0d", r, i, out_vec[i], e[i]); end
      end
      checks++;
      if (last_tok != TOK_W'(r + 5)) begin failures++; $display("FAIL token on SZ read"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
