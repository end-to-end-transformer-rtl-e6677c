// tb_quant_unit: quantiser and HQE.
//  1. The CPQ figure: the eight kept values of the 4x4 example calibrate one
//     channel; finalising must give s = 28, z = -1 and quantising the matrix
//     must give the printed int2 matrix.
//  2. HQE on another channel: a value inside the range keeps level 0; values
//     beyond it open levels 1 and 2 (SZ write with the token index, new_level);
//     with all levels used a further excursion is clamped (sat_event).
//  3. Random decode traffic on all channels against a procedural model.
module tb_quant_unit;
  import pim_pkg::*;
  import pim_ref_pkg::*;
  localparam int CH = 4, QB = 2, LEVELS = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic calib, extend_en, finalize, busy, in_valid, in_keep, out_valid, out_keep;
  logic sz_we, new_level, sat_event;
  logic [$clog2(CH)-1:0] in_ch, sz_ch;
  logic signed [7:0] in_data;
  logic [TOK_W-1:0] in_tok;
  logic signed [QB-1:0] out_q;
  logic [$clog2(LEVELS)-1:0] sz_level;
  sz_entry_t sz_wdata;
  int checks = 0, failures = 0;
  int n_new = 0, n_sat = 0;

  quant_unit #(.CH(CH), .QB(QB), .LEVELS(LEVELS)) dut (.*);

  int orig [16] = '{3, 5, -7, 9, 20, 18, 35, -4, 8, -2, 11, 68, 0, -15, 30, 7};
  int kp   [16] = '{0, 0, 0, 1, 1, 1, 1, 0, 0, 0, 1, 1, 0, 1, 1, 0};
  int q2   [16] = '{0, 0, 0, -1, 0, 0, 0, 0, 0, 0, -1, 1, 0, -2, 0, 0};

  // model
  int lo [CH], hi [CH], lv [CH];
  bit sn [CH];

  always @(posedge clk) begin
    if (new_level) n_new++;
    if (sat_event) n_sat++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic send(input int ch, input int x, input bit keep, input int tok);
    @(negedge clk);
    in_valid = 1; in_ch = $clog2(CH)'(ch); in_data = 8'(x); in_keep = keep; in_tok = TOK_W'(tok);
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  task automatic do_finalize();
    @(negedge clk) finalize = 1;
    @(negedge clk) finalize = 0;
    @(negedge clk);
    for (int c = 0; c < CH; c++) begin
      int l, h, s;
      chk(sz_we && sz_ch == $clog2(CH)'(c) && sz_level == 0, $sformatf("finalize write ch %0d", c));
      l = sn[c] ? lo[c] : 0; h = sn[c] ? hi[c] : 0;
      s = q_scale(l, h, QB);
      chk(sz_wdata.scale == SCALE_W'(s) && sz_wdata.zero == ZERO_W'(q_zero(l, s, QB)) && sz_wdata.start_tok == 0,
          $sformatf("level-0 params ch %0d", c));
      lo[c] = l; hi[c] = h; sn[c] = 1; lv[c] = 0;
      @(negedge clk);
    end
    chk(!busy, "finalize ends after CH cycles");
  endtask

  initial begin
    calib = 0; extend_en = 0; finalize = 0; in_valid = 0; in_keep = 0; in_ch = 0; in_data = 0; in_tok = 0;
    for (int c = 0; c < CH; c++) begin lo[c] = 0; hi[c] = 0; lv[c] = 0; sn[c] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // 1. figure example on channel 0, range [-10, 10] on channel 1
    calib = 1;
    for (int i = 0; i < 16; i++) begin
      send(0, kp[i] ? orig[i] : 0, kp[i] != 0, 0);
      chk(!out_valid, "no output while calibrating");
    end
    send(1, -10, 1, 0);
    send(1, 10, 1, 0);
    send(1, 90, 0, 0);  // pruned: must not widen the range
    lo[0] = -15; hi[0] = 68; sn[0] = 1; lo[1] = -10; hi[1] = 10; sn[1] = 1;
    calib = 0;
    do_finalize();
    for (int i = 0; i < 16; i++) begin
      send(0, kp[i] ? orig[i] : 0, kp[i] != 0, 0);
      chk(out_valid && out_keep == (kp[i] != 0) && out_q == QB'(q2[i]),
          $sformatf("figure element %0d: q %0d vs %0d", i, out_q, q2[i]));
    end
    // 2. HQE on channel 1
    extend_en = 1;
    begin
      int xs [4] = '{5, 30, -50, 100};
      for (int k = 0; k < 4; k++) begin
        int s, z, t;
        bit outside, ext;
        t = 3 + k;
        outside = xs[k] < lo[1] || xs[k] > hi[1];
        ext = outside && lv[1] < LEVELS - 1;
        if (ext) begin
          if (xs[k] < lo[1]) lo[1] = xs[k];
          if (xs[k] > hi[1]) hi[1] = xs[k];
          lv[1]++;
        end
        s = q_scale(lo[1], hi[1], QB); z = q_zero(lo[1], s, QB);
        send(1, xs[k], 1, t);
        chk(out_q == QB'(q_val(xs[k], s, z, QB)), $sformatf("HQE value %0d", xs[k]));
        chk(new_level == ext && sat_event == (outside && !ext), $sformatf("HQE events for %0d", xs[k]));
        if (ext)
          chk(sz_we && sz_ch == 1 && sz_level == $clog2(LEVELS)'(lv[1]) && sz_wdata.scale == SCALE_W'(s)
              && sz_wdata.zero == ZERO_W'(z) && sz_wdata.start_tok == TOK_W'(t),
              $sformatf("HQE level %0d write", lv[1]));
      end
      // hand values: level 1 = [-10, 30] -> s 14, z -1; level 2 = [-50, 30] -> s 27, z 0
      chk(q_scale(-10, 30, QB) == 14 && q_scale(-50, 30, QB) == 27 && q_zero(-50, 27, QB) == 0, "hand values");
    end
    // 3. random decode traffic
    for (int k = 0; k < 300; k++) begin
      int c, x, s, z;
      bit keep, outside, ext;
      c = $urandom_range(CH - 1);
      x = $urandom_range(255) - 128;
      keep = $urandom_range(3) != 0;
      outside = x < lo[c] || x > hi[c];
      ext = keep && outside && lv[c] < LEVELS - 1;
      if (ext) begin
        if (x < lo[c]) lo[c] = x;
        if (x > hi[c]) hi[c] = x;
        lv[c]++;
      end
      s = q_scale(lo[c], hi[c], QB); z = q_zero(lo[c], s, QB);
      send(c, x, keep, 10 + k);
      chk(out_valid && out_keep == keep && out_q == QB'(keep ? q_val(x, s, z, QB) : 0),
          $sformatf("random %0d ch %0d x %0d", k, c, x));
      chk(new_level == ext && sat_event == (keep && outside && !ext), "random events");
    end
    chk(n_new > 2 && n_sat > 1, $sformatf("levels opened %0d, saturated %0d", n_new, n_sat));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
