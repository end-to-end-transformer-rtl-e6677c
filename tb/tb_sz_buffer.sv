// tb_sz_buffer: writes level 0 of every channel, then opens further levels at
// chosen tokens for some channels, and checks that a read for (channel,
// token) returns the level whose start token is the latest not after the
// token. Rewriting level 0 must drop the older levels.
module tb_sz_buffer;
  import pim_pkg::*;
  localparam int CH = 6, LEVELS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic we, re;
  logic [$clog2(CH)-1:0] wch, rch;
  logic [$clog2(LEVELS)-1:0] wlevel, rlevel;
  sz_entry_t wdata, rdata;
  logic [TOK_W-1:0] rtok;
  int checks = 0, failures = 0;
  int nlev [CH];
  int start [CH][LEVELS];
  int scl [CH][LEVELS];

  sz_buffer #(.CH(CH), .LEVELS(LEVELS)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(input int c, input int l, input int s, input int t);
    @(negedge clk);
    we = 1; wch = $clog2(CH)'(c); wlevel = $clog2(LEVELS)'(l);
    wdata.scale = SCALE_W'(s); wdata.zero = ZERO_W'(-l); wdata.start_tok = TOK_W'(t);
    scl[c][l] = s; start[c][l] = t; nlev[c] = l + 1;
    @(negedge clk) we = 0;
  endtask

  task automatic rd_check(input int c, input int t);
    int el;
    el = 0;
    for (int l = 1; l < nlev[c]; l++) if (start[c][l] <= t) el = l;
    @(negedge clk);
    re = 1; rch = $clog2(CH)'(c); rtok = TOK_W'(t);
    @(negedge clk) re = 0;
    checks++;
    if (rlevel != $clog2(LEVELS)'(el) || rdata.scale != SCALE_W'(scl[c][el]) || rdata.zero != ZERO_W'(-el)) begin
      failures++;
      $display("FAIL ch %0d tok %0d: level %0d vs %0d", c, t, rlevel, el);
    end
  endtask

  initial begin
    we = 0; re = 0; wch = 0; rch = 0; wlevel = 0; wdata = '0; rtok = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < CH; c++) wr(c, 0, 10 + c, 0);
    wr(1, 1, 40, 5);
    wr(1, 2, 60, 9);
    wr(3, 1, 33, 2);
    wr(3, 2, 44, 3);
    wr(3, 3, 55, 7);
    for (int c = 0; c < CH; c++)
      for (int t = 0; t < 12; t++) rd_check(c, t);
    wr(3, 0, 99, 0);  // finalise again: levels 1..3 are gone
    for (int t = 0; t < 12; t++) rd_check(3, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
