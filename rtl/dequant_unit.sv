// dequant_unit: restores an int8 K or V vector from its compressed record.
//
// After `start` it walks channels c = 0..CH-1, one per cycle. A channel whose
// index bit is 0 was pruned and restores to 0. For a kept channel the next
// label bit says whether its quantised value q is non-zero; if so q is the
// next QB-bit field of the data, otherwise q = 0. The channel's scale s and
// zero point z for this token are read from the SZ buffer (channel
// ch_base + c, token `tok`, one cycle read latency) and the value restores to
// sat8(s * (q - z)). The result is collected in out_vec; `done` pulses one
// cycle after the last channel, CH + 2 cycles after the cycle in which
// start is sampled.
//
// The paper: the DQU rebuilds the KV cache from the label and index auxiliary
// data. The serial walk is this design's choice.
module dequant_unit
  import pim_pkg::*;
#(
  parameter int CH    = 768,
  parameter int QB    = 2,
  parameter int SZ_CH = 2 * CH
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [CH-1:0]             rec_index,
  input  logic [CH-1:0]             rec_label,
  input  logic [CH*QB-1:0]          rec_data,
  input  logic [TOK_W-1:0]          tok,
  input  logic [$clog2(SZ_CH)-1:0]  ch_base,
  output logic                      sz_re,
  output logic [$clog2(SZ_CH)-1:0]  sz_rch,
  output logic [TOK_W-1:0]          sz_rtok,
  input  sz_entry_t                 sz_rdata,
  output logic                      busy,
  output logic                      done,
  output logic signed [7:0]         out_vec [CH]
);
  logic                    run;
  logic [$clog2(CH)-1:0]   c;
  logic [$clog2(CH+1)-1:0] kp, dp;
  // second pipeline stage
  logic                    v1, keep1;
  logic signed [QB-1:0]    q1;
  logic [$clog2(CH)-1:0]   c1;
  logic                    last1;

  logic                    keep0, lab0;
  logic signed [QB-1:0]    q0;

  always_comb begin
    keep0   = rec_index[c];
    lab0    = keep0 && rec_label[kp[$clog2(CH)-1:0]];
    q0      = lab0 ? rec_data[dp*QB +: QB] : '0;
    sz_re   = run;
    sz_rch  = ch_base + $clog2(SZ_CH)'(c);
    sz_rtok = tok;
  end

  assign busy = run || v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      c     <= '0;
      kp    <= '0;
      dp    <= '0;
      v1    <= 1'b0;
      keep1 <= 1'b0;
      q1    <= '0;
      c1    <= '0;
      last1 <= 1'b0;
      done  <= 1'b0;
      for (int i = 0; i < CH; i++) out_vec[i] <= '0;
    end else begin
      done <= 1'b0;
      v1   <= run;
      if (start && !run) begin
        run <= 1'b1;
        c   <= '0;
        kp  <= '0;
        dp  <= '0;
      end else if (run) begin
        keep1 <= keep0;
        q1    <= q0;
        c1    <= c;
        last1 <= (c == CH - 1);
        if (keep0) kp <= kp + 1'b1;
        if (lab0)  dp <= dp + 1'b1;
        c <= c + 1'b1;
        if (c == CH - 1) run <= 1'b0;
      end
      if (v1) begin
        out_vec[c1] <= keep1
          ? sat8(48'($signed({1'b0, sz_rdata.scale})) * (48'(q1) - 48'(sz_rdata.zero)))
          : 8'sd0;
        done <= last1;
      end
    end
  end
endmodule
