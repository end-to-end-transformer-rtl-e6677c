// quant_unit: per-channel low-bit quantiser with hierarchical quantisation
// extension (HQE) and channel-wise range monitoring.
//
// Every channel (K channels 0..D-1 and V channels D..2D-1 in the core) owns a
// tolerance range [rmin, rmax] and a current level. From a range the step and
// zero point follow as
//     s = max(1, ceil((rmax - rmin) / (2^QB - 1)))
//     z = QMIN - round(rmin / s)
//     q = clamp(round(x / s) + z, QMIN, QMAX),  QMIN = -2^(QB-1), QMAX = 2^(QB-1)-1
// with round() to nearest, halves away from zero. These formulas reproduce the
// int2 example of the CPQ figure (s = 28, z = -1).
//
// Operation, one element per cycle, output registered (one cycle latency):
//  * calib = 1 (prefill): kept elements widen their channel's range; nothing
//    is emitted.
//  * finalize pulse: walks all CH channels, one per cycle (busy high), and
//    writes level 0 (s0, z0, start token 0) of each into the SZ buffer.
//  * calib = 0: kept elements are quantised with the channel's current level.
//    If extend_en (decode) is set and a value falls outside the range, a new
//    level is opened: the range is widened to include the value, its (s, z)
//    and the current token index are written to the SZ buffer, and the value
//    is quantised with it. Each token is therefore quantised exactly once, and
//    earlier tokens keep their level. When all MAX_LEVELS are in use the value
//    is clamped instead (sat_event).
//
// Following the paper: PCQ per channel, level-0 parameters from the prefill
// stage, new level only when a token leaves the previous level's range. This
// design's choices: min/max asymmetric quantiser with integer scale, the
// widened range of a new level, the level limit and the clamping beyond it.
module quant_unit
  import pim_pkg::*;
#(
  parameter int CH         = 2 * D_MODEL,
  parameter int QB         = QBITS,
  parameter int LEVELS     = MAX_LEVELS,
  parameter int DW         = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      calib,
  input  logic                      extend_en,
  input  logic                      finalize,
  output logic                      busy,
  input  logic                      in_valid,
  input  logic [$clog2(CH)-1:0]     in_ch,
  input  logic                      in_keep,
  input  logic signed [DW-1:0]      in_data,
  input  logic [TOK_W-1:0]          in_tok,
  output logic                      out_valid,
  output logic                      out_keep,
  output logic signed [QB-1:0]      out_q,
  output logic                      sz_we,
  output logic [$clog2(CH)-1:0]     sz_ch,
  output logic [$clog2(LEVELS)-1:0] sz_level,
  output sz_entry_t                 sz_wdata,
  output logic                      new_level,
  output logic                      sat_event
);
  localparam int QMIN = -(1 << (QB - 1));
  localparam int QMAX = (1 << (QB - 1)) - 1;
  localparam int NLV  = (1 << QB) - 1;

  logic signed [DW-1:0]       rmin [CH];
  logic signed [DW-1:0]       rmax [CH];
  logic                       seen [CH];
  logic [$clog2(LEVELS)-1:0]  lvl  [CH];

  logic                       fin_run;
  logic [$clog2(CH)-1:0]      fin_ch;

  function automatic int rdiv(input int a, input int s);
    int m;
    m = (a < 0) ? -a : a;
    m = (m + s / 2) / s;
    return (a < 0) ? -m : m;
  endfunction

  function automatic int scale_of(input int lo, input int hi);
    int s;
    s = (hi - lo + NLV - 1) / NLV;
    return (s < 1) ? 1 : s;
  endfunction

  function automatic int zero_of(input int lo, input int s);
    return QMIN - rdiv(lo, s);
  endfunction

  function automatic int quant(input int x, input int s, input int z);
    int q;
    q = rdiv(x, s) + z;
    if (q < QMIN) q = QMIN;
    if (q > QMAX) q = QMAX;
    return q;
  endfunction

  // Current and widened range of the addressed channel.
  int cur_lo, cur_hi, cur_s, cur_z, ext_lo, ext_hi, ext_s, ext_z, xv;
  logic outside, can_extend;

  always_comb begin
    xv         = int'(in_data);
    cur_lo     = int'(rmin[in_ch]);
    cur_hi     = int'(rmax[in_ch]);
    cur_s      = scale_of(cur_lo, cur_hi);
    cur_z      = zero_of(cur_lo, cur_s);
    ext_lo     = (xv < cur_lo) ? xv : cur_lo;
    ext_hi     = (xv > cur_hi) ? xv : cur_hi;
    ext_s      = scale_of(ext_lo, ext_hi);
    ext_z      = zero_of(ext_lo, ext_s);
    outside    = (xv < cur_lo) || (xv > cur_hi);
    can_extend = (lvl[in_ch] != LEVELS[$clog2(LEVELS)-1:0] - 1'b1);
  end

  // Level-0 parameters of the channel being finalised.
  int fin_lo, fin_hi, fin_s, fin_z;
  always_comb begin
    fin_lo = seen[fin_ch] ? int'(rmin[fin_ch]) : 0;
    fin_hi = seen[fin_ch] ? int'(rmax[fin_ch]) : 0;
    fin_s  = scale_of(fin_lo, fin_hi);
    fin_z  = zero_of(fin_lo, fin_s);
  end

  assign busy = fin_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CH; c++) begin
        rmin[c] <= '0;
        rmax[c] <= '0;
        seen[c] <= 1'b0;
        lvl[c]  <= '0;
      end
      fin_run   <= 1'b0;
      fin_ch    <= '0;
      out_valid <= 1'b0;
      out_keep  <= 1'b0;
      out_q     <= '0;
      sz_we     <= 1'b0;
      sz_ch     <= '0;
      sz_level  <= '0;
      sz_wdata  <= '0;
      new_level <= 1'b0;
      sat_event <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      sz_we     <= 1'b0;
      new_level <= 1'b0;
      sat_event <= 1'b0;
      if (finalize && !fin_run) begin
        fin_run <= 1'b1;
        fin_ch  <= '0;
      end else if (fin_run) begin
        rmin[fin_ch]       <= DW'(fin_lo);
        rmax[fin_ch]       <= DW'(fin_hi);
        seen[fin_ch]       <= 1'b1;
        lvl[fin_ch]        <= '0;
        sz_we              <= 1'b1;
        sz_ch              <= fin_ch;
        sz_level           <= '0;
        sz_wdata.scale     <= SCALE_W'(fin_s);
        sz_wdata.zero      <= ZERO_W'(fin_z);
        sz_wdata.start_tok <= '0;
        fin_ch             <= fin_ch + 1'b1;
        if (fin_ch == CH - 1) fin_run <= 1'b0;
      end else if (in_valid && calib) begin
        if (in_keep) begin
          if (!seen[in_ch] || in_data < rmin[in_ch]) rmin[in_ch] <= in_data;
          if (!seen[in_ch] || in_data > rmax[in_ch]) rmax[in_ch] <= in_data;
          seen[in_ch] <= 1'b1;
        end
      end else if (in_valid) begin
        out_valid <= 1'b1;
        out_keep  <= in_keep;
        out_q     <= '0;
        if (in_keep) begin
          if (extend_en && outside && can_extend) begin
            rmin[in_ch]        <= DW'(ext_lo);
            rmax[in_ch]        <= DW'(ext_hi);
            lvl[in_ch]         <= lvl[in_ch] + 1'b1;
            sz_we              <= 1'b1;
            sz_ch              <= in_ch;
            sz_level           <= lvl[in_ch] + 1'b1;
            sz_wdata.scale     <= SCALE_W'(ext_s);
            sz_wdata.zero      <= ZERO_W'(ext_z);
            sz_wdata.start_tok <= in_tok;
            new_level          <= 1'b1;
            out_q              <= QB'(quant(xv, ext_s, ext_z));
          end else begin
            sat_event <= extend_en && outside;
            out_q     <= QB'(quant(xv, cur_s, cur_z));
          end
        end
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && fin_run));
endmodule
