// sz_buffer: scale-factor / zero-point store of the HQE quantiser.
//
// For every channel it keeps up to LEVELS entries {scale, zero, start_tok}
// and the number of levels in use. The quantisation unit writes an entry when
// a channel is finalised (level 0, which also resets the level count to 1) or
// when a new level is opened (level count becomes level+1).
//
// The read port serves the dequantisation unit: given a channel and a token
// index it returns, one cycle later, the entry of the highest level whose
// start token is not after that token, i.e. the level the token was quantised
// with. Levels start in increasing token order, so that is the level in force
// at the token's breakpoint.
//
// The paper names the SZ buffer and stores s and z per level; keeping the
// start token (the breakpoint) to find a token's level again is this design's
// choice.
module sz_buffer
  import pim_pkg::*;
#(
  parameter int CH     = 2 * D_MODEL,
  parameter int LEVELS = MAX_LEVELS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(CH)-1:0]     wch,
  input  logic [$clog2(LEVELS)-1:0] wlevel,
  input  sz_entry_t                 wdata,
  input  logic                      re,
  input  logic [$clog2(CH)-1:0]     rch,
  input  logic [TOK_W-1:0]          rtok,
  output sz_entry_t                 rdata,
  output logic [$clog2(LEVELS)-1:0] rlevel
);
  sz_entry_t                   mem  [CH][LEVELS];
  logic [$clog2(LEVELS+1)-1:0] nlev [CH];

  always_ff @(posedge clk) begin
    if (we) mem[wch][wlevel] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CH; c++) nlev[c] <= '0;
      rdata  <= '0;
      rlevel <= '0;
    end else begin
      if (we) nlev[wch] <= $clog2(LEVELS+1)'(wlevel) + 1'b1;
      if (re) begin
        rdata  <= mem[rch][0];
        rlevel <= '0;
        for (int l = 1; l < LEVELS; l++)
          if (l < int'(nlev[rch]) && mem[rch][l].start_tok <= rtok) begin
            rdata  <= mem[rch][l];
            rlevel <= $clog2(LEVELS)'(l);
          end
      end
    end
  end
endmodule
