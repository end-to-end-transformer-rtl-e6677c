// pruning_unit: element-wise (fine-grained) pruning of K/V values on the fly.
//
// K and V vectors stream through one element per cycle. An element whose
// magnitude is below the programmable threshold `thr` is pruned: it leaves
// with keep = 0 and value 0, and the quantisation unit behind ignores it.
// Kept elements leave with keep = 1 and their int8 value. Output is
// registered: one cycle of latency, one element per cycle. Running counts
// of kept and pruned elements are kept for the controller.
//
// The paper prunes individual elements (not whole channels), in prefill and
// decode alike, and forwards only non-zero data. It does not say how the
// unimportant elements are chosen; a magnitude threshold is this design's
// choice. With thr = 9 it prunes the 4x4 example of the CPQ figure exactly as
// printed (50% pruning rate).
module pruning_unit #(
  parameter int DW = 8,
  parameter int CNT_W = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DW-1:0]        thr,        // keep if |x| >= thr
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_data,
  output logic                 out_valid,
  output logic                 out_keep,
  output logic signed [DW-1:0] out_data,
  output logic [CNT_W-1:0]     kept_cnt,
  output logic [CNT_W-1:0]     pruned_cnt
);
  logic [DW:0] mag;
  logic        keep;

  assign mag  = in_data[DW-1] ? (DW+1)'(-$signed({in_data[DW-1], in_data})) : {1'b0, in_data};
  assign keep = (mag >= {1'b0, thr}) && (in_data != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_keep   <= 1'b0;
      out_data   <= '0;
      kept_cnt   <= '0;
      pruned_cnt <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_keep <= keep;
        out_data <= keep ? in_data : '0;
        if (keep) kept_cnt   <= kept_cnt + 1'b1;
        else      pruned_cnt <= pruned_cnt + 1'b1;
      end
    end
  end
endmodule
