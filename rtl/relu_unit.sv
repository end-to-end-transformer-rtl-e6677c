// relu_unit: rectified linear unit between the FC1 and FC2 DCIM macros.
//
// Registers max(0, x) of every element of an N-element int8 vector; out_valid
// follows in_valid by one cycle. The paper places a ReLU between FC1 and FC2;
// the vector-wide, one-cycle form is this design's choice.
module relu_unit #(
  parameter int N  = 3072,
  parameter int DW = 8
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] in_vec  [N],
  output logic                 out_valid,
  output logic signed [DW-1:0] out_vec [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int i = 0; i < N; i++) out_vec[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < N; i++) out_vec[i] <= in_vec[i][DW-1] ? '0 : in_vec[i];
    end
  end
endmodule
