// layernorm: layer normalisation of one N-element int8 token vector.
//
// The vector streams in one element per cycle (in_valid, in_data) into a
// local buffer while the sum S and the sum of squares Q are accumulated.
// Then V = N*Q - S^2 (which is N^2 times the variance) is formed and its
// integer square root D = floor(sqrt(V)) is found bit by bit, one bit per
// cycle. Since (x - mean)/std = (N*x - S)/D exactly, each output is
//     y = sat8(round((N*x - S) * 2^OUT_FRAC / D))       (0 if D = 0)
// i.e. the normalised value with OUT_FRAC fraction bits. The outputs stream
// out one per cycle (out_valid, out_idx, out_data); `done` marks the last.
// Latency from the last input to the first output: SQRT_BITS + 2 cycles.
//
// The paper only places two layernorm blocks (before the Q/K/V macros and
// before FC1). No learned gain or bias is applied, and the fixed-point format
// and the serial square root are this design's choices.
module layernorm #(
  parameter int N        = 768,
  parameter int DW       = 8,
  parameter int OUT_FRAC = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [DW-1:0]    in_data,
  output logic                    out_valid,
  output logic [$clog2(N)-1:0]    out_idx,
  output logic signed [7:0]       out_data,
  output logic                    done,
  output logic                    busy
);
  localparam int SQRT_BITS = 32;

  typedef enum logic [1:0] {S_IN, S_SQRT, S_OUT} state_e;
  state_e state;

  logic signed [DW-1:0]        xbuf [N];
  logic [$clog2(N)-1:0]        cnt;
  logic signed [31:0]          sum;
  logic [47:0]                 sumsq;
  logic [63:0]                 var_n2;
  logic [SQRT_BITS-1:0]        root;
  logic [$clog2(SQRT_BITS)-1:0] bitn;

  logic [SQRT_BITS-1:0]        trial;
  logic signed [63:0]          num, q, half, mag;

  always_comb begin
    trial = root | (SQRT_BITS'(1) << bitn);
    num   = (64'(N) * 64'(xbuf[cnt]) - 64'(sum)) <<< OUT_FRAC;
    half  = 64'(root >> 1);
    mag   = (num < 0) ? -num : num;
    q     = (root == '0) ? 64'sd0 : (mag + half) / $signed({32'd0, root});
    if (num < 0) q = -q;
  end

  assign busy = (state != S_IN) || (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IN;
      cnt       <= '0;
      sum       <= '0;
      sumsq     <= '0;
      var_n2    <= '0;
      root      <= '0;
      bitn      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_data  <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IN: if (in_valid) begin
          xbuf[cnt] <= in_data;
          sum       <= sum + 32'(in_data);
          sumsq     <= sumsq + 48'(in_data * in_data);
          if (cnt == N - 1) begin
            cnt   <= '0;
            state <= S_SQRT;
            var_n2 <= 64'(N) * 64'(sumsq + 48'(in_data * in_data))
                    - 64'($signed(64'(sum + 32'(in_data))) * $signed(64'(sum + 32'(in_data))));
            root  <= '0;
            bitn  <= $clog2(SQRT_BITS)'(SQRT_BITS - 1);
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        S_SQRT: begin
          if (64'(trial) * 64'(trial) <= var_n2) root <= trial;
          if (bitn == '0) state <= S_OUT;
          else            bitn  <= bitn - 1'b1;
        end
        default: begin  // S_OUT
          out_valid <= 1'b1;
          out_idx   <= cnt;
          if (q > 64'sd127)       out_data <= 8'sd127;
          else if (q < -64'sd128) out_data <= -8'sd128;
          else                    out_data <= q[7:0];
          if (cnt == N - 1) begin
            cnt   <= '0;
            sum   <= '0;
            sumsq <= '0;
            done  <= 1'b1;
            state <= S_IN;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
      endcase
    end
  end
endmodule
