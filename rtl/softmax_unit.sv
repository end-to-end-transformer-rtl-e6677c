// softmax_unit: softmax over the scores of one attention head.
//
// Scores s_0..s_{n-1} (raw q.k dot products) stream in one per cycle, the last
// flagged by in_last; the running maximum M is kept. Then, one per cycle,
//     t_i = ((M - s_i) * MUL) >> SHIFT        (Q.4 fixed point, base 2)
//     e_i = LUT[t_i mod 16] >> (t_i / 16),    LUT[k] = round(2^16 * 2^(-k/16))
// which is 2^16 * 2^(-t_i/16) = 2^16 * exp((s_i - M) / sqrt(d_k)) for the
// default MUL/SHIFT (log2(e)/sqrt(64) * 16 ~ 739/256). The sum E of the e_i is
// accumulated, and finally p_i = round(256 * e_i / E) streams out one per
// cycle (out_valid, out_idx, out_p; 256 stands for 1.0), `done` on the last.
// Timing for n scores: the first probability leaves n + 2 cycles after the
// last score, the rest follow on consecutive cycles.
//
// The paper gives the softmax formula with the 1/sqrt(d_k) scaling and places
// one softmax block between the two CE arrays; the base-2 table
// approximation and the probability format are this design's choices.
module softmax_unit #(
  parameter int L_MAX = 128,
  parameter int IN_W  = 32,
  parameter int MUL   = 739,
  parameter int SHIFT = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_last,
  input  logic signed [IN_W-1:0]    in_score,
  output logic                      out_valid,
  output logic [$clog2(L_MAX)-1:0]  out_idx,
  output logic [8:0]                out_p,
  output logic                      done,
  output logic                      busy
);
  localparam logic [16:0] LUT [16] = '{
    17'd65536, 17'd62757, 17'd60097, 17'd57549, 17'd55109, 17'd52773, 17'd50535, 17'd48393,
    17'd46341, 17'd44376, 17'd42495, 17'd40693, 17'd38968, 17'd37316, 17'd35734, 17'd34219};

  typedef enum logic [1:0] {S_IN, S_EXP, S_DIV} state_e;
  state_e state;

  logic signed [IN_W-1:0]   sbuf [L_MAX];
  logic [16:0]              ebuf [L_MAX];
  logic [$clog2(L_MAX):0]   n, i;
  logic signed [IN_W-1:0]   mx;
  logic [31:0]              esum;

  logic [IN_W:0]            d;
  logic [IN_W+15:0]         t;
  logic [16:0]              e;
  logic [31:0]              p;

  always_comb begin
    d = (IN_W+1)'(mx) - (IN_W+1)'(sbuf[i[$clog2(L_MAX)-1:0]]);
    t = ((IN_W+16)'(d) * (IN_W+16)'(MUL)) >> SHIFT;
    e = ((t >> 4) >= 17) ? 17'd0 : (LUT[t[3:0]] >> t[8:4]);
    p = (esum == 0) ? 32'd0 : ((32'(ebuf[i[$clog2(L_MAX)-1:0]]) << 8) + (esum >> 1)) / esum;
  end

  assign busy = (state != S_IN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IN;
      n         <= '0;
      i         <= '0;
      mx        <= '0;
      esum      <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_p     <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      case (state)
        S_IN: if (in_valid) begin
          sbuf[n[$clog2(L_MAX)-1:0]] <= in_score;
          if (n == 0 || in_score > mx) mx <= in_score;
          n <= n + 1'b1;
          if (in_last) begin
            state <= S_EXP;
            i     <= '0;
            esum  <= '0;
          end
        end
        S_EXP: begin
          ebuf[i[$clog2(L_MAX)-1:0]] <= e;
          esum <= esum + 32'(e);
          if (i == n - 1) begin
            i     <= '0;
            state <= S_DIV;
          end else begin
            i <= i + 1'b1;
          end
        end
        default: begin  // S_DIV
          out_valid <= 1'b1;
          out_idx   <= i[$clog2(L_MAX)-1:0];
          out_p     <= 9'(p);
          if (i == n - 1) begin
            done  <= 1'b1;
            n     <= '0;
            state <= S_IN;
          end else begin
            i <= i + 1'b1;
          end
        end
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) (state == S_IN && in_valid) |-> n < L_MAX);
endmodule
