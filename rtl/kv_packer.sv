// kv_packer: data reorder of one quantised K or V token into its compressed
// record.
//
// Elements of a token arrive one per cycle in channel order, each with the
// pruning unit's keep flag and the quantised value. The record it builds is
// the format of the CPQ figure:
//   index  CH bits, bit c = 1 if channel c survived pruning;
//   label  one bit per kept element, in order, 1 if its quantised value is
//          non-zero (bits above n_kept are 0);
//   data   the non-zero quantised values, packed QB bits each, in order.
// Only index, n_kept label bits and n_nz data values have to cross to off-chip
// memory: rec_bits = CH + n_kept + QB*n_nz.
// After the CH-th element, rec_valid pulses for one cycle with the record,
// which then stays on the outputs until the next token completes.
//
// The record layout follows the figure; its bit order is this design's choice.
module kv_packer #(
  parameter int CH = 768,
  parameter int QB = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_keep,
  input  logic signed [QB-1:0]      in_q,
  output logic                      rec_valid,
  output logic [CH-1:0]             rec_index,
  output logic [CH-1:0]             rec_label,
  output logic [CH*QB-1:0]          rec_data,
  output logic [$clog2(CH+1)-1:0]   rec_nkept,
  output logic [$clog2(CH+1)-1:0]   rec_nnz,
  output logic [$clog2(CH*(QB+2)+1)-1:0] rec_bits
);
  logic [$clog2(CH)-1:0]   cnt;
  logic [CH-1:0]           idx_w, lab_w;
  logic [CH*QB-1:0]        dat_w;
  logic [$clog2(CH+1)-1:0] nk_w, nz_w;

  // Working record with this element appended.
  logic [CH-1:0]           idx_n, lab_n;
  logic [CH*QB-1:0]        dat_n;
  logic [$clog2(CH+1)-1:0] nk_n, nz_n;

  always_comb begin
    idx_n = (cnt == '0) ? '0 : idx_w;
    lab_n = (cnt == '0) ? '0 : lab_w;
    dat_n = (cnt == '0) ? '0 : dat_w;
    nk_n  = (cnt == '0) ? '0 : nk_w;
    nz_n  = (cnt == '0) ? '0 : nz_w;
    if (in_keep) begin
      idx_n[cnt] = 1'b1;
      if (in_q != '0) begin
        lab_n[nk_n[$clog2(CH)-1:0]]   = 1'b1;
        dat_n[nz_n*QB +: QB]          = in_q;
        nz_n                          = nz_n + 1'b1;
      end
      nk_n = nk_n + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      idx_w     <= '0;
      lab_w     <= '0;
      dat_w     <= '0;
      nk_w      <= '0;
      nz_w      <= '0;
      rec_valid <= 1'b0;
      rec_index <= '0;
      rec_label <= '0;
      rec_data  <= '0;
      rec_nkept <= '0;
      rec_nnz   <= '0;
      rec_bits  <= '0;
    end else begin
      rec_valid <= 1'b0;
      if (in_valid) begin
        idx_w <= idx_n;
        lab_w <= lab_n;
        dat_w <= dat_n;
        nk_w  <= nk_n;
        nz_w  <= nz_n;
        if (cnt == CH - 1) begin
          cnt       <= '0;
          rec_valid <= 1'b1;
          rec_index <= idx_n;
          rec_label <= lab_n;
          rec_data  <= dat_n;
          rec_nkept <= nk_n;
          rec_nnz   <= nz_n;
          rec_bits  <= $clog2(CH*(QB+2)+1)'(CH) + $clog2(CH*(QB+2)+1)'(nk_n)
                     + $clog2(CH*(QB+2)+1)'(QB) * $clog2(CH*(QB+2)+1)'(nz_n);
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
