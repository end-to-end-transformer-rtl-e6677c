// dcim_macro: digital compute-in-memory weight array with its accumulator row.
//
// Holds one trainable matrix W (ROWS x COLS, int8) and computes y = x * W for an
// input vector x that arrives one element per cycle. Each cycle the row of W
// selected by the element's index is read as one wide word and all COLS
// products x[i]*W[i][c] are added into the COLS accumulators at once (the
// "Acc." column of each DCIM tile). The core uses six of these: Q, K, V, Out,
// FC1 and FC2.
//
// Interface: weights are written one row per cycle (wr_en, wr_row, wr_data,
// column c in bits [c*DW +: DW]). `start` clears the accumulators and the row
// counter; then ROWS pulses of x_valid carry x[0..ROWS-1]. `done` pulses one
// cycle after the last element, and y holds the result until the next start.
// Throughput: one vector per ROWS cycles.
//
// The paper names the DCIM macros and what they store; the row-serial,
// column-parallel organisation is this design's choice.
module dcim_macro #(
  parameter int ROWS  = 768,
  parameter int COLS  = 768,
  parameter int DW    = 8,
  parameter int ACC_W = 32
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic [COLS*DW-1:0]           wr_data,
  input  logic                         start,
  input  logic                         x_valid,
  input  logic signed [DW-1:0]         x_in,
  output logic                         done,
  output logic signed [ACC_W-1:0]      y [COLS]
);
  logic [COLS*DW-1:0]        mem [ROWS];
  logic [$clog2(ROWS+1)-1:0] idx;
  logic [COLS*DW-1:0]        row;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_row] <= wr_data;
  end

  assign row = mem[idx[$clog2(ROWS)-1:0]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx  <= '0;
      done <= 1'b0;
      for (int c = 0; c < COLS; c++) y[c] <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        idx <= '0;
        for (int c = 0; c < COLS; c++) y[c] <= '0;
      end else if (x_valid) begin
        for (int c = 0; c < COLS; c++)
          y[c] <= y[c] + ACC_W'(x_in * $signed(row[c*DW +: DW]));
        idx  <= idx + 1'b1;
        done <= (idx == ROWS - 1);
      end
    end
  end

  // A vector never has more than ROWS elements.
  assert property (@(posedge clk) disable iff (!rst_n) x_valid |-> idx < ROWS);
endmodule
