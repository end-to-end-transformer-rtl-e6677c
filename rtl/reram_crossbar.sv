// reram_crossbar: behavioural model of a ReRAM crossbar used as a PIM
// vector-matrix-multiplication (VMM) engine. It stands for an analog array
// and its peripheral DAC/ADC circuits; it is not meant to be synthesised as
// the real part, only to give the digital controller around it the right
// function and timing.
//
// The array holds an int8 matrix M (ROWS x COLS). It is programmed column by
// column: prog_valid with prog_col and the ROWS mcell values in prog_data
// starts a write that keeps the array busy for WLAT cycles (ReRAM programming
// is slow, which is what the decomposed attention avoids during inference).
// A compute request (start) is accepted when the array is idle and returns
// after LAT cycles with a done pulse; vout is registered when start is
// accepted and holds until the next start:
//   transpose = 0: vout[c] = sum_r vin[r] * M[r][c]   (input ROWS, output COLS)
//   transpose = 1: vout[r] = sum_c vin[c] * M[r][c]   (input COLS, output ROWS)
// The transposed access is the dual-access crossbar that lets one stored copy
// of X serve both R * X^T and S * X. Unused vin/vout entries are zero.
// The paper states the function (VMM, column-wise programming, dual access)
// and no numbers; ideal arithmetic and the LAT/WLAT values are assumptions.
module reram_crossbar #(
  parameter int ROWS = 128,
  parameter int COLS = 64,
  parameter int IW   = 10,
  parameter int LAT  = 4,
  parameter int WLAT = 8,
  parameter int VMAX = (ROWS > COLS) ? ROWS : COLS
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     prog_valid,
  input  logic [$clog2(COLS)-1:0]  prog_col,
  input  logic signed [7:0]        prog_data [ROWS],
  input  logic                     start,
  input  logic                     transpose,
  input  logic signed [IW-1:0]     vin  [VMAX],
  output logic                     busy,
  output logic                     done,
  output logic signed [31:0]       vout [VMAX],
  output logic [31:0]              prog_count
);
  logic signed [7:0]         mcell [ROWS][COLS];
  logic [$clog2(WLAT+LAT+1)-1:0] wait_cnt;
  logic                      computing;

  assign busy = (wait_cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt   <= '0;
      computing  <= 1'b0;
      done       <= 1'b0;
      prog_count <= '0;
      for (int j = 0; j < VMAX; j++) vout[j] <= '0;
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) mcell[r][c] <= '0;
    end else begin
      done <= 1'b0;
      if (wait_cnt != '0) begin
        wait_cnt <= wait_cnt - 1'b1;
        if (wait_cnt == 1 && computing) begin
          done      <= 1'b1;
          computing <= 1'b0;
        end
      end else if (prog_valid) begin
        for (int r = 0; r < ROWS; r++) mcell[r][prog_col] <= prog_data[r];
        wait_cnt   <= $clog2(WLAT+LAT+1)'(WLAT);
        prog_count <= prog_count + 1'b1;
      end else if (start) begin
        // the input is sampled now; the analog result settles after LAT cycles
        for (int j = 0; j < VMAX; j++) vout[j] <= '0;
        if (!transpose) begin
          for (int c = 0; c < COLS; c++) begin
            logic signed [31:0] a;
            a = '0;
            for (int r = 0; r < ROWS; r++) a = a + 32'(vin[r]) * 32'(mcell[r][c]);
            vout[c] <= a;
          end
        end else begin
          for (int r = 0; r < ROWS; r++) begin
            logic signed [31:0] a;
            a = '0;
            for (int c = 0; c < COLS; c++) a = a + 32'(vin[c]) * 32'(mcell[r][c]);
            vout[r] <= a;
          end
        end
        wait_cnt  <= $clog2(WLAT+LAT+1)'(LAT);
        computing <= 1'b1;
      end
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) busy |-> !start);
endmodule
