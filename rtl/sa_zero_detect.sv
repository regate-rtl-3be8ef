// sa_zero_detect: row/column-wise power-gating control of the systolic array,
// based on non-zero weight detection.
//
// As each weight row W[i] is pushed into the array, every element is compared
// with zero. The per-element results are OR-ed into the column non-zero
// bitmap col_nz, and their OR forms row_nz[i]. Because input data travels
// left to right and partial sums top to bottom, a column may only be gated
// if it and every column to its right hold zero weights, and a row only if
// it and every row above it hold zero weights. The row_on / col_on registers
// therefore hold prefix ORs of the bitmaps:
//   col_on[j] = |col_nz[N-1:j]      row_on[i] = |row_nz[i:0]
// Example from the paper (column 0 written first): col_nz = 0,1,0,0 gives
// col_on = 1,1,0,0 - column 0 stays on to pass inputs to column 1.
//
// Interface: w_valid with w_row (row index) and w_vec (one weight row);
// w_first marks the first row of a new weight tile and clears the bitmaps.
// force_on (software "on") sets every row and column on, force_off (software
// "off" or whole-array gating) clears them all.
// Timing: bitmaps update at the clock edge that accepts the row; row_on and
// col_on follow one cycle later (they are registers fed by the prefix ORs).
// Addressing weight rows by index is this design's choice; the paper only
// says weights are pushed in row by row.
module sa_zero_detect #(
  parameter int unsigned N    = 128,
  parameter int unsigned IN_W = 16
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   w_valid,
  input  logic                   w_first,
  input  logic [$clog2(N)-1:0]   w_row,
  input  logic [N-1:0][IN_W-1:0] w_vec,
  input  logic                   force_on,
  input  logic                   force_off,
  output logic [N-1:0]           col_nz,
  output logic [N-1:0]           row_nz,
  output logic [N-1:0]           col_on,
  output logic [N-1:0]           row_on
);

  logic [N-1:0] elem_nz;
  logic [N-1:0] col_pre, row_pre;

  always_comb begin
    for (int j = 0; j < N; j++) elem_nz[j] = (w_vec[j] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_nz <= '0;
      row_nz <= '0;
    end else if (w_valid) begin
      if (w_first) begin
        col_nz        <= elem_nz;
        row_nz        <= '0;
        row_nz[w_row] <= |elem_nz;
      end else begin
        col_nz        <= col_nz | elem_nz;
        row_nz[w_row] <= |elem_nz;
      end
    end
  end

  // prefix ORs: columns towards the right, rows towards the top
  assign col_pre[N-1] = col_nz[N-1];
  assign row_pre[0]   = row_nz[0];
  for (genvar k = 1; k < N; k++) begin : g_pre
    assign col_pre[N-1-k] = col_pre[N-k] | col_nz[N-1-k];
    assign row_pre[k]     = row_pre[k-1] | row_nz[k];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_on <= '0;
      row_on <= '0;
    end else if (force_off) begin
      col_on <= '0;
      row_on <= '0;
    end else if (force_on) begin
      col_on <= '1;
      row_on <= '1;
    end else begin
      col_on <= col_pre;
      row_on <= row_pre;
    end
  end

endmodule
