// pg_systolic_array: N x N weight-stationary systolic array with PE-level
// spatial power gating.
//
// Structure: an N x N grid of pg_pe, one sa_input_queue per row and the
// row/column zero-weight controller sa_zero_detect. Inputs enter at the left
// (row i carries element i of each input vector) and move right; partial
// sums move down and leave at the bottom, one per column.
//
// Three power-gating mechanisms combine:
//   1. Rows / columns whose weights (and those beyond them in the dataflow
//      direction) are all zero stay OFF for the whole tile (N, K smaller
//      than the array).
//   2. Every other PE holds only its weight (W_on) until the PE_on wave,
//      started by its row's queue, reaches it one cycle before the data; it
//      drops back to W_on when the queue has drained (M smaller than the
//      array). Only one PE wake-up cycle is exposed per burst.
//   3. force_on / force_off come from the array-level power controller
//      (software "on" / "off" mode, whole-array gating).
//
// Weight load: w_valid + w_row + w_vec load one weight row; w_first starts a
// new tile. The row is written into the PEs two cycles after it is accepted,
// once row_on / col_on include it, so that only zero weights are ever
// written into an unpowered weight register. Loading weights while inputs
// are streaming is not supported (this design has a single weight buffer).
// Input: in_valid + in_vec push one input vector into all row queues when
// in_ready. Output: out_valid[j] / out_psum[j] for column j. An input vector
// popped from row 0 at cycle t leaves column j at cycle t + N + 1 + j.
module pg_systolic_array
  import regate_pkg::*;
#(
  parameter int unsigned N      = 128,
  parameter int unsigned IN_W   = 16,
  parameter int unsigned PSUM_W = 32,
  parameter int unsigned QDEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     force_on,
  input  logic                     force_off,
  // weights
  input  logic                     w_valid,
  input  logic                     w_first,
  input  logic [$clog2(N)-1:0]     w_row,
  input  logic [N-1:0][IN_W-1:0]   w_vec,
  // inputs
  input  logic                     in_valid,
  input  logic [N-1:0][IN_W-1:0]   in_vec,
  output logic                     in_ready,
  // outputs
  output logic [N-1:0]             out_valid,
  output logic [N-1:0][PSUM_W-1:0] out_psum,
  // status
  output logic [N-1:0]             row_nz,
  output logic [N-1:0]             col_nz,
  output logic [N-1:0]             row_on,
  output logic [N-1:0]             col_on,
  output logic [$clog2(N*N+1)-1:0] pe_on_cnt,  // PEs in ON mode
  output logic [$clog2(N*N+1)-1:0] pe_w_cnt,   // PEs in W_on or ON mode
  output logic                     busy
);

  localparam int unsigned RW = $clog2(N);

  // ---- weight path: zero detection and two staging registers ----
  logic                   s1_v, s2_v;
  logic [RW-1:0]          s1_row, s2_row;
  logic [N-1:0][IN_W-1:0] s1_vec, s2_vec;

  sa_zero_detect #(.N(N), .IN_W(IN_W)) u_zd (
    .clk, .rst_n,
    .w_valid, .w_first, .w_row, .w_vec,
    .force_on, .force_off,
    .col_nz, .row_nz, .col_on, .row_on
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
    end else begin
      s1_v <= w_valid;
      s2_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    s1_row <= w_row;
    s1_vec <= w_vec;
    s2_row <= s1_row;
    s2_vec <= s1_vec;
  end

  // ---- input queues ----
  logic [N-1:0]            q_full, q_empty, q_pop, q_pe_on;
  logic [N-1:0][IN_W-1:0]  q_data;

  assign in_ready = ~|q_full;

  for (genvar i = 0; i < N; i++) begin : g_q
    sa_input_queue #(.IN_W(IN_W), .DEPTH(QDEPTH)) u_q (
      .clk, .rst_n,
      .is_head    (i == 0),
      .push       (in_valid & in_ready),
      .push_data  (in_vec[i]),
      .full       (q_full[i]),
      .empty      (q_empty[i]),
      .release_in ((i == 0) ? 1'b0 : q_pop[(i == 0) ? 0 : i - 1]),
      .pop        (q_pop[i]),
      .out_data   (q_data[i]),
      .pe_on_out  (q_pe_on[i])
    );
  end

  // ---- PE grid ----
  // horizontal nets: index j is the input of PE(i,j); j = N is the right edge
  logic                     h_on [N][N+1];
  logic [IN_W-1:0]          h_in [N][N+1];
  // vertical nets: index i is the input of PE(i,j); i = N is the bottom edge
  logic                     v_on [N][N];
  logic [PSUM_W-1:0]        v_ps [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_edge_l
    assign h_on[i][0] = q_pe_on[i];
    assign h_in[i][0] = q_data[i];
  end
  for (genvar j = 0; j < N; j++) begin : g_edge_t
    assign v_on[0][j] = 1'b0;
    assign v_ps[0][j] = '0;
  end

  logic pe_on_u [N][N];
  logic pe_w_u  [N][N];
  logic [N-1:0] row_any_on;

  localparam int unsigned CW = $clog2(N * N + 1);
  always_comb begin
    pe_on_cnt = '0;
    pe_w_cnt  = '0;
    for (int i = 0; i < N; i++) begin
      row_any_on[i] = 1'b0;
      for (int j = 0; j < N; j++) begin
        pe_on_cnt     = pe_on_cnt + CW'(pe_on_u[i][j]);
        pe_w_cnt      = pe_w_cnt + CW'(pe_w_u[i][j]);
        row_any_on[i] = row_any_on[i] | pe_on_u[i][j];
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      logic    pe_on;
      pe_pwr_e pwr;
      pg_pe #(.IN_W(IN_W), .PSUM_W(PSUM_W)) u_pe (
        .clk, .rst_n,
        .row_on     (row_on[i]),
        .col_on     (col_on[j]),
        .pe_on_left (h_on[i][j]),
        .pe_on_top  (v_on[i][j]),
        .force_on   (force_on),
        .pe_on_out  (pe_on),
        .pwr        (pwr),
        .w_we       (s2_v && (s2_row == RW'(i))),
        .w_in       (s2_vec[j]),
        .in_left    (h_in[i][j]),
        .psum_top   (v_ps[i][j]),
        .in_right   (h_in[i][j+1]),
        .psum_bot   (v_ps[i+1][j])
      );
      assign h_on[i][j+1]     = pe_on;
      if (i + 1 < N) begin : g_von
        assign v_on[i+1][j] = pe_on;
      end
      assign pe_on_u[i][j] = (pwr == PE_ON);
      assign pe_w_u[i][j]  = (pwr != PE_OFF);
    end
  end

  // ---- output valid tokens: pop of the last row, delayed 2 + j cycles ----
  logic       last_pop_q;
  logic [N-1:0] ov_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_pop_q <= 1'b0;
      ov_q       <= '0;
    end else begin
      last_pop_q <= q_pop[N-1];
      ov_q       <= {ov_q[N-2:0], last_pop_q};
    end
  end

  assign out_valid = ov_q;
  for (genvar j = 0; j < N; j++) begin : g_out
    assign out_psum[j] = v_ps[N][j];
  end

  assign busy = ~&q_empty | (|ov_q) | last_pop_q | (|row_any_on);

endmodule
