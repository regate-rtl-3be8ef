// pg_pe: weight-stationary multiply-accumulate processing element with
// three power modes (OFF, W_on, ON).
//
// Function: S <= S_top + I * W, where I is the registered input that is also
// passed to the right-hand neighbour and W is the stationary weight. Inputs
// are signed IN_W-bit integers, partial sums signed PSUM_W-bit integers
// (16-bit input and 32-bit partial sum, as the paper quotes; the paper's NPU
// uses floating point, this PE uses integer arithmetic).
//
// Power gating, following the PE of the paper:
//   * row_on & col_on high      -> weight domain powered (mode W_on).
//   * one of the two PE_on inputs (left neighbour, top neighbour) high
//                               -> the PE_on register is set next cycle and
//                                  powers the I register, the MAC and S (ON).
//   * The PE_on register output is forwarded right and down, so the wake-up
//     wave travels diagonally one PE per cycle, one cycle ahead of the data.
// A register whose domain is unpowered loses its contents; this model clears
// it to zero, so an unpowered PE drives zeros on in_right and psum_bot.
// Design choices not in the paper: the PE_on register is only set while the
// weight domain is powered (a PE of a disabled row or column stays fully
// off), and force_on (software "on" mode of the whole SA) sets PE_on
// regardless of the neighbours.
//
// Timing: one cycle from PE_on input to ON (single-PE wake-up delay of one
// cycle); in_right and psum_bot are registered.
module pg_pe
  import regate_pkg::*;
#(
  parameter int unsigned IN_W   = 16,
  parameter int unsigned PSUM_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // power-gating controls
  input  logic                     row_on,
  input  logic                     col_on,
  input  logic                     pe_on_left,   // PE_on[i][j-1]
  input  logic                     pe_on_top,    // PE_on[i-1][j]
  input  logic                     force_on,
  output logic                     pe_on_out,    // PE_on[i][j]
  output pe_pwr_e                  pwr,
  // weight load
  input  logic                     w_we,
  input  logic signed [IN_W-1:0]   w_in,
  // dataflow
  input  logic signed [IN_W-1:0]   in_left,      // I[i][j-1]
  input  logic signed [PSUM_W-1:0] psum_top,     // S[i-1][j]
  output logic signed [IN_W-1:0]   in_right,     // I[i][j]
  output logic signed [PSUM_W-1:0] psum_bot      // S[i][j]
);

  logic                     w_dom;     // weight domain powered
  logic                     pe_on_q;   // PE_on register (always-on)
  logic                     on_dom;    // I / MAC / S domain powered
  logic signed [IN_W-1:0]   w_q, i_q;
  logic signed [PSUM_W-1:0] s_q;
  logic signed [PSUM_W-1:0] mac;

  assign w_dom  = row_on & col_on;
  assign on_dom = pe_on_q & w_dom;
  assign mac    = psum_top + PSUM_W'(i_q * w_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pe_on_q <= 1'b0;
    else        pe_on_q <= (pe_on_left | pe_on_top | force_on) & w_dom;
  end

  // weight register: powered in W_on and ON
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      w_q <= '0;
    else if (!w_dom) w_q <= '0;
    else if (w_we)   w_q <= w_in;
  end

  // input and partial-sum registers: powered only in ON
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_q <= '0;
      s_q <= '0;
    end else if (!on_dom) begin
      i_q <= '0;
      s_q <= '0;
    end else begin
      i_q <= in_left;
      s_q <= mac;
    end
  end

  assign pe_on_out = pe_on_q;
  assign in_right  = i_q;
  assign psum_bot  = s_q;

  always_comb begin
    if (on_dom)     pwr = PE_ON;
    else if (w_dom) pwr = PE_W_ON;
    else            pwr = PE_OFF;
  end

endmodule
