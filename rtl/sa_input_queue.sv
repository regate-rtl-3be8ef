// sa_input_queue: input staging queue of one systolic-array row, and source
// of the PE_on wake-up signal for the first PE of that row.
//
// The paper keeps one queue per row; when data reaches the head of the queue
// the PE_on signal of the row's first PE is raised, and when the queue runs
// empty PE_on falls and the "off" wave follows the data through the row.
//
// How the queue paces itself (this design's choice, the paper gives only the
// behaviour above): all rows are written together with one input vector, and
// the diagonal skew is produced on the read side by a pop token. Row 0
// (is_head = 1) pops whenever it holds data and its PE_on output was already
// high in the previous cycle (the one-cycle PE wake-up). Row i > 0 pops
// exactly one cycle after row i-1 popped (release_in is row i-1's pop).
// pe_on_out = (data at head for row 0 / row i-1 popping for row i > 0) OR
// (this row pops now) OR (this row popped in the previous cycle). The last
// two terms keep the first PE powered while it computes on the popped value
// and while its partial sum is consumed by the row below.
//
// Interface: push / push_data / full on the write side; pop and out_data
// (zero when not popping) toward the first PE; release_in / pop form the
// token chain between rows. Timing: out_data is combinational from the head.
module sa_input_queue #(
  parameter int unsigned IN_W  = 16,
  parameter int unsigned DEPTH = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            is_head,
  input  logic            push,
  input  logic [IN_W-1:0] push_data,
  output logic            full,
  output logic            empty,
  input  logic            release_in,
  output logic            pop,
  output logic [IN_W-1:0] out_data,
  output logic            pe_on_out
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [IN_W-1:0] mem [DEPTH];
  logic [AW-1:0]   rd_ptr, wr_ptr;
  logic [AW:0]     count;
  logic            rel_q, popped_q, pe_on_q;
  logic            push_ok;

  assign empty   = (count == '0);
  assign full    = (count == (AW+1)'(DEPTH));
  assign push_ok = push & ~full;

  assign pop       = is_head ? (~empty & pe_on_q) : (rel_q & ~empty);
  assign out_data  = pop ? mem[rd_ptr] : '0;
  assign pe_on_out = (is_head ? ~empty : release_in) | pop | popped_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr   <= '0;
      wr_ptr   <= '0;
      count    <= '0;
      rel_q    <= 1'b0;
      popped_q <= 1'b0;
      pe_on_q  <= 1'b0;
    end else begin
      rel_q    <= release_in;
      popped_q <= pop;
      pe_on_q  <= pe_on_out;
      if (push_ok) wr_ptr <= (wr_ptr == AW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop)     rd_ptr <= (rd_ptr == AW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (AW+1)'(push_ok) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push_ok) mem[wr_ptr] <= push_data;
  end

  // a released row must have its data ready (rows are written together)
  assert property (@(posedge clk) disable iff (!rst_n) (!is_head && rel_q) |-> !empty)
    else $error("sa_input_queue: released while empty");

endmodule
