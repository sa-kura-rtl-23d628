// column_buffer: FIFO of transformed halo columns between the Streamer and
// the array.
//
// Each entry is one column of the halo-extended tile field, NH+HALO samples
// high (top entry first).  The paper sizes the buffer to N_w columns; DEPTH
// defaults to that.  On a pop the upper HALO samples go to the Row Buffer
// (rb_col_o) and the lower NH samples to the left edge of the PE array
// (pe_col_o), as the paper describes.  The head entry is visible
// combinationally (first-word fall-through); push and pop in the same cycle
// are allowed.  free_o reports free slots so the Streamer can issue reads only
// when their results are sure to fit.
module column_buffer
  import kura_pkg::*;
#(
  parameter int NH    = 20,
  parameter int DEPTH = 5
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    push_i,
  input  sc_t [NH+HALO-1:0]       col_i,
  input  logic                    pop_i,
  output sc_t [HALO-1:0]          rb_col_o,
  output sc_t [NH-1:0]            pe_col_o,
  output logic                    empty_o,
  output logic [$clog2(DEPTH+1)-1:0] free_o
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  sc_t [NH+HALO-1:0] mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] count;
  sc_t [NH+HALO-1:0] head;

  assign empty_o = (count == 0);
  assign free_o  = $bits(free_o)'(DEPTH) - count;
  assign head    = mem[rd_ptr];

  for (genvar k = 0; k < HALO; k++) begin : g_rb
    assign rb_col_o[k] = head[k];
  end
  for (genvar r = 0; r < NH; r++) begin : g_pe
    assign pe_col_o[r] = head[HALO + r];
  end

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + AW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push_i) wr_ptr <= inc(wr_ptr);
      if (pop_i)  rd_ptr <= inc(rd_ptr);
      count <= count + ($bits(count))'(push_i) - ($bits(count))'(pop_i);
    end
  end

  always_ff @(posedge clk) begin
    if (push_i) mem[wr_ptr] <= col_i;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push_i && !pop_i && count == ($bits(count))'(DEPTH)))
    else $error("column_buffer overflow");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop_i && count == 0))
    else $error("column_buffer underflow");

endmodule
