// stream_fifo: synchronous FIFO with valid/ready handshakes on both sides.
//
// Helper used for the stream register data FIFO, the index word FIFO of the
// indirection address generator and the response-routing FIFO of the memory
// multiplexer. Storage is a register array of Depth entries (any depth, not
// only powers of two). A pushed word is visible at the output in the next
// cycle; push and pop may happen in the same cycle, also when full.
// usage_o gives the number of stored words.
module stream_fifo #(
  parameter int unsigned Width = 64,
  parameter int unsigned Depth = 5,
  localparam int unsigned CntWidth = $clog2(Depth + 1),
  localparam int unsigned PtrWidth = (Depth > 1) ? $clog2(Depth) : 1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                flush_i,
  input  logic [Width-1:0]    in_data_i,
  input  logic                in_valid_i,
  output logic                in_ready_o,
  output logic [Width-1:0]    out_data_o,
  output logic                out_valid_o,
  input  logic                out_ready_i,
  output logic [CntWidth-1:0] usage_o
);

  logic [Width-1:0]    mem_q [Depth];
  logic [PtrWidth-1:0] rd_ptr_q, wr_ptr_q;
  logic [CntWidth-1:0] cnt_q;
  logic push, pop;

  assign out_valid_o = (cnt_q != '0);
  assign in_ready_o  = (cnt_q != CntWidth'(Depth)) || out_ready_i;
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;
  assign out_data_o  = mem_q[rd_ptr_q];
  assign usage_o     = cnt_q;

  function automatic logic [PtrWidth-1:0] next_ptr(logic [PtrWidth-1:0] p);
    return (p == PtrWidth'(Depth - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      cnt_q    <= '0;
    end else if (flush_i) begin
      rd_ptr_q <= '0;
      wr_ptr_q <= '0;
      cnt_q    <= '0;
    end else begin
      if (push) wr_ptr_q <= next_ptr(wr_ptr_q);
      if (pop)  rd_ptr_q <= next_ptr(rd_ptr_q);
      cnt_q <= cnt_q + CntWidth'(push) - CntWidth'(pop);
    end
  end

  // Storage needs no reset: a word is only read after it was written.
  always_ff @(posedge clk_i) begin
    if (push) mem_q[wr_ptr_q] <= in_data_i;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt_q <= CntWidth'(Depth))
    else $error("stream_fifo: occupancy above depth");

endmodule
