// issr_mem_mux: round-robin multiplexer that merges the index and data
// requests of an indirection stream register onto its single memory port.
//
// Requester 0 is the index fetch, requester 1 the data mover. When both
// request in the same cycle, the one not granted last time wins; a lone
// requester is granted at once. The memory returns responses in request
// order, so the grant of every accepted read is pushed into a small FIFO
// (MaxOutstanding deep) and the head of that FIFO steers each response back
// to its requester; writes get no response and are not tracked. Requests stall while that FIFO is full. The
// round-robin policy and the single shared port follow the paper; the
// routing FIFO and its depth are this design's own choice. Request signals
// pass combinationally; responses pass combinationally the cycle they
// arrive.
module issr_mem_mux
  import issr_pkg::*;
#(
  parameter int unsigned MaxOutstanding = 8
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  mem_req_t [1:0]      in_req_i,
  input  logic     [1:0]      in_valid_i,
  output logic     [1:0]      in_ready_o,
  output data_t               in_rsp_data_o,
  output logic     [1:0]      in_rsp_valid_o,
  output mem_req_t            out_req_o,
  output logic                out_valid_o,
  input  logic                out_ready_i,
  input  data_t               out_rsp_data_i,
  input  logic                out_rsp_valid_i
);

  logic last_q;        // requester granted last
  logic sel;           // requester granted now
  logic id_ready, id_head, id_valid, out_hs;

  always_comb begin
    if (in_valid_i[0] && in_valid_i[1]) sel = ~last_q;
    else                                sel = in_valid_i[1];
  end

  assign out_req_o     = in_req_i[sel];
  assign out_valid_o   = |in_valid_i && id_ready;
  assign in_ready_o[0] = out_ready_i && id_ready && (sel == 1'b0);
  assign in_ready_o[1] = out_ready_i && id_ready && (sel == 1'b1);
  assign out_hs        = out_valid_o && out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     last_q <= 1'b1;
    else if (out_hs) last_q <= sel;
  end

  stream_fifo #(
    .Width(1),
    .Depth(MaxOutstanding)
  ) i_id_fifo (
    .clk_i,
    .rst_ni,
    .flush_i    (1'b0),
    .in_data_i  (sel),
    .in_valid_i (out_hs && !out_req_o.write),
    .in_ready_o (id_ready),
    .out_data_o (id_head),
    .out_valid_o(id_valid),
    .out_ready_i(out_rsp_valid_i),
    .usage_o    ()
  );

  assign in_rsp_data_o     = out_rsp_data_i;
  assign in_rsp_valid_o[0] = out_rsp_valid_i && (id_head == 1'b0);
  assign in_rsp_valid_o[1] = out_rsp_valid_i && (id_head == 1'b1);

  assert property (@(posedge clk_i) disable iff (!rst_ni) out_rsp_valid_i |-> id_valid)
    else $error("issr_mem_mux: response without outstanding request");

endmodule
