// ssr_lane: one stream register, either a plain SSR (Indirection=0) or an
// indirection stream register, ISSR (Indirection=1).
//
// It holds the address generator (issr_addr_gen) and a data FIFO of
// DataDepth 64-bit entries that decouples the register stream from the
// memory stream and serves both directions:
//  - read jobs: one memory read per address, issued only while the FIFO has
//    room for every read in flight (a credit count), so responses are always
//    accepted. The FPU reads the FIFO head through reg_r*; a repetition
//    counter (rpt_cnt) keeps each datum at the head for rep+1 reads.
//  - write jobs: FPU writes (reg_w*) fill the FIFO; each address is sent to
//    memory together with the FIFO head.
// In an ISSR the index fetches and the data accesses share the one memory
// port through the round-robin issr_mem_mux, as in the paper's area-
// optimised configuration. reg_rvalid_o/reg_rready_i: the head is consumed
// on a cycle with both high. mem_*: valid/ready request, in-order read
// responses flagged by mem_pvalid_i, no response to writes. Repetition of
// reads only, the credit scheme and the write-response convention are this
// design's own choices; the FIFO, its reuse for both directions, the
// repetition counter and the round-robin port sharing follow the paper.
module ssr_lane
  import issr_pkg::*;
#(
  parameter bit          Indirection    = 1'b1,
  parameter int unsigned AddrWidth      = 18,
  parameter int unsigned IndexWidth     = 18,
  parameter int unsigned BoundWidth     = 18,
  parameter int unsigned RepWidth       = 16,
  parameter int unsigned DataDepth      = 5,
  parameter int unsigned IdxFifoDepth   = 2,
  parameter int unsigned MaxOutstanding = 8
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  // configuration
  input  logic [CfgRegWidth-1:0]  cfg_word_i,
  input  logic                    cfg_write_i,
  input  logic [CfgDataWidth-1:0] cfg_wdata_i,
  output logic [CfgDataWidth-1:0] cfg_rdata_o,
  output logic                    done_o,
  // register side
  output data_t                   reg_rdata_o,
  output logic                    reg_rvalid_o,
  input  logic                    reg_rready_i,
  input  data_t                   reg_wdata_i,
  input  logic                    reg_wvalid_i,
  output logic                    reg_wready_o,
  // memory port
  output mem_req_t                mem_req_o,
  output logic                    mem_qvalid_o,
  input  logic                    mem_qready_i,
  input  data_t                   mem_rsp_data_i,
  input  logic                    mem_pvalid_i
);

  localparam int unsigned CntWidth = $clog2(DataDepth + 1);

  logic [AddrWidth-1:0] addr, idx_addr;
  logic                 addr_valid, addr_ready, write, drained;
  logic [RepWidth-1:0]  rep, rpt_cnt_q;
  logic                 idx_valid, idx_ready, idx_rsp_valid;
  data_t                idx_rsp_data;

  mem_req_t             dreq;
  logic                 dreq_valid, dreq_ready, drsp_valid;
  data_t                drsp_data;

  data_t                fifo_in, fifo_out;
  logic                 fifo_in_valid, fifo_in_ready, fifo_out_valid, fifo_out_ready;
  logic [CntWidth-1:0]  fifo_usage, inflight_q;
  logic                 dreq_hs, rd_pop;

  issr_addr_gen #(
    .Indirection (Indirection),
    .AddrWidth   (AddrWidth),
    .IndexWidth  (IndexWidth),
    .BoundWidth  (BoundWidth),
    .RepWidth    (RepWidth),
    .IdxFifoDepth(IdxFifoDepth)
  ) i_addr_gen (
    .clk_i,
    .rst_ni,
    .cfg_word_i,
    .cfg_write_i,
    .cfg_wdata_i,
    .cfg_rdata_o,
    .idx_req_addr_o (idx_addr),
    .idx_req_valid_o(idx_valid),
    .idx_req_ready_i(idx_ready),
    .idx_rsp_data_i (idx_rsp_data),
    .idx_rsp_valid_i(idx_rsp_valid),
    .addr_o         (addr),
    .addr_valid_o   (addr_valid),
    .addr_ready_i   (addr_ready),
    .write_o        (write),
    .rep_o          (rep),
    .lane_drained_i (drained),
    .done_o
  );

  // ------------------------------------------------------------ data mover
  assign dreq.addr  = MemAddrWidth'(addr);
  assign dreq.write = write;
  assign dreq.data  = fifo_out;
  assign dreq.strb  = '1;

  assign dreq_valid = addr_valid && (write ? fifo_out_valid
                                           : ((inflight_q + fifo_usage) < CntWidth'(DataDepth)));
  assign dreq_hs    = dreq_valid && dreq_ready;
  assign addr_ready = dreq_ready && (write || ((inflight_q + fifo_usage) < CntWidth'(DataDepth)))
                      && (!write || fifo_out_valid);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) inflight_q <= '0;
    else         inflight_q <= inflight_q + CntWidth'(dreq_hs && !write) - CntWidth'(drsp_valid);
  end

  // FIFO input mux: memory responses (read) or register writes (write).
  assign fifo_in       = write ? reg_wdata_i : drsp_data;
  assign fifo_in_valid = write ? reg_wvalid_i : drsp_valid;
  assign reg_wready_o  = write && fifo_in_ready;

  // FIFO output mux: register reads (read) or memory write data (write).
  assign reg_rdata_o    = fifo_out;
  assign reg_rvalid_o   = !write && fifo_out_valid;
  assign rd_pop         = reg_rvalid_o && reg_rready_i && (rpt_cnt_q == rep);
  assign fifo_out_ready = write ? dreq_hs : rd_pop;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                           rpt_cnt_q <= '0;
    else if (rd_pop)                       rpt_cnt_q <= '0;
    else if (reg_rvalid_o && reg_rready_i) rpt_cnt_q <= rpt_cnt_q + 1'b1;
  end

  assign drained = (fifo_usage == '0) && (inflight_q == '0) && (rpt_cnt_q == '0);

  stream_fifo #(
    .Width(DataWidth),
    .Depth(DataDepth)
  ) i_data_fifo (
    .clk_i,
    .rst_ni,
    .flush_i    (1'b0),
    .in_data_i  (fifo_in),
    .in_valid_i (fifo_in_valid),
    .in_ready_o (fifo_in_ready),
    .out_data_o (fifo_out),
    .out_valid_o(fifo_out_valid),
    .out_ready_i(fifo_out_ready),
    .usage_o    (fifo_usage)
  );

  // -------------------------------------------------------- memory port(s)
  if (Indirection) begin : gen_mux
    mem_req_t idx_req;
    data_t    rsp_data;
    logic [1:0] rsp_valid, in_ready;

    assign idx_req.addr  = MemAddrWidth'(idx_addr);
    assign idx_req.write = 1'b0;
    assign idx_req.data  = '0;
    assign idx_req.strb  = '1;

    issr_mem_mux #(
      .MaxOutstanding(MaxOutstanding)
    ) i_mem_mux (
      .clk_i,
      .rst_ni,
      .in_req_i       ({dreq, idx_req}),
      .in_valid_i     ({dreq_valid, idx_valid}),
      .in_ready_o     (in_ready),
      .in_rsp_data_o  (rsp_data),
      .in_rsp_valid_o (rsp_valid),
      .out_req_o      (mem_req_o),
      .out_valid_o    (mem_qvalid_o),
      .out_ready_i    (mem_qready_i),
      .out_rsp_data_i (mem_rsp_data_i),
      .out_rsp_valid_i(mem_pvalid_i)
    );
    assign idx_ready     = in_ready[0];
    assign dreq_ready    = in_ready[1];
    assign idx_rsp_data  = rsp_data;
    assign idx_rsp_valid = rsp_valid[0];
    assign drsp_data     = rsp_data;
    assign drsp_valid    = rsp_valid[1];
  end else begin : gen_direct
    assign mem_req_o     = dreq;
    assign mem_qvalid_o  = dreq_valid;
    assign dreq_ready    = mem_qready_i;
    assign drsp_data     = mem_rsp_data_i;
    assign drsp_valid    = mem_pvalid_i;
    assign idx_ready     = 1'b0;
    assign idx_rsp_data  = '0;
    assign idx_rsp_valid = 1'b0;
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) drsp_valid |-> (!write && fifo_in_ready))
    else $error("ssr_lane: read response without FIFO space");

endmodule
