// issr_streamer: the streamer of the FPU subsystem, with one plain stream
// register (SSR, lane 0, register ft0, memory port 0) and one indirection
// stream register (ISSR, lane 1, register ft1, memory port 1).
//
// Configuration: the core writes and reads the lanes' registers through one
// shared word-addressed interface; cfg_word_i[4:0] selects the register
// (see issr_pkg) and cfg_word_i[9:5] the lane. Reads are combinational.
// redir_i enables the register redirection of ssr_switch, which connects the
// FPU's three read ports and its write port to the lanes. Each lane has its
// own memory port (valid/ready request, in-order read responses, no write
// responses); in the ISSR the index and data accesses share that port
// round-robin, so with 16-bit (32-bit) indices the data stream reaches at
// most 4/5 (2/3) of the port's bandwidth. lane_done_o reports per lane that
// no job is running or pending and its FIFO is empty.
//
// The lane mix, per-lane memory ports, shadowed configuration, FIFO depth
// of 5, 18-bit addresses and indices and four affine loops are the paper's
// evaluated configuration. The cfg address split, lane numbering and all
// handshake conventions are this design's own choices.
module issr_streamer
  import issr_pkg::*;
#(
  parameter int unsigned AddrWidth      = 18,
  parameter int unsigned IndexWidth     = 18,
  parameter int unsigned BoundWidth     = 18,
  parameter int unsigned RepWidth       = 16,
  parameter int unsigned DataDepth      = 5,
  parameter int unsigned IdxFifoDepth   = 2,
  parameter int unsigned MaxOutstanding = 8,
  localparam int unsigned NumLanes      = 2,
  localparam int unsigned NumPorts      = 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  // configuration interface (A)
  input  logic [9:0]                    cfg_word_i,
  input  logic                          cfg_write_i,
  input  logic [CfgDataWidth-1:0]       cfg_wdata_i,
  output logic [CfgDataWidth-1:0]       cfg_rdata_o,
  input  logic                          redir_i,
  output logic [NumLanes-1:0]           lane_done_o,
  // FPU register interface (B)
  input  logic [NumPorts-1:0][4:0]      fpu_raddr_i,
  input  logic [NumPorts-1:0]           fpu_rvalid_i,
  output logic [NumPorts-1:0]           fpu_rready_o,
  output data_t [NumPorts-1:0]          fpu_rdata_o,
  input  logic [NumPorts-1:0]           fpu_rdone_i,
  output logic [NumPorts-1:0]           fpu_ris_ssr_o,
  input  logic [4:0]                    fpu_waddr_i,
  input  data_t                         fpu_wdata_i,
  input  logic                          fpu_wvalid_i,
  output logic                          fpu_wready_o,
  output logic                          fpu_wis_ssr_o,
  // memory ports (C), one per lane
  output mem_req_t [NumLanes-1:0]       mem_req_o,
  output logic [NumLanes-1:0]           mem_qvalid_o,
  input  logic [NumLanes-1:0]           mem_qready_i,
  input  data_t [NumLanes-1:0]          mem_rsp_data_i,
  input  logic [NumLanes-1:0]           mem_pvalid_i
);

  data_t [NumLanes-1:0]             lane_rdata, lane_wdata;
  logic  [NumLanes-1:0]             lane_rvalid, lane_rready, lane_wvalid, lane_wready;
  logic  [NumLanes-1:0][CfgDataWidth-1:0] lane_cfg_rdata;
  logic  [NumLanes-1:0]             lane_cfg_write;
  logic  [4:0]                      cfg_lane;

  // Configuration demultiplexer.
  assign cfg_lane = cfg_word_i[9:5];
  always_comb begin
    cfg_rdata_o = '0;
    for (int unsigned l = 0; l < NumLanes; l++) begin
      lane_cfg_write[l] = cfg_write_i && (cfg_lane == 5'(l));
      if (cfg_lane == 5'(l)) cfg_rdata_o = lane_cfg_rdata[l];
    end
  end

  for (genvar l = 0; l < NumLanes; l++) begin : gen_lane
    ssr_lane #(
      .Indirection   (l == 1),
      .AddrWidth     (AddrWidth),
      .IndexWidth    (IndexWidth),
      .BoundWidth    (BoundWidth),
      .RepWidth      (RepWidth),
      .DataDepth     (DataDepth),
      .IdxFifoDepth  (IdxFifoDepth),
      .MaxOutstanding(MaxOutstanding)
    ) i_lane (
      .clk_i,
      .rst_ni,
      .cfg_word_i    (cfg_word_i[4:0]),
      .cfg_write_i   (lane_cfg_write[l]),
      .cfg_wdata_i,
      .cfg_rdata_o   (lane_cfg_rdata[l]),
      .done_o        (lane_done_o[l]),
      .reg_rdata_o   (lane_rdata[l]),
      .reg_rvalid_o  (lane_rvalid[l]),
      .reg_rready_i  (lane_rready[l]),
      .reg_wdata_i   (lane_wdata[l]),
      .reg_wvalid_i  (lane_wvalid[l]),
      .reg_wready_o  (lane_wready[l]),
      .mem_req_o     (mem_req_o[l]),
      .mem_qvalid_o  (mem_qvalid_o[l]),
      .mem_qready_i  (mem_qready_i[l]),
      .mem_rsp_data_i(mem_rsp_data_i[l]),
      .mem_pvalid_i  (mem_pvalid_i[l])
    );
  end

  ssr_switch #(
    .NumLanes(NumLanes),
    .NumPorts(NumPorts)
  ) i_switch (
    .redir_i,
    .fpu_raddr_i,
    .fpu_rvalid_i,
    .fpu_rready_o,
    .fpu_rdata_o,
    .fpu_rdone_i,
    .fpu_ris_ssr_o,
    .fpu_waddr_i,
    .fpu_wdata_i,
    .fpu_wvalid_i,
    .fpu_wready_o,
    .fpu_wis_ssr_o,
    .lane_rdata_i (lane_rdata),
    .lane_rvalid_i(lane_rvalid),
    .lane_rready_o(lane_rready),
    .lane_wdata_o (lane_wdata),
    .lane_wvalid_o(lane_wvalid),
    .lane_wready_i(lane_wready)
  );

  // The FPU may only retire a stream operand that was available.
  for (genvar l = 0; l < NumLanes; l++) begin : gen_chk
    assert property (@(posedge clk_i) disable iff (!rst_ni) lane_rready[l] |-> lane_rvalid[l])
      else $error("issr_streamer: stream operand retired before it was available");
  end

endmodule
