// issr_addr_gen: address generator of a stream register, with the optional
// indirection extension (ISSR).
//
// Configuration (cfg_* ports): a word-addressed register file, written by
// the core. All writes go to a shadow register set; writing a read or write
// pointer register (RegRptr0+d / RegWptr0+d, see issr_pkg) marks the shadow
// job as pending with d+1 loops. When no job is running, the pending job is
// copied into the runtime set and starts, so the core can set up the next
// job while one runs. A job whose direction or repeat count differs from
// the previous one waits until the data lane has drained (lane_drained_i).
// Register reads are combinational and return the shadow values; the
// status register reports "done" and "shadow pending".
//
// Affine mode: the four-loop affine iterator (ssr_affine_iter) produces the
// data addresses directly.
//
// Indirection mode (Indirection=1 and indir bit of RegIdxCfg set): bound 0
// holds the number of indices minus one and the pointer is the byte address
// of the index array. The iterator is forced to one loop with an 8-byte
// stride over the 64-bit words that hold the indices and issues read
// requests for them on the idx_req/idx_rsp port. An outstanding request
// counter (counting requests in flight plus words held) keeps the index
// FIFO from overflowing, so responses are always accepted. The serializer
// (issr_idx_serializer) extracts 16- or 32-bit indices, shifts them by
// 3 + idx_shift and adds data_base to form the data addresses.
//
// Data mover side: addr_o/addr_valid_o/addr_ready_i hand one address per
// datum to the lane; write_o and rep_o give the running job's direction and
// repeat count. This block structure, the shadowed configuration, the
// one-dimensional 8-byte index fetch, the request counter and the shift and
// base add follow the paper; the register map, the field encodings, the
// word-count computation in hardware, the drain rule between jobs and all
// FIFO depths are this design's own choices.
module issr_addr_gen
  import issr_pkg::*;
#(
  parameter bit          Indirection  = 1'b1,
  parameter int unsigned AddrWidth    = 18,
  parameter int unsigned IndexWidth   = 18,
  parameter int unsigned BoundWidth   = 18,
  parameter int unsigned RepWidth     = 16,
  parameter int unsigned IdxFifoDepth = 2,
  localparam int unsigned DimWidth    = 2,
  localparam int unsigned ShiftWidth  = 5
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // configuration register interface
  input  logic [CfgRegWidth-1:0]   cfg_word_i,
  input  logic                     cfg_write_i,
  input  logic [CfgDataWidth-1:0]  cfg_wdata_i,
  output logic [CfgDataWidth-1:0]  cfg_rdata_o,
  // index word read port (used in indirection mode only)
  output logic [AddrWidth-1:0]     idx_req_addr_o,
  output logic                     idx_req_valid_o,
  input  logic                     idx_req_ready_i,
  input  logic [DataWidth-1:0]     idx_rsp_data_i,
  input  logic                     idx_rsp_valid_i,
  // address stream to the data mover
  output logic [AddrWidth-1:0]     addr_o,
  output logic                     addr_valid_o,
  input  logic                     addr_ready_i,
  output logic                     write_o,
  output logic [RepWidth-1:0]      rep_o,
  input  logic                     lane_drained_i,
  output logic                     done_o
);

  // ---------------------------------------------------------------- shadow
  logic [NumLoops-1:0][BoundWidth-1:0] sh_bound_q;
  logic [NumLoops-1:0][AddrWidth-1:0]  sh_stride_q;
  logic [RepWidth-1:0]                 sh_rep_q;
  logic [1:0]                          sh_idx_size_q;
  logic [ShiftWidth-1:0]               sh_idx_shift_q;
  logic                                sh_indir_q;
  logic [AddrWidth-1:0]                sh_data_base_q;
  logic [AddrWidth-1:0]                sh_ptr_q;
  logic [DimWidth-1:0]                 sh_dims_q;
  logic                                sh_write_q;
  logic                                sh_valid_q;

  // --------------------------------------------------------------- runtime
  logic                  rt_active_q;
  logic                  rt_write_q;
  logic [RepWidth-1:0]   rt_rep_q;
  logic                  rt_indir_q;
  logic [1:0]            rt_idx_size_q;
  logic [ShiftWidth-1:0] rt_idx_shift_q;
  logic [AddrWidth-1:0]  rt_data_base_q;
  logic [BoundWidth-1:0] rt_idx_left_q;

  logic launch, load, addr_hs, last_addr;

  // A cfg write to a pointer register launches a job.
  assign launch = cfg_write_i && (cfg_word_i >= RegRptr0);
  assign load   = sh_valid_q && !rt_active_q &&
                  (lane_drained_i || ((sh_write_q == rt_write_q) && (sh_rep_q == rt_rep_q)));

  assign done_o = !rt_active_q && !sh_valid_q && lane_drained_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sh_bound_q     <= '0;
      sh_stride_q    <= '0;
      sh_rep_q       <= '0;
      sh_idx_size_q  <= IdxSize16;
      sh_idx_shift_q <= '0;
      sh_indir_q     <= 1'b0;
      sh_data_base_q <= '0;
      sh_ptr_q       <= '0;
      sh_dims_q      <= '0;
      sh_write_q     <= 1'b0;
      sh_valid_q     <= 1'b0;
    end else begin
      if (load) sh_valid_q <= 1'b0;
      if (cfg_write_i) begin
        if (cfg_word_i == RegRepeat) sh_rep_q <= RepWidth'(cfg_wdata_i);
        for (int unsigned d = 0; d < NumLoops; d++) begin
          if (cfg_word_i == RegBound0 + CfgRegWidth'(d))  sh_bound_q[d]  <= BoundWidth'(cfg_wdata_i);
          if (cfg_word_i == RegStride0 + CfgRegWidth'(d)) sh_stride_q[d] <= AddrWidth'(cfg_wdata_i);
        end
        if (cfg_word_i == RegIdxCfg) begin
          sh_idx_size_q  <= cfg_wdata_i[IdxSizeLsb +: 2];
          sh_idx_shift_q <= cfg_wdata_i[IdxShiftLsb +: ShiftWidth];
          sh_indir_q     <= Indirection && cfg_wdata_i[IndirBit];
        end
        if (cfg_word_i == RegDataBase) sh_data_base_q <= AddrWidth'(cfg_wdata_i);
        if (launch) begin
          sh_ptr_q   <= AddrWidth'(cfg_wdata_i);
          sh_dims_q  <= cfg_word_i[DimWidth-1:0];
          sh_write_q <= cfg_word_i[2];
          sh_valid_q <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    cfg_rdata_o = '0;
    unique case (cfg_word_i)
      RegStatus:   begin
        cfg_rdata_o[StatDoneBit]   = done_o;
        cfg_rdata_o[StatShadowBit] = sh_valid_q;
      end
      RegRepeat:   cfg_rdata_o = CfgDataWidth'(sh_rep_q);
      RegIdxCfg:   begin
        cfg_rdata_o[IdxSizeLsb +: 2]           = sh_idx_size_q;
        cfg_rdata_o[IdxShiftLsb +: ShiftWidth] = sh_idx_shift_q;
        cfg_rdata_o[IndirBit]                  = sh_indir_q;
      end
      RegDataBase: cfg_rdata_o = CfgDataWidth'(sh_data_base_q);
      default: begin
        for (int unsigned d = 0; d < NumLoops; d++) begin
          if (cfg_word_i == RegBound0 + CfgRegWidth'(d))  cfg_rdata_o = CfgDataWidth'(sh_bound_q[d]);
          if (cfg_word_i == RegStride0 + CfgRegWidth'(d)) cfg_rdata_o = CfgDataWidth'(sh_stride_q[d]);
        end
        if (cfg_word_i >= RegRptr0) cfg_rdata_o = CfgDataWidth'(sh_ptr_q);
      end
    endcase
  end

  // ------------------------------------------------------ affine iterators
  // In indirection mode the iterator walks the 64-bit words holding the
  // indices: one loop, stride 8, as many words as the indices span.
  logic [NumLoops-1:0][BoundWidth-1:0] it_bound;
  logic [NumLoops-1:0][AddrWidth-1:0]  it_stride;
  logic [AddrWidth-1:0]                it_ptr_init;
  logic [DimWidth-1:0]                 it_dims;
  logic [BoundWidth+2:0]               idx_span;   // in 16-bit units, from word start
  logic                                it_valid, it_last, it_step;
  logic [AddrWidth-1:0]                it_ptr;

  always_comb begin
    idx_span = (BoundWidth+3)'(sh_ptr_q[2:1]) +
               (((BoundWidth+3)'(sh_bound_q[0]) + 1'b1) << (sh_idx_size_q == IdxSize32));
    it_bound    = sh_bound_q;
    it_stride   = sh_stride_q;
    it_ptr_init = sh_ptr_q;
    it_dims     = sh_dims_q;
    if (sh_indir_q) begin
      it_bound     = '0;
      it_bound[0]  = BoundWidth'((idx_span - 1'b1) >> 2);
      it_stride    = '0;
      it_stride[0] = AddrWidth'(8);
      it_ptr_init  = {sh_ptr_q[AddrWidth-1:3], 3'b000};
      it_dims      = '0;
    end
  end

  ssr_affine_iter #(
    .NumLoops  (NumLoops),
    .BoundWidth(BoundWidth),
    .AddrWidth (AddrWidth)
  ) i_affine_iter (
    .clk_i,
    .rst_ni,
    .load_i  (load),
    .bound_i (it_bound),
    .stride_i(it_stride),
    .ptr_i   (it_ptr_init),
    .dims_i  (it_dims),
    .valid_o (it_valid),
    .ptr_o   (it_ptr),
    .last_o  (it_last),
    .step_i  (it_step)
  );

  // ------------------------------------------------------------ indirection
  logic [AddrWidth-1:0] ser_addr;
  logic                 ser_valid;

  if (Indirection) begin : gen_indir
    localparam int unsigned CntWidth = $clog2(IdxFifoDepth + 1);
    logic [CntWidth-1:0]  req_cnt_q;    // requests in flight plus words held
    logic                 idx_req_hs, word_pop, word_valid;
    logic [DataWidth-1:0] word;
    logic                 fifo_in_ready;

    assign idx_req_addr_o  = it_ptr;
    assign idx_req_valid_o = rt_active_q && rt_indir_q && it_valid &&
                             (req_cnt_q < CntWidth'(IdxFifoDepth));
    assign idx_req_hs      = idx_req_valid_o && idx_req_ready_i;

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) req_cnt_q <= '0;
      else         req_cnt_q <= req_cnt_q + CntWidth'(idx_req_hs) - CntWidth'(word_pop);
    end

    stream_fifo #(
      .Width(DataWidth),
      .Depth(IdxFifoDepth)
    ) i_idx_fifo (
      .clk_i,
      .rst_ni,
      .flush_i    (1'b0),
      .in_data_i  (idx_rsp_data_i),
      .in_valid_i (idx_rsp_valid_i),
      .in_ready_o (fifo_in_ready),
      .out_data_o (word),
      .out_valid_o(word_valid),
      .out_ready_i(word_pop),
      .usage_o    ()
    );

    issr_idx_serializer #(
      .IndexWidth(IndexWidth),
      .AddrWidth (AddrWidth),
      .ShiftWidth(ShiftWidth)
    ) i_idx_serializer (
      .clk_i,
      .rst_ni,
      .init_i      (load),
      .init_soffs_i(sh_ptr_q[2:1]),
      .idx_size_i  (rt_idx_size_q),
      .idx_shift_i (rt_idx_shift_q),
      .data_base_i (rt_data_base_q),
      .word_i      (word),
      .word_valid_i(word_valid && rt_active_q && rt_indir_q),
      .word_ready_o(word_pop),
      .last_i      (rt_idx_left_q == '0),
      .addr_o      (ser_addr),
      .addr_valid_o(ser_valid),
      .addr_ready_i(addr_ready_i)
    );

    assert property (@(posedge clk_i) disable iff (!rst_ni)
                     idx_rsp_valid_i |-> fifo_in_ready)
      else $error("issr_addr_gen: index response without FIFO space");
  end else begin : gen_no_indir
    assign idx_req_addr_o  = '0;
    assign idx_req_valid_o = 1'b0;
    assign ser_addr        = '0;
    assign ser_valid       = 1'b0;
  end

  // Address and index widths are design-time choices between 16 and 32 bit.
  if (AddrWidth < 16 || AddrWidth > 32 || IndexWidth < 16 || IndexWidth > 32) begin : gen_bad_width
    $error("issr_addr_gen: AddrWidth and IndexWidth must lie between 16 and 32");
  end

  // ----------------------------------------------------------- output mux
  assign addr_o       = rt_indir_q ? ser_addr : it_ptr;
  assign addr_valid_o = rt_active_q && (rt_indir_q ? ser_valid : it_valid);
  assign addr_hs      = addr_valid_o && addr_ready_i;
  assign last_addr    = rt_indir_q ? (rt_idx_left_q == '0) : it_last;
  assign it_step      = rt_indir_q ? (Indirection && idx_req_valid_o && idx_req_ready_i) : addr_hs;
  assign write_o      = rt_write_q;
  assign rep_o        = rt_rep_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rt_active_q    <= 1'b0;
      rt_write_q     <= 1'b0;
      rt_rep_q       <= '0;
      rt_indir_q     <= 1'b0;
      rt_idx_size_q  <= IdxSize16;
      rt_idx_shift_q <= '0;
      rt_data_base_q <= '0;
      rt_idx_left_q  <= '0;
    end else if (load) begin
      rt_active_q    <= 1'b1;
      rt_write_q     <= sh_write_q;
      rt_rep_q       <= sh_rep_q;
      rt_indir_q     <= sh_indir_q;
      rt_idx_size_q  <= sh_idx_size_q;
      rt_idx_shift_q <= sh_idx_shift_q;
      rt_data_base_q <= sh_data_base_q;
      rt_idx_left_q  <= sh_bound_q[0];
    end else if (addr_hs) begin
      rt_idx_left_q <= rt_idx_left_q - 1'b1;
      if (last_addr) rt_active_q <= 1'b0;
    end
  end

endmodule
