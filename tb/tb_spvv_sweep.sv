// tb_spvv_sweep: sparse-dense dot product utilization against the number of
// nonzeros, for 16- and 32-bit indices, on the streamer at its default
// parameters.
//
// For each nonzero count n in {2, 5, 10, 20, 50, 100, 200, 500, 1000, 2000,
// 5000} and each index size, the testbench places n random values, n random
// indices into a 2048-element dense vector and the vector itself in a
// single-cycle two-port memory. It configures the SSR lane to stream the
// values and the ISSR lane to gather the dense operands, and then acts as an
// FPU issuing one fused multiply-add per cycle whenever both streams have
// data, rotating over several accumulators. Checked per point:
//  - the sum is bit-identical to the same staggered summation done here;
//  - the compute phase takes close to n*5/4 (16-bit) or n*3/2 (32-bit)
//    cycles, the limit set by sharing one memory port between index words
//    and data words, plus a fill latency of a few cycles;
//  - from n = 1000 on, utilization n/cycles is at least 0.79 resp. 0.66.
// Utilization excludes configuration and the final reduction of the partial
// sums, which belong to the core's program, not to the streamer.
module tb_spvv_sweep;
  import issr_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic [9:0]  cfg_word;
  logic        cfg_write;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [1:0]  lane_done;
  logic [2:0][4:0] raddr;
  logic [2:0]  rvalid, rready, rdone, ris;
  data_t [2:0] rdata;
  logic        wready, wis;
  mem_req_t [1:0] mreq;
  logic [1:0]  qvalid, qready, pvalid;
  data_t [1:0] pdata;
  int nreq;

  issr_streamer dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_word_i(cfg_word), .cfg_write_i(cfg_write),
    .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .redir_i(1'b1), .lane_done_o(lane_done),
    .fpu_raddr_i(raddr), .fpu_rvalid_i(rvalid), .fpu_rready_o(rready), .fpu_rdata_o(rdata),
    .fpu_rdone_i(rdone), .fpu_ris_ssr_o(ris), .fpu_waddr_i(5'd31), .fpu_wdata_i('0),
    .fpu_wvalid_i(1'b0), .fpu_wready_o(wready), .fpu_wis_ssr_o(wis),
    .mem_req_o(mreq), .mem_qvalid_o(qvalid), .mem_qready_i(qready),
    .mem_rsp_data_i(pdata), .mem_pvalid_i(pvalid));

  tb_tcdm_model #(.NumPorts(2)) mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_i(1'b0), .req_i(mreq), .qvalid_i(qvalid),
    .qready_o(qready), .rsp_data_o(pdata), .rsp_valid_o(pvalid), .nreq_o(nreq));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic cfg_wr(input int lane, input logic [4:0] w, input logic [31:0] d);
    @(negedge clk);
    cfg_word = {5'(lane), w}; cfg_wdata = d; cfg_write = 1;
    @(negedge clk);
    cfg_write = 0;
  endtask

  function automatic real rd_real(input int unsigned a);
    return $bitstoreal(mem.words[a[17:3]]);
  endfunction

  function automatic real rnd();
    return real'(int'($urandom % 2001) - 1000) / 64.0;
  endfunction

  localparam int unsigned XV = 32'h0_0000;  // dense vector, 2048 doubles
  localparam int unsigned AV = 32'h1_0000;  // nonzero values, up to 5000
  localparam int unsigned AI = 32'h2_0000;  // indices, up to 5000 x 4 bytes

  localparam int NPTS = 11;
  int npts [NPTS] = '{2, 5, 10, 20, 50, 100, 200, 500, 1000, 2000, 5000};

  task automatic run_point(input int n, input int sz);
    real acc [4], racc [4];
    real e, r;
    int nacc, issued, cyc, lim, guard;
    real util, floor_util;
    nacc = (sz == 1) ? 4 : 3;
    for (int k = 0; k < 4; k++) begin
      acc[k] = 0.0;
      racc[k] = 0.0;
    end
    for (int i = 0; i < n; i++) begin
      int unsigned v, a;
      v = $urandom % 2048;
      mem.words[(AV + 8 * i) >> 3] = $realtobits(rnd());
      a = AI + 2 * sz * i;
      if (sz == 2) mem.words[a[17:3]][(a % 8) * 8 +: 32] = v;
      else         mem.words[a[17:3]][(a % 8) * 8 +: 16] = v[15:0];
      racc[i % nacc] = racc[i % nacc] + rd_real(AV + 8 * i) * rd_real(XV + 8 * v);
    end
    e = 0.0;
    for (int k = 0; k < nacc; k++) e = e + racc[k];

    cfg_wr(0, RegBound0, n - 1);
    cfg_wr(0, RegStride0, 8);
    cfg_wr(0, RegRptr0, AV);
    cfg_wr(1, RegIdxCfg, (1 << IndirBit) | sz);
    cfg_wr(1, RegDataBase, XV);
    cfg_wr(1, RegBound0, n - 1);
    cfg_wr(1, RegRptr0, AI);

    // Compute phase: count cycles from the first issue attempt to the last
    // issued instruction.
    issued = 0; cyc = 0; guard = 0;
    raddr[0] = 5'd0; raddr[1] = 5'd1;
    while (issued < n && guard < 50000) begin
      @(negedge clk);
      raddr[2] = 5'(2 + issued % nacc);
      rvalid = 3'b111;
      rdone  = 3'b000;
      #1;
      if (rready[0] && rready[1]) begin
        acc[issued % nacc] = acc[issued % nacc] + $bitstoreal(rdata[0]) * $bitstoreal(rdata[1]);
        rdone = 3'b111;
        issued++;
      end
      cyc++;
      guard++;
    end
    @(negedge clk);
    rvalid = '0; rdone = '0;
    check(issued == n, $sformatf("n=%0d size=%0d: issued %0d", n, 16 * sz, issued));

    r = 0.0;
    for (int k = 0; k < nacc; k++) r = r + acc[k];
    check($realtobits(r) == $realtobits(e),
          $sformatf("n=%0d size=%0d: result %f exp %f", n, 16 * sz, r, e));

    lim = (sz == 1) ? (n * 5 + 3) / 4 : (n * 3 + 1) / 2;
    check(cyc >= lim && cyc <= lim + 8,
          $sformatf("n=%0d size=%0d: %0d cycles, port limit %0d", n, 16 * sz, cyc, lim));
    util = real'(n) / real'(cyc);
    floor_util = (sz == 1) ? 0.79 : 0.66;
    if (n >= 1000) check(util >= floor_util,
                         $sformatf("n=%0d size=%0d: utilization %.3f", n, 16 * sz, util));
    $display("spvv %2d-bit n_nz=%5d  cycles=%5d  utilization=%.3f", 16 * sz, n, cyc, util);

    guard = 0;
    while (lane_done != 2'b11 && guard < 100) begin
      @(negedge clk);
      guard++;
    end
    check(lane_done == 2'b11, $sformatf("n=%0d size=%0d: lanes done", n, 16 * sz));
  endtask

  initial begin
    cfg_word = '0; cfg_write = 0; cfg_wdata = '0;
    raddr = '0; rvalid = '0; rdone = '0;
    for (int i = 0; i < 2048; i++) mem.words[i] = $realtobits(rnd());
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 1; s <= 2; s++)
      for (int p = 0; p < NPTS; p++) run_point(npts[p], s);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
