// tb_csrmv_sweep: CSR matrix times dense vector (CsrMV) and CSR matrix times
// dense row-major matrix (CsrMM) on the streamer at its default parameters,
// for several average row lengths and both index sizes.
//
// The CsrMV matrices have 3200 columns and random row lengths around an
// average of 1, 4, 16 or 48 nonzeros per row; column indices are uniform.
// CsrMM multiplies a small matrix (23 x 23, about 64 nonzeros) with a
// 2-column dense matrix and a 256 x 1024 matrix with a 4-column one. Each
// dense column is one pass over the sparse matrix, with the ISSR data base
// at the column's first element and the extra index shift log2(columns), so
// an index selects a row of the dense matrix. The whole
// value array is streamed by the SSR lane and the whole column-index array
// by the ISSR lane, each as a single job, as a CSR kernel with one stream
// per matrix does. The testbench acts as an FPU that issues one fused
// multiply-add per cycle whenever both streams have data, accumulating into
// the current row's register, and moves to the next row after that row's
// last nonzero (empty rows produce zero without touching the streams). The
// largest case, 256 rows with up to 72 nonzeros each, fills most of the 256
// KiB that 18-bit addresses reach: dense vector 25 KiB, values up to
// 144 KiB, 32-bit indices up to 72 KiB.
// Checked per pass:
//  - every row result is bit-identical to the same summation done here;
//  - the streaming phase takes close to nnz*5/4 (16-bit) or nnz*3/2
//    (32-bit) cycles, the limit of sharing one memory port between index
//    words and data words, plus a fill latency of a few cycles.
// The row-pointer handling and the per-row reduction, which are the core's
// share of a CSR kernel, are not modelled as cycles.
module tb_csrmv_sweep;
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
    repeat (400000) @(posedge clk);
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

  localparam int unsigned XV = 32'h0_0000;  // dense vector or matrix, 4096 doubles
  localparam int unsigned AV = 32'h0_8000;  // values, up to 18432
  localparam int unsigned AI = 32'h2_C000;  // indices, up to 18432 x 4 bytes

  int rowptr [$];
  int unsigned colidx [$];

  task automatic run_matrix(input int nrows, input int ncols, input int avg, input int sz,
                            input int kshift);
    int nnz, issued, cyc, lim, guard, row;
    real acc, e;
    real util;
    // Build the matrix: row length uniform in [avg/2, avg/2 + avg].
    rowptr.delete();
    colidx.delete();
    rowptr.push_back(0);
    for (int r = 0; r < nrows; r++) begin
      int len;
      len = (avg < 2) ? int'($urandom % 3) : avg / 2 + int'($urandom % (avg + 1));
      for (int j = 0; j < len; j++) begin
        int unsigned c, a, k;
        c = $urandom % ncols;
        k = rowptr[r] + j;
        colidx.push_back(c);
        mem.words[(AV + 8 * k) >> 3] = $realtobits(rnd());
        a = AI + 2 * sz * k;
        if (sz == 2) mem.words[a[17:3]][(a % 8) * 8 +: 32] = c;
        else         mem.words[a[17:3]][(a % 8) * 8 +: 16] = c[15:0];
      end
      rowptr.push_back(rowptr[r] + len);
    end
    nnz = rowptr[nrows];

    for (int col = 0; col < (1 << kshift); col++) begin
      cfg_wr(0, RegBound0, nnz - 1);
      cfg_wr(0, RegStride0, 8);
      cfg_wr(0, RegRptr0, AV);
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | (kshift << IdxShiftLsb) | sz);
      cfg_wr(1, RegDataBase, XV + 8 * col);
      cfg_wr(1, RegBound0, nnz - 1);
      cfg_wr(1, RegRptr0, AI);

      // Streaming phase.
      issued = 0; cyc = 0; guard = 0; row = 0; acc = 0.0;
      raddr[0] = 5'd0; raddr[1] = 5'd1;
      while (row < nrows && rowptr[row + 1] == 0) row++;
      while (issued < nnz && guard < 100000) begin
        @(negedge clk);
        raddr[2] = 5'(2 + row % 8);
        rvalid = 3'b111;
        rdone  = 3'b000;
        #1;
        if (rready[0] && rready[1]) begin
          acc = acc + $bitstoreal(rdata[0]) * $bitstoreal(rdata[1]);
          rdone = 3'b111;
          issued++;
          if (issued == rowptr[row + 1]) begin
            e = 0.0;
            for (int k = rowptr[row]; k < rowptr[row + 1]; k++)
              e = e + rd_real(AV + 8 * k) * rd_real(XV + 8 * ((colidx[k] << kshift) + col));
            check($realtobits(acc) == $realtobits(e),
                  $sformatf("avg %0d size %0d col %0d row %0d: %f exp %f",
                            avg, 16 * sz, col, row, acc, e));
            acc = 0.0;
            row++;
            while (row < nrows && rowptr[row + 1] == rowptr[row]) row++;
          end
        end
        cyc++;
        guard++;
      end
      @(negedge clk);
      rvalid = '0; rdone = '0;
      check(issued == nnz && row == nrows,
            $sformatf("avg %0d size %0d: issued %0d of %0d, rows %0d", avg, 16 * sz, issued, nnz, row));

      lim = (sz == 1) ? (nnz * 5 + 3) / 4 : (nnz * 3 + 1) / 2;
      check(cyc >= lim && cyc <= lim + 8,
            $sformatf("avg %0d size %0d: %0d cycles, port limit %0d", avg, 16 * sz, cyc, lim));
      util = real'(nnz) / real'(cyc);
      $display("%s %2d-bit rows=%0d cols=%0d avg_nnz=%0d nnz=%0d dense col %0d: cycles=%0d utilization=%.3f",
               kshift == 0 ? "csrmv" : "csrmm", 16 * sz, nrows, ncols, avg, nnz, col, cyc, util);

      guard = 0;
      while (lane_done != 2'b11 && guard < 100) begin
        @(negedge clk);
        guard++;
      end
      check(lane_done == 2'b11, $sformatf("avg %0d size %0d: lanes done", avg, 16 * sz));
    end
  endtask

  initial begin
    cfg_word = '0; cfg_write = 0; cfg_wdata = '0;
    raddr = '0; rvalid = '0; rdone = '0;
    for (int i = 0; i < 4096; i++) mem.words[i] = $realtobits(rnd());
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int s = 1; s <= 2; s++) begin
      run_matrix(512, 3200, 1, s, 0);
      run_matrix(512, 3200, 4, s, 0);
      run_matrix(256, 3200, 16, s, 0);
      run_matrix(256, 3200, 48, s, 0);
      run_matrix(23, 23, 3, s, 1);
      run_matrix(256, 1024, 16, s, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
