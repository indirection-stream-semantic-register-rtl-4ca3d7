// tb_issr_streamer: end-to-end test of the streamer at its default
// parameters, running the sparse-dense kernels the streamer was made for.
//
// The testbench plays the core and the FPU. The "core" configures the two
// lanes through the shared configuration interface and switches register
// redirection on and off. The "FPU" issues at most one instruction per
// cycle, reading ft0 (SSR lane) and ft1 (ISSR lane) through the switch and
// keeping accumulators in its own registers (rotating over NACC of them,
// like a staggered hardware loop). Both memory ports go to one behavioural
// two-port memory. Results are compared bit for bit with the same arithmetic
// done here on the memory image. Kernels:
//  - SpVV (sparse-dense dot product) with 16- and 32-bit indices; the
//    compute phase must reach the port-sharing limit (4/5 resp. 2/3).
//  - CsrMV over a small CSR matrix streamed as one job per lane.
//  - CsrMM with a 4-column row-major dense matrix: one CsrMV per column,
//    using idx_shift=2 and the next column's jobs queued in the shadow
//    registers while the current ones run.
//  - Scatter: y[idx[i]] = a[i] through an indirect write job.
//  - Repetition: each SSR datum used by two consecutive instructions.
// Each mechanism is counted and must occur at least once.
module tb_issr_streamer;
  import issr_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  logic [9:0]  cfg_word;
  logic        cfg_write, redir, stall;
  logic [31:0] cfg_wdata, cfg_rdata;
  logic [1:0]  lane_done;
  logic [2:0][4:0] raddr;
  logic [2:0]  rvalid, rready, rdone, ris;
  data_t [2:0] rdata;
  logic [4:0]  waddr;
  data_t       wdata;
  logic        wvalid, wready, wis;
  mem_req_t [1:0] mreq;
  logic [1:0]  qvalid, qready, pvalid;
  data_t [1:0] pdata;
  int nreq;

  issr_streamer dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_word_i(cfg_word), .cfg_write_i(cfg_write),
    .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata), .redir_i(redir), .lane_done_o(lane_done),
    .fpu_raddr_i(raddr), .fpu_rvalid_i(rvalid), .fpu_rready_o(rready), .fpu_rdata_o(rdata),
    .fpu_rdone_i(rdone), .fpu_ris_ssr_o(ris), .fpu_waddr_i(waddr), .fpu_wdata_i(wdata),
    .fpu_wvalid_i(wvalid), .fpu_wready_o(wready), .fpu_wis_ssr_o(wis),
    .mem_req_o(mreq), .mem_qvalid_o(qvalid), .mem_qready_i(qready),
    .mem_rsp_data_i(pdata), .mem_pvalid_i(pvalid));

  tb_tcdm_model #(.NumPorts(2)) mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_i(stall), .req_i(mreq), .qvalid_i(qvalid),
    .qready_o(qready), .rsp_data_o(pdata), .rsp_valid_o(pvalid), .nreq_o(nreq));

  always #5 clk = ~clk;

  // Mechanism counters.
  typedef enum int {
    M_GATHER16, M_GATHER32, M_UNALIGNED, M_SHIFT, M_SHADOW, M_SCATTER, M_REPEAT,
    M_AFFINE_WRITE, M_MEM_STALL, M_FPU_STALL, M_RR_CONFLICT, M_REDIR_OFF, M_NUM
  } mech_e;
  int mech [M_NUM];
  string mech_name [M_NUM] = '{"gather16", "gather32", "unaligned_idx", "idx_shift", "shadow_job",
                               "scatter", "repeat", "affine_write", "mem_stall", "fpu_stall",
                               "rr_conflict", "redir_off"};

  always @(posedge clk) if (rst_n) begin
    if (qvalid != 2'b00 && (qvalid & ~qready) != 2'b00) mech[M_MEM_STALL]++;
    if (dut.gen_lane[1].i_lane.gen_mux.i_mem_mux.in_valid_i == 2'b11) mech[M_RR_CONFLICT]++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
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

  task automatic cfg_rd(input int lane, input logic [4:0] w, output logic [31:0] d);
    @(negedge clk);
    cfg_word = {5'(lane), w}; cfg_write = 0;
    #1 d = cfg_rdata;
  endtask

  function automatic real rd_real(input int unsigned a);
    return $bitstoreal(mem.words[a[17:3]]);
  endfunction

  task automatic wr_real(input int unsigned a, input real v);
    mem.words[a[17:3]] = $realtobits(v);
  endtask

  function automatic real rnd();
    return real'(int'($urandom % 2001) - 1000) / 64.0;
  endfunction

  // Write index v (16 or 32 bit) at byte address a.
  task automatic wr_idx(input int unsigned a, input int sz, input int unsigned v);
    if (sz == 2) mem.words[a[17:3]][(a % 8) * 8 +: 32] = v;
    else         mem.words[a[17:3]][(a % 8) * 8 +: 16] = v[15:0];
  endtask

  // FPU model: issue n fmadd-style instructions acc[k % nacc] += ft0 * ft1.
  // ft0 is read on port 0, ft1 on port 1, the accumulator (f2+k) on port 2
  // from the FPU's own register file. busy: the FPU is randomly unable to
  // issue, which backs up the streams. Returns the issue cycles.
  real acc [8];
  task automatic fpu_fmadd(input int n, input int nacc, input bit busy, output int cycles);
    int issued = 0;
    int guard = 0;
    for (int k = 0; k < 8; k++) acc[k] = 0.0;
    cycles = 0;
    raddr[0] = 5'd0; raddr[1] = 5'd1;
    while (issued < n && guard < 100000) begin
      @(negedge clk);
      raddr[2] = 5'(2 + issued % nacc);
      rvalid   = 3'b111;
      rdone    = 3'b000;
      #1;
      check(ris == 3'b011, "ft0/ft1 redirected, accumulator not");
      if (rready[0] && rready[1]) begin
        if (busy && ($urandom % 3 == 0)) begin
          mech[M_FPU_STALL]++;
        end else begin
          acc[issued % nacc] = acc[issued % nacc] + $bitstoreal(rdata[0]) * $bitstoreal(rdata[1]);
          rdone = 3'b111;
          issued++;
        end
      end
      guard++;
      cycles++;
    end
    @(negedge clk);
    rvalid = '0; rdone = '0;
    check(issued == n, $sformatf("fpu issued %0d of %0d", issued, n));
  endtask

  function automatic real reduce(input int nacc);
    real s = 0.0;
    for (int k = 0; k < nacc; k++) s = s + acc[k];
    return s;
  endfunction

  // Reference of the same staggered summation.
  real racc [8];
  function automatic void ref_clear();
    for (int k = 0; k < 8; k++) racc[k] = 0.0;
  endfunction

  task automatic wait_done();
    int guard = 0;
    while (lane_done != 2'b11 && guard < 2000) begin
      @(negedge clk);
      guard++;
    end
    check(lane_done == 2'b11, "lanes done");
  endtask

  localparam int unsigned XV   = 32'h0_0000;  // dense vector, 2048 doubles
  localparam int unsigned AV   = 32'h0_8000;  // sparse values
  localparam int unsigned AI   = 32'h1_0000;  // sparse indices
  localparam int unsigned BM   = 32'h1_8000;  // dense matrix for CsrMM
  localparam int unsigned YV   = 32'h2_0000;  // results
  localparam int unsigned SV   = 32'h2_8000;  // scatter target

  // SpVV: ft0 streams AV[0..n), ft1 gathers XV at the indices.
  task automatic spvv(input int n, input int sz, input int unsigned ai, input int nacc,
                      input bit busy, input string tag);
    int cyc;
    real r, e;
    ref_clear();
    for (int i = 0; i < n; i++) begin
      int unsigned v;
      v = $urandom % 2048;
      wr_real(AV + 8 * i, rnd());
      wr_idx(ai + 2 * sz * i, sz, v);
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
    cfg_wr(1, RegRptr0, ai);
    if (sz == 1) mech[M_GATHER16]++; else mech[M_GATHER32]++;
    if (ai % 8 != 0) mech[M_UNALIGNED]++;
    fpu_fmadd(n, nacc, busy, cyc);
    r = reduce(nacc);
    check($realtobits(r) == $realtobits(e), $sformatf("%s result %f exp %f", tag, r, e));
    if (!busy) begin
      int lim;
      lim = (sz == 1) ? (n * 5 + 3) / 4 : (n * 3 + 1) / 2;
      check(cyc <= lim + 12 && cyc >= lim - 4,
            $sformatf("%s: %0d fmadd in %0d cycles, port-sharing limit gives %0d", tag, n, cyc, lim));
      $display("%s: n=%0d, %0d cycles, utilization %.3f", tag, n, cyc, real'(n) / real'(cyc));
    end
    wait_done();
  endtask

  // CSR matrix: NR rows, row lengths 0..6, column indices < 2048 (16 bit).
  localparam int NR = 24;
  int rowptr [NR + 1];
  int unsigned colidx [$];

  task automatic make_csr();
    rowptr[0] = 0;
    colidx.delete();
    for (int r = 0; r < NR; r++) begin
      int len;
      len = $urandom % 7;
      rowptr[r + 1] = rowptr[r] + len;
      for (int j = 0; j < len; j++) begin
        int unsigned c;
        c = $urandom % 256;
        colidx.push_back(c);
        wr_real(AV + 8 * (rowptr[r] + j), rnd());
        wr_idx(AI + 2 * (rowptr[r] + j), 1, c);
      end
    end
  endtask

  // One CsrMV pass: whole fiber streamed as one job per lane (jobs already
  // configured by the caller); the FPU reduces each row into YV+ystride*r.
  task automatic csrmv_compute(input int unsigned yb, input int ystride, input int unsigned xb,
                               input int xshift, input int xcol, input string tag);
    for (int r = 0; r < NR; r++) begin
      int len, cyc;
      real e, got;
      len = rowptr[r + 1] - rowptr[r];
      e = 0.0;
      for (int j = 0; j < len; j++)
        e = e + rd_real(AV + 8 * (rowptr[r] + j)) *
                rd_real(xb + 8 * xcol + (colidx[rowptr[r] + j] << (3 + xshift)));
      if (len > 0) begin
        fpu_fmadd(len, 1, 0, cyc);
        got = acc[0];
      end else begin
        got = 0.0;
      end
      check($realtobits(got) == $realtobits(e), $sformatf("%s row %0d: %f exp %f", tag, r, got, e));
      wr_real(yb + ystride * r, got);
    end
  endtask

  initial begin
    logic [31:0] st;
    int cyc;
    cfg_word = '0; cfg_write = 0; cfg_wdata = '0; redir = 0; stall = 0;
    raddr = '0; rvalid = '0; rdone = '0; waddr = '0; wdata = '0; wvalid = 0;
    for (int i = 0; i < 2 ** 15; i++) mem.words[i] = $realtobits(rnd());
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Redirection off: nothing is mapped to the streamer.
    @(negedge clk);
    raddr[0] = 5'd0; raddr[1] = 5'd1; raddr[2] = 5'd2; waddr = 5'd1;
    #1;
    check(ris == 3'b000 && !wis, "no redirection while disabled");
    if (ris == 3'b000) mech[M_REDIR_OFF]++;
    cfg_rd(1, RegStatus, st);
    check(st[StatDoneBit], "ISSR idle after reset");
    redir = 1;

    // SpVV, long vectors, 16- and 32-bit indices, unaligned index arrays.
    spvv(512, 1, AI + 2, 4, 0, "spvv16");
    spvv(512, 2, AI + 4, 3, 0, "spvv32");
    spvv(37, 1, AI + 6, 4, 1, "spvv16 busy fpu");
    stall = 1;
    spvv(100, 2, AI, 3, 1, "spvv32 mem stall");
    stall = 0;

    // CsrMV: y = A x.
    make_csr();
    cfg_wr(0, RegBound0, rowptr[NR] - 1);
    cfg_wr(0, RegStride0, 8);
    cfg_wr(0, RegRptr0, AV);
    cfg_wr(1, RegIdxCfg, (1 << IndirBit) | 1);
    cfg_wr(1, RegDataBase, XV);
    cfg_wr(1, RegBound0, rowptr[NR] - 1);
    cfg_wr(1, RegRptr0, AI);
    mech[M_GATHER16]++;
    csrmv_compute(YV, 8, XV, 0, 0, "csrmv");
    wait_done();

    // CsrMM: Y = A B with B row-major 256 x 4; column c uses data base
    // BM + 8c and idx_shift 2. The next column's jobs are written to the
    // shadow registers before the current column is computed.
    cfg_wr(0, RegBound0, rowptr[NR] - 1);
    cfg_wr(0, RegStride0, 8);
    cfg_wr(1, RegIdxCfg, (1 << IndirBit) | (2 << IdxShiftLsb) | 1);
    cfg_wr(1, RegBound0, rowptr[NR] - 1);
    cfg_wr(0, RegRptr0, AV);
    cfg_wr(1, RegDataBase, BM);
    cfg_wr(1, RegRptr0, AI);
    for (int c = 0; c < 4; c++) begin
      mech[M_SHIFT]++;
      if (c < 3) begin
        // Wait until the current jobs have left the shadow registers.
        do cfg_rd(1, RegStatus, st); while (st[StatShadowBit]);
        cfg_wr(0, RegRptr0, AV);
        cfg_wr(1, RegDataBase, BM + 8 * (c + 1));
        cfg_wr(1, RegRptr0, AI);
        cfg_rd(1, RegStatus, st);
        if (st[StatShadowBit] && !st[StatDoneBit]) mech[M_SHADOW]++;
      end
      csrmv_compute(YV + 8 * c, 32, BM, 2, c, $sformatf("csrmm col %0d", c));
    end
    wait_done();

    // Repetition: SSR value a[i/2] used by two instructions, ISSR gathers
    // 2n values.
    begin
      int n;
      real e, r;
      n = 20;
      e = 0.0;
      for (int i = 0; i < 2 * n; i++) begin
        int unsigned v;
        v = $urandom % 2048;
        wr_idx(AI + 4 * i, 2, v);
        e = e + rd_real(AV + 8 * (i / 2)) * rd_real(XV + 8 * v);
      end
      cfg_wr(0, RegRepeat, 1);
      cfg_wr(0, RegBound0, n - 1);
      cfg_wr(0, RegStride0, 8);
      cfg_wr(0, RegRptr0, AV);
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | 2);
      cfg_wr(1, RegDataBase, XV);
      cfg_wr(1, RegBound0, 2 * n - 1);
      cfg_wr(1, RegRptr0, AI);
      fpu_fmadd(2 * n, 1, 0, cyc);
      r = acc[0];
      check($realtobits(r) == $realtobits(e), $sformatf("repeat: %f exp %f", r, e));
      mech[M_REPEAT]++;
      wait_done();
      cfg_wr(0, RegRepeat, 0);
    end

    // Scatter: SV[idx[i]] = 2 * a[i]; the FPU reads ft0 and writes ft1.
    begin
      int n, sent, guard;
      int unsigned tgt [$];
      n = 40;
      tgt.delete();
      for (int i = 0; i < n; i++) begin
        wr_idx(AI + 2 * i, 1, 5 * i + 3);
        tgt.push_back(SV + 8 * (5 * i + 3));
      end
      cfg_wr(0, RegBound0, n - 1);
      cfg_wr(0, RegStride0, 8);
      cfg_wr(0, RegRptr0, AV);
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | 1);
      cfg_wr(1, RegDataBase, SV);
      cfg_wr(1, RegBound0, n - 1);
      cfg_wr(1, RegWptr0, AI);
      sent = 0; guard = 0;
      raddr[0] = 5'd0; waddr = 5'd1;
      while (sent < n && guard < 10000) begin
        @(negedge clk);
        rvalid = 3'b001; rdone = '0; wvalid = 0;
        #1;
        check(wis, "ft1 write redirected");
        if (rready[0] && wready) begin
          wdata  = $realtobits(2.0 * $bitstoreal(rdata[0]));
          wvalid = 1;
          rdone  = 3'b001;
          sent++;
        end
        guard++;
      end
      @(negedge clk);
      rvalid = '0; rdone = '0; wvalid = 0;
      wait_done();
      for (int i = 0; i < n; i++)
        check(rd_real(tgt[i]) == 2.0 * rd_real(AV + 8 * i), $sformatf("scatter %0d", i));
      mech[M_SCATTER]++;
    end

    // Affine write through the SSR: copy 16 values of y to SV+0x1000.
    begin
      int sent, guard;
      real src [16];
      for (int i = 0; i < 16; i++) src[i] = rnd();
      cfg_wr(0, RegBound0, 15);
      cfg_wr(0, RegStride0, 8);
      cfg_wr(0, RegWptr0, SV + 32'h1000);
      sent = 0; guard = 0;
      waddr = 5'd0;
      while (sent < 16 && guard < 1000) begin
        @(negedge clk);
        wvalid = 1; wdata = $realtobits(src[sent]);
        #1;
        if (wready) sent++;
        guard++;
      end
      @(negedge clk);
      wvalid = 0;
      wait_done();
      for (int i = 0; i < 16; i++)
        check(rd_real(SV + 32'h1000 + 8 * i) == src[i], $sformatf("affine write %0d", i));
      mech[M_AFFINE_WRITE]++;
    end

    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-14s occurred %0d times", mech_name[m], mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s never occurred", mech_name[m]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
