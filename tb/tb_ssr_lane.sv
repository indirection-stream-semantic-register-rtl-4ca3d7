// tb_ssr_lane: an ISSR lane and a plain SSR lane, each on its own
// behavioural memory port, driven through configuration writes and checked
// against data computed here from the memory image.
// ISSR lane: affine read, gather with 16- and 32-bit indices (contents and
// cycle counts: with an always-ready consumer and memory the data rate must
// approach 4/5 resp. 2/3 of the port, and not exceed it, since index words
// share the port), repeated reads (rep=2), scatter (indirect write), random
// memory stalls and random consumer back-pressure.
// SSR lane: a 2-D affine read and an affine write.
module tb_ssr_lane;
  import issr_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // Per-lane signals, lane 0 = SSR, lane 1 = ISSR.
  logic [1:0][CfgRegWidth-1:0]  cfg_word;
  logic [1:0]                   cfg_write;
  logic [CfgDataWidth-1:0]      cfg_wdata;
  logic [1:0][CfgDataWidth-1:0] cfg_rdata;
  logic [1:0] done, rvalid, rready, wvalid, wready, qvalid, qready, pvalid, stall;
  data_t [1:0] rdata, wdata, pdata;
  mem_req_t [1:0] req;
  int nreq [2];

  for (genvar l = 0; l < 2; l++) begin : gen_l
    ssr_lane #(.Indirection(l == 1)) dut (
      .clk_i(clk), .rst_ni(rst_n), .cfg_word_i(cfg_word[l]), .cfg_write_i(cfg_write[l]),
      .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata[l]), .done_o(done[l]),
      .reg_rdata_o(rdata[l]), .reg_rvalid_o(rvalid[l]), .reg_rready_i(rready[l]),
      .reg_wdata_i(wdata[l]), .reg_wvalid_i(wvalid[l]), .reg_wready_o(wready[l]),
      .mem_req_o(req[l]), .mem_qvalid_o(qvalid[l]), .mem_qready_i(qready[l]),
      .mem_rsp_data_i(pdata[l]), .mem_pvalid_i(pvalid[l]));
    tb_tcdm_model mem (
      .clk_i(clk), .rst_ni(rst_n), .stall_i(stall[l]), .req_i(req[l]), .qvalid_i(qvalid[l]),
      .qready_o(qready[l]), .rsp_data_o(pdata[l]), .rsp_valid_o(pvalid[l]), .nreq_o(nreq[l]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
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

  task automatic cfg_wr(input int l, input logic [4:0] w, input logic [31:0] d);
    @(negedge clk);
    cfg_word[l] = w; cfg_wdata = d; cfg_write[l] = 1;
    @(negedge clk);
    cfg_write[l] = 0;
  endtask

  function automatic data_t memrd(input int l, input int unsigned byte_addr);
    return (l == 0) ? gen_l[0].mem.words[byte_addr[17:3]] : gen_l[1].mem.words[byte_addr[17:3]];
  endfunction

  task automatic memwr(input int l, input int unsigned byte_addr, input data_t d);
    if (l == 0) gen_l[0].mem.words[byte_addr[17:3]] = d;
    else        gen_l[1].mem.words[byte_addr[17:3]] = d;
  endtask

  // Read the expected stream from lane l; each datum is read rep+1 times.
  // busy: consumer ready with probability 1/2 (else always ready).
  task automatic read_stream(input int l, input data_t exp [$], input int rep, input bit busy,
                             input string tag, output int cycles);
    int got = 0, reads = 0, guard = 0;
    cycles = 0;
    while (got < exp.size() && guard < 20000) begin
      @(negedge clk);
      rready[l] = busy ? 1'($urandom % 2) : 1'b1;
      #1;
      if (rvalid[l] && rready[l]) begin
        check(rdata[l] == exp[got], $sformatf("%s datum %0d read %0d: %h exp %h", tag, got, reads, rdata[l], exp[got]));
        reads++;
        if (reads == rep + 1) begin
          reads = 0;
          got++;
        end
      end
      guard++;
      cycles++;
    end
    @(negedge clk);
    rready[l] = 0;
    check(got == exp.size(), $sformatf("%s: %0d of %0d data", tag, got, exp.size()));
  endtask

  task automatic write_stream(input int l, input data_t vals [$], input string tag);
    int sent = 0, guard = 0;
    while (sent < vals.size() && guard < 20000) begin
      @(negedge clk);
      wvalid[l] = $urandom % 4 != 0;
      wdata[l]  = vals[sent];
      #1;
      if (wvalid[l] && wready[l]) sent++;
      guard++;
    end
    @(negedge clk);
    wvalid[l] = 0;
    check(sent == vals.size(), $sformatf("%s: wrote %0d of %0d", tag, sent, vals.size()));
  endtask

  task automatic wait_done(input int l, input string tag);
    int guard = 0;
    while (!done[l] && guard < 1000) begin
      @(negedge clk);
      guard++;
    end
    check(done[l], $sformatf("%s: lane %0d not done", tag, l));
  endtask

  // Gather setup on the ISSR lane: writes n random indices below 2**14 of
  // size sz (16-bit units) at byte address arr and returns expected data.
  task automatic setup_gather(input int sz, input int unsigned arr, input int n, input int sh,
                              input int unsigned base, output data_t exp [$],
                              output int unsigned idx [$]);
    exp.delete(); idx.delete();
    for (int i = 0; i < n; i++) begin
      int unsigned v, a;
      data_t w;
      v = $urandom % (1 << (13 - sh));
      a = arr + i * 2 * sz;
      w = memrd(1, a);
      if (sz == 2) w[(a % 8) * 8 +: 32] = v;
      else         w[(a % 8) * 8 +: 16] = v[15:0];
      memwr(1, a, w);
      idx.push_back(v);
      exp.push_back(memrd(1, base + (v << (sh + 3))));
    end
  endtask

  initial begin
    data_t exp [$];
    int unsigned idx [$];
    int cyc;
    cfg_word = '0; cfg_write = '0; cfg_wdata = '0; rready = '0; wvalid = '0; wdata = '0;
    stall = '0;
    for (int i = 0; i < 2 ** 15; i++) begin
      memwr(0, 8 * i, {32'h5500_0000 | i, $urandom});
      memwr(1, 8 * i, {32'hAA00_0000 | i, $urandom});
    end
    repeat (3) @(posedge clk);
    rst_n = 1;

    // --- ISSR lane, affine read of 64 words: one datum per cycle.
    exp.delete();
    for (int i = 0; i < 64; i++) exp.push_back(memrd(1, 32'h100 + 8 * i));
    cfg_wr(1, RegBound0, 63);
    cfg_wr(1, RegStride0, 8);
    cfg_wr(1, RegRptr0, 32'h100);
    read_stream(1, exp, 0, 0, "issr affine", cyc);
    check(cyc <= 64 + 4, $sformatf("affine read rate: 64 data in %0d cycles", cyc));
    wait_done(1, "issr affine");

    // --- Gather, 16-bit and 32-bit indices, long streams for the rate.
    for (int k = 0; k < 2; k++) begin
      int sz, n, lo, hi;
      sz = k + 1; n = 400;
      setup_gather(sz, 32'h2_0002 + 4 * k, n, 0, 32'h1_0000, exp, idx);
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | sz);
      cfg_wr(1, RegDataBase, 32'h1_0000);
      cfg_wr(1, RegBound0, n - 1);
      cfg_wr(1, RegRptr0, 32'h2_0002 + 4 * k);
      read_stream(1, exp, 0, 0, $sformatf("gather%0d", 16 * sz), cyc);
      // Peak data share of the port: 4/5 (16-bit) or 2/3 (32-bit).
      lo = (sz == 1) ? n * 5 / 4 : n * 3 / 2;
      hi = lo + 12;
      check(cyc >= lo - 4 && cyc <= hi,
            $sformatf("gather%0d rate: %0d data in %0d cycles, expected %0d..%0d", 16 * sz, n, cyc, lo - 4, hi));
      $display("gather%0d: %0d data in %0d cycles", 16 * sz, n, cyc);
      wait_done(1, "gather");
    end

    // --- Gather with shift, repetition, memory stalls, busy consumer.
    for (int job = 0; job < 12; job++) begin
      int sz, n, sh, rep;
      int unsigned arr;
      sz = 1 + job % 2; n = 1 + $urandom % 40; sh = $urandom % 3; rep = (job % 3 == 2) ? 2 : 0;
      arr = 32'h3_0000 + 64 * job + 2 * sz * ($urandom % 4 / sz);
      stall[1] = 1'(job % 2);
      setup_gather(sz, arr, n, sh, 32'h8000, exp, idx);
      cfg_wr(1, RegRepeat, rep);
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | (sh << IdxShiftLsb) | sz);
      cfg_wr(1, RegDataBase, 32'h8000);
      cfg_wr(1, RegBound0, n - 1);
      cfg_wr(1, RegRptr0, arr);
      read_stream(1, exp, rep, 1, $sformatf("gather job %0d", job), cyc);
      wait_done(1, "gather job");
    end
    stall[1] = 0;
    cfg_wr(1, RegRepeat, 0);

    // --- Scatter: write 30 values through 16-bit indices (distinct targets).
    begin
      data_t vals [$];
      int unsigned tgt [$];
      int n;
      n = 30;
      vals.delete(); tgt.delete();
      for (int i = 0; i < n; i++) begin
        data_t w;
        w = memrd(1, 32'h3_8000 + 2 * i);
        w[((32'h3_8000 + 2 * i) % 8) * 8 +: 16] = 16'(3 * i + 1);
        memwr(1, 32'h3_8000 + 2 * i, w);
        tgt.push_back(32'h2000 + 8 * (3 * i + 1));
        vals.push_back({$urandom, $urandom});
      end
      cfg_wr(1, RegIdxCfg, (1 << IndirBit) | 1);
      cfg_wr(1, RegDataBase, 32'h2000);
      cfg_wr(1, RegBound0, n - 1);
      cfg_wr(1, RegWptr0, 32'h3_8000);
      write_stream(1, vals, "scatter");
      wait_done(1, "scatter");
      for (int i = 0; i < n; i++)
        check(memrd(1, tgt[i]) == vals[i], $sformatf("scatter %0d: %h exp %h", i, memrd(1, tgt[i]), vals[i]));
    end

    // --- SSR lane: 2-D affine read (columns of an 8x6 row-major matrix).
    exp.delete();
    for (int c = 0; c < 6; c++)
      for (int r = 0; r < 8; r++) exp.push_back(memrd(0, 32'h400 + 8 * (6 * r + c)));
    cfg_wr(0, RegBound0, 7);
    cfg_wr(0, RegStride0, 48);
    cfg_wr(0, RegBound0 + 1, 5);
    cfg_wr(0, RegStride0 + 1, 8 - 7 * 48);
    cfg_wr(0, RegRptr0 + 1, 32'h400);
    read_stream(0, exp, 0, 1, "ssr 2d", cyc);
    wait_done(0, "ssr 2d");

    // --- SSR lane: affine write of 20 words with stride 16.
    begin
      data_t vals [$];
      vals.delete();
      for (int i = 0; i < 20; i++) vals.push_back({$urandom, $urandom});
      cfg_wr(0, RegBound0, 19);
      cfg_wr(0, RegStride0, 16);
      cfg_wr(0, RegWptr0, 32'h6000);
      write_stream(0, vals, "ssr write");
      wait_done(0, "ssr write");
      for (int i = 0; i < 20; i++)
        check(memrd(0, 32'h6000 + 16 * i) == vals[i], $sformatf("ssr write %0d", i));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
