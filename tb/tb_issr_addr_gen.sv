// tb_issr_addr_gen: drives the address generator through its configuration
// registers and compares its address stream with addresses computed here.
// The index port is served by the behavioural memory model (with random
// stalls in some jobs). Covered: register read-back, affine jobs of one to
// four loops, gather jobs with 16- and 32-bit indices at every alignment
// and with extra shifts, a job queued in the shadow registers while another
// runs (the status register must show it pending), and the done status.
module tb_issr_addr_gen;
  import issr_pkg::*;
  localparam int unsigned AW = 18;
  logic clk = 0, rst_n = 0;
  logic [CfgRegWidth-1:0]  cfg_word;
  logic                    cfg_write;
  logic [CfgDataWidth-1:0] cfg_wdata, cfg_rdata;
  logic [AW-1:0]           idx_addr, addr;
  logic idx_valid, idx_ready, idx_rsp_valid, addr_valid, addr_ready, write, done, stall;
  logic [15:0] rep;
  data_t idx_rsp_data;
  mem_req_t idx_req;
  int nreq;
  int checks = 0, failures = 0;

  issr_addr_gen dut (
    .clk_i(clk), .rst_ni(rst_n), .cfg_word_i(cfg_word), .cfg_write_i(cfg_write),
    .cfg_wdata_i(cfg_wdata), .cfg_rdata_o(cfg_rdata),
    .idx_req_addr_o(idx_addr), .idx_req_valid_o(idx_valid), .idx_req_ready_i(idx_ready),
    .idx_rsp_data_i(idx_rsp_data), .idx_rsp_valid_i(idx_rsp_valid),
    .addr_o(addr), .addr_valid_o(addr_valid), .addr_ready_i(addr_ready),
    .write_o(write), .rep_o(rep), .lane_drained_i(1'b1), .done_o(done));

  assign idx_req.addr  = 32'(idx_addr);
  assign idx_req.write = 1'b0;
  assign idx_req.data  = '0;
  assign idx_req.strb  = '1;

  tb_tcdm_model mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_i(stall), .req_i(idx_req), .qvalid_i(idx_valid),
    .qready_o(idx_ready), .rsp_data_o(idx_rsp_data), .rsp_valid_o(idx_rsp_valid), .nreq_o(nreq));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_wr(input logic [4:0] w, input logic [31:0] d);
    @(negedge clk);
    cfg_word = w; cfg_wdata = d; cfg_write = 1;
    @(negedge clk);
    cfg_write = 0;
  endtask

  task automatic cfg_rd(input logic [4:0] w, output logic [31:0] d);
    @(negedge clk);
    cfg_word = w; cfg_write = 0;
    #1 d = cfg_rdata;
  endtask

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // Collect n addresses with random back-pressure, compare with exp.
  task automatic collect(input logic [AW-1:0] exp [$], input string tag);
    int got = 0;
    int guard = 0;
    while (got < exp.size() && guard < 5000) begin
      @(negedge clk);
      addr_ready = $urandom % 4 != 0;
      #1;
      if (addr_valid && addr_ready) begin
        check(addr == exp[got], $sformatf("%s addr %0d: %h exp %h", tag, got, addr, exp[got]));
        got++;
      end
      guard++;
    end
    @(negedge clk);
    addr_ready = 0;
    check(got == exp.size(), $sformatf("%s: got %0d of %0d addresses", tag, got, exp.size()));
  endtask

  initial begin
    logic [AW-1:0] exp [$];
    logic [31:0] rd;
    cfg_word = 0; cfg_write = 0; cfg_wdata = 0; addr_ready = 0; stall = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Register read-back.
    for (int r = 1; r < 12; r++) begin
      logic [31:0] v;
      v = (r == RegIdxCfg) ? 32'h0001_0302 : ($urandom & 32'h3ffff);
      if (r == RegRepeat) v = v & 32'hffff;
      cfg_wr(5'(r), v);
      cfg_rd(5'(r), rd);
      check(rd == v, $sformatf("readback reg %0d: %h exp %h", r, rd, v));
    end
    cfg_wr(RegIdxCfg, 32'h0);
    cfg_rd(RegStatus, rd);
    check(rd[StatDoneBit] && !rd[StatShadowBit], "status done after reset");

    // Affine jobs, 1 to 4 loops.
    for (int job = 0; job < 16; job++) begin
      int dims, nn [4], st [4];
      logic [AW-1:0] p0;
      dims = job % 4;
      p0 = AW'($urandom) & ~AW'(7);
      for (int d = 0; d < 4; d++) begin
        nn[d] = (d <= dims) ? 1 + $urandom % 4 : 1;
        st[d] = 8 * ($urandom % 40) - 80;
        cfg_wr(RegBound0 + 5'(d), 32'(nn[d] - 1));
        cfg_wr(RegStride0 + 5'(d), 32'(st[d]));
      end
      exp.delete();
      begin
        logic [AW-1:0] p;
        int ctr [4];
        p = p0; ctr = '{0, 0, 0, 0};
        for (int k = 0; k < nn[0] * nn[1] * nn[2] * nn[3]; k++) begin
          exp.push_back(p);
          for (int d = 0; d < 4; d++) begin
            if (ctr[d] < nn[d] - 1) begin
              ctr[d]++;
              p = p + AW'(st[d]);
              break;
            end
            ctr[d] = 0;
          end
        end
      end
      cfg_wr(RegRptr0 + 5'(dims), 32'(p0));
      collect(exp, $sformatf("affine job %0d", job));
      check(write == 1'b0, "read job flagged as write");
    end

    // Gather jobs.
    for (int job = 0; job < 40; job++) begin
      int sz, off, n, sh;
      logic [AW-1:0] base, arr;
      stall = job % 3 == 1;
      sz   = (job % 2) ? 2 : 1;
      off  = (sz == 2) ? 2 * ($urandom % 2) : $urandom % 4;
      n    = 1 + $urandom % 20;
      sh   = $urandom % 3;
      base = AW'($urandom);
      arr  = AW'(8 * (100 + 20 * job) + 2 * off);
      exp.delete();
      for (int i = 0; i < n; i++) begin
        int unsigned v, hw;
        v  = (sz == 2) ? $urandom % (1 << 18) : $urandom % (1 << 16);
        hw = 2 * off + i * 2 * sz;
        for (int b = 0; b < 2 * sz; b++)
          mem.words[(int'(arr) - 2 * off) / 8 + (hw + b) / 8][((hw + b) % 8) * 8 +: 8] = v[8*b +: 8];
        exp.push_back(base + (AW'(v) << (sh + 3)));
      end
      cfg_wr(RegIdxCfg, (32'(1) << IndirBit) | 32'(sh << IdxShiftLsb) | 32'(sz));
      cfg_wr(RegDataBase, 32'(base));
      cfg_wr(RegBound0, 32'(n - 1));
      cfg_wr((job % 4 < 2) ? RegRptr0 : RegWptr0, 32'(arr));
      collect(exp, $sformatf("gather job %0d size %0d off %0d", job, 16 * sz, off));
    end

    // Shadowed setup: queue a second job while the first runs.
    begin
      logic [AW-1:0] exp2 [$];
      stall = 0;
      cfg_wr(RegIdxCfg, 32'h0);
      cfg_wr(RegBound0, 32'd7);
      cfg_wr(RegStride0, 32'd8);
      cfg_wr(RegRptr0, 32'h1000);
      cfg_rd(RegStatus, rd);
      check(!rd[StatDoneBit], "status not done while a job runs");
      cfg_wr(RegBound0, 32'd3);
      cfg_wr(RegStride0, 32'd16);
      cfg_wr(RegWptr0, 32'h2000);
      cfg_rd(RegStatus, rd);
      check(rd[StatShadowBit], "second job pending in shadow registers");
      exp2.delete();
      for (int i = 0; i < 8; i++) exp2.push_back(AW'(32'h1000 + 8 * i));
      collect(exp2, "shadow job 1");
      exp2.delete();
      for (int i = 0; i < 4; i++) exp2.push_back(AW'(32'h2000 + 16 * i));
      collect(exp2, "shadow job 2");
      check(write == 1'b1, "second job is a write job");
      repeat (2) @(negedge clk);
      cfg_rd(RegStatus, rd);
      check(rd[StatDoneBit] && !rd[StatShadowBit], "status done at end");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
