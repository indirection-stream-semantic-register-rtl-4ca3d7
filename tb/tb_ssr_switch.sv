// tb_ssr_switch: random stimulus on the FPU and lane sides of the switch,
// compared with a reference mapping computed here: with redirection on,
// operand register r < 2 reads lane r, a retired operand pops its lane once
// per instruction, and writes to f0/f1 go to the matching lane; with
// redirection off nothing is mapped.
module tb_ssr_switch;
  import issr_pkg::*;
  logic redir;
  logic [2:0][4:0] raddr;
  logic [2:0] rvalid, rready, rdone, ris;
  data_t [2:0] rdata;
  logic [4:0] waddr;
  data_t wdata;
  logic wvalid, wready, wis;
  data_t [1:0] lrdata, lwdata;
  logic [1:0] lrvalid, lrready, lwvalid, lwready;
  int checks = 0, failures = 0;

  ssr_switch dut (
    .redir_i(redir), .fpu_raddr_i(raddr), .fpu_rvalid_i(rvalid), .fpu_rready_o(rready),
    .fpu_rdata_o(rdata), .fpu_rdone_i(rdone), .fpu_ris_ssr_o(ris), .fpu_waddr_i(waddr),
    .fpu_wdata_i(wdata), .fpu_wvalid_i(wvalid), .fpu_wready_o(wready), .fpu_wis_ssr_o(wis),
    .lane_rdata_i(lrdata), .lane_rvalid_i(lrvalid), .lane_rready_o(lrready),
    .lane_wdata_o(lwdata), .lane_wvalid_o(lwvalid), .lane_wready_i(lwready));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      logic [1:0] exp_pop;
      redir = $urandom % 4 != 0;
      for (int p = 0; p < 3; p++) raddr[p] = 5'($urandom % 4);
      lrvalid = 2'($urandom);
      lrdata  = {$urandom, $urandom, $urandom, $urandom};
      waddr   = 5'($urandom % 4);
      wdata   = {$urandom, $urandom};
      wvalid  = $urandom % 2;
      lwready = 2'($urandom);
      // Operands only retire when valid, as the FPU guarantees.
      for (int p = 0; p < 3; p++) begin
        rvalid[p] = 1'b1;
        rdone[p]  = 1'b0;
      end
      #1;
      for (int p = 0; p < 3; p++) rdone[p] = ($urandom % 2) && (!ris[p] || rready[p]);
      #1;
      exp_pop = '0;
      for (int p = 0; p < 3; p++) begin
        bit m;
        m = redir && raddr[p] < 2;
        check(ris[p] == m, $sformatf("t%0d port %0d mapped flag", t, p));
        if (m) begin
          check(rready[p] == lrvalid[raddr[p]] && rdata[p] == lrdata[raddr[p]],
                $sformatf("t%0d port %0d reads lane %0d", t, p, raddr[p]));
          if (rdone[p]) exp_pop[raddr[p]] = 1'b1;
        end
      end
      check(lrready == exp_pop, $sformatf("t%0d lane pops %b exp %b", t, lrready, exp_pop));
      check(wis == (redir && waddr < 2), $sformatf("t%0d write mapped flag", t));
      for (int l = 0; l < 2; l++) begin
        check(lwvalid[l] == (redir && wvalid && waddr == 5'(l)), $sformatf("t%0d write valid lane %0d", t, l));
        if (lwvalid[l]) check(lwdata[l] == wdata, $sformatf("t%0d write data lane %0d", t, l));
      end
      if (redir && waddr < 2) check(wready == lwready[waddr], $sformatf("t%0d write ready", t));
      #8;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
