// tb_issr_mem_mux: two random requesters (index and data side) share one
// memory model port through the round-robin multiplexer. Every memory word
// holds a value derived from its address, so each requester can check that
// it gets exactly the responses to its own reads, in order. Also checked:
// with both requesters always valid, the grants alternate; writes pass
// through and produce no response; a lone requester is granted at once.
module tb_issr_mem_mux;
  import issr_pkg::*;
  logic clk = 0, rst_n = 0;
  mem_req_t [1:0] in_req;
  logic [1:0] in_valid, in_ready, rsp_valid;
  data_t rsp_data, out_rsp;
  mem_req_t out_req;
  logic out_valid, out_ready, out_rsp_valid, stall;
  int nreq;
  int checks = 0, failures = 0;

  issr_mem_mux dut (
    .clk_i(clk), .rst_ni(rst_n), .in_req_i(in_req), .in_valid_i(in_valid),
    .in_ready_o(in_ready), .in_rsp_data_o(rsp_data), .in_rsp_valid_o(rsp_valid),
    .out_req_o(out_req), .out_valid_o(out_valid), .out_ready_i(out_ready),
    .out_rsp_data_i(out_rsp), .out_rsp_valid_i(out_rsp_valid));

  tb_tcdm_model #(.WordsLog2(10)) mem (
    .clk_i(clk), .rst_ni(rst_n), .stall_i(stall), .req_i(out_req), .qvalid_i(out_valid),
    .qready_o(out_ready), .rsp_data_o(out_rsp), .rsp_valid_o(out_rsp_valid), .nreq_o(nreq));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic data_t pattern(int unsigned w);
    return {32'hC0DE0000 | w, ~w};
  endfunction

  int unsigned pend [2][$];
  logic last_grant;
  int alt_checks, both_cycles;
  bit random_mode;

  // Response checker.
  always @(posedge clk) if (rst_n) begin
    for (int r = 0; r < 2; r++) if (rsp_valid[r]) begin
      checks++;
      if (pend[r].size() == 0 || rsp_data !== pattern(pend[r][0])) begin
        failures++;
        $display("FAIL requester %0d: unexpected response %h", r, rsp_data);
      end
      if (pend[r].size() != 0) void'(pend[r].pop_front());
    end
    checks++;
    if (rsp_valid == 2'b11) begin
      failures++;
      $display("FAIL both requesters got a response");
    end
  end

  initial begin
    for (int i = 0; i < 1024; i++) mem.words[i] = pattern(i);
    in_valid = 0; in_req = '0; stall = 0; random_mode = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      random_mode = (cyc < 2000);
      stall = (cyc >= 1000 && cyc < 2000);
      for (int r = 0; r < 2; r++) begin
        // Hold a request until accepted, as the handshake requires.
        if (!in_valid[r] || in_ready[r]) begin
          in_valid[r]      = random_mode ? ($urandom % 2) : 1'b1;
          in_req[r].addr   = 32'(8 * (r * 512 + $urandom % 512));
          in_req[r].write  = (r == 1) && random_mode && ($urandom % 8 == 0);
          in_req[r].data   = pattern(in_req[r].addr[12:3]);
          in_req[r].strb   = '1;
        end
      end
      #1;
      if (in_valid == 2'b11 && out_ready && !random_mode) begin
        both_cycles++;
        if (both_cycles > 1) begin
          alt_checks++;
          checks++;
          if (in_ready[1] == last_grant) begin
            failures++;
            $display("FAIL round robin: requester %0d granted twice in a row", in_ready[1]);
          end
        end
        last_grant = in_ready[1];
      end
      if (in_valid == 2'b01 || in_valid == 2'b10) begin
        checks++;
        if (out_ready && (in_ready != in_valid)) begin
          failures++;
          $display("FAIL lone requester %b not granted (ready %b)", in_valid, in_ready);
        end
      end
      for (int r = 0; r < 2; r++)
        if (in_valid[r] && in_ready[r] && !in_req[r].write) pend[r].push_back(in_req[r].addr[12:3]);
      @(posedge clk);
    end
    @(negedge clk);
    in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (pend[0].size() != 0 || pend[1].size() != 0 || alt_checks < 100) begin
      failures++;
      $display("FAIL responses missing (%0d, %0d) or too few round-robin checks (%0d)",
               pend[0].size(), pend[1].size(), alt_checks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
