// tb_issr_idx_serializer: packs random 16- and 32-bit index arrays at random
// alignments into 64-bit words, feeds them to the serializer with random
// output back-pressure and checks every address (base + index << (3+shift))
// and that exactly the words spanned by the array are consumed. With the
// output always ready one address per cycle is expected.
module tb_issr_idx_serializer;
  localparam int unsigned IW = 18, AW = 18, SW = 5;
  logic clk = 0, rst_n = 0;
  logic init, word_valid, word_ready, last, addr_valid, addr_ready;
  logic [1:0] init_soffs, idx_size;
  logic [SW-1:0] shift;
  logic [AW-1:0] base, addr;
  logic [63:0] word;
  int checks = 0, failures = 0;

  issr_idx_serializer dut (
    .clk_i(clk), .rst_ni(rst_n), .init_i(init), .init_soffs_i(init_soffs),
    .idx_size_i(idx_size), .idx_shift_i(shift), .data_base_i(base),
    .word_i(word), .word_valid_i(word_valid), .word_ready_o(word_ready), .last_i(last),
    .addr_o(addr), .addr_valid_o(addr_valid), .addr_ready_i(addr_ready));

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] words [$];
  int unsigned idcs [$];
  int widx, emitted, n, cyc;
  bit full_rate;

  assign word       = (widx < words.size()) ? words[widx] : '0;
  assign word_valid = (widx < words.size());
  assign last       = (emitted == n - 1);

  initial begin
    int unsigned hw, off, v, nwords;
    logic [AW-1:0] exp_a;
    init = 0; addr_ready = 0; init_soffs = 0; idx_size = 1; shift = 0; base = 0;
    widx = 0; emitted = 0; n = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 200; job++) begin
      full_rate = (job % 4 == 0);
      idx_size  = ($urandom % 2) ? 2'd2 : 2'd1;
      off       = (idx_size == 2) ? 2 * ($urandom % 2) : $urandom % 4;
      n         = 1 + $urandom % 17;
      shift     = SW'($urandom % 4);
      base      = AW'($urandom);
      idcs.delete(); words.delete();
      nwords = (off + n * idx_size + 3) / 4;
      for (int w = 0; w < nwords; w++) words.push_back(64'($urandom) << 32 | 64'($urandom));
      for (int i = 0; i < n; i++) begin
        v  = (idx_size == 2) ? $urandom : ($urandom & 32'hffff);
        idcs.push_back(v);
        hw = off + i * idx_size;
        if (idx_size == 2) words[hw / 4][(hw % 4) * 16 +: 32] = v;
        else               words[hw / 4][(hw % 4) * 16 +: 16] = v[15:0];
      end
      init_soffs = off[1:0];
      @(negedge clk); init = 1;
      @(negedge clk); init = 0;
      widx = 0; emitted = 0; cyc = 0;
      while (emitted < n) begin
        addr_ready = full_rate || ($urandom % 2);
        #1;
        if (addr_valid && addr_ready) begin
          exp_a = base + (AW'(idcs[emitted] & ((1 << IW) - 1)) << (shift + 3));
          checks++;
          if (addr !== exp_a) begin
            failures++;
            $display("FAIL job %0d idx %0d (size %0d off %0d): addr=%h exp=%h", job, emitted, idx_size, off, addr, exp_a);
          end
        end
        @(posedge clk);
        if (addr_valid && addr_ready) emitted++;
        if (word_ready) widx++;
        @(negedge clk);
        cyc++;
      end
      addr_ready = 0;
      checks++;
      if (widx != nwords) begin
        failures++;
        $display("FAIL job %0d: consumed %0d words, expected %0d", job, widx, nwords);
      end
      if (full_rate) begin
        checks++;
        if (cyc != n) begin
          failures++;
          $display("FAIL job %0d: %0d addresses took %0d cycles", job, n, cyc);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
