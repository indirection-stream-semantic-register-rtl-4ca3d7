// tb_ssr_affine_iter: checks the four-loop affine iterator against absolute
// address arithmetic. Each job picks random bounds and absolute per-loop
// strides A[d]; the programmed (relative) stride of loop d is
// A[d] - sum_{j<d} bound[j]*A[j], and the expected address of iteration
// (i0,i1,i2,i3) is ptr + sum_d i_d*A[d]. The step input is held high, so one
// address per cycle is expected; the cycle count of each job is checked.
module tb_ssr_affine_iter;
  localparam int unsigned NL = 4, BW = 18, AW = 18;
  logic clk = 0, rst_n = 0;
  logic load, valid, last, step;
  logic [NL-1:0][BW-1:0] bound;
  logic [NL-1:0][AW-1:0] stride;
  logic [AW-1:0] ptr0, ptr;
  logic [1:0] dims;
  int checks = 0, failures = 0;

  ssr_affine_iter dut (
    .clk_i(clk), .rst_ni(rst_n), .load_i(load), .bound_i(bound), .stride_i(stride),
    .ptr_i(ptr0), .dims_i(dims), .valid_o(valid), .ptr_o(ptr), .last_o(last), .step_i(step));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int abs_s [NL];
    int n [NL];
    int total, got, cyc;
    logic [AW-1:0] exp_a;
    load = 0; step = 0; bound = '0; stride = '0; ptr0 = '0; dims = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int job = 0; job < 60; job++) begin
      dims = 2'($urandom % 4);
      ptr0 = AW'($urandom);
      for (int d = 0; d < NL; d++) begin
        n[d] = (d <= dims) ? 1 + ($urandom % 5) : 1;
        abs_s[d] = ($urandom % 64) * 8 - 256;
        bound[d] = BW'(n[d] - 1);
      end
      for (int d = 0; d < NL; d++) begin
        int rel;
        rel = abs_s[d];
        for (int j = 0; j < d; j++) rel -= (n[j] - 1) * abs_s[j];
        stride[d] = AW'(rel);
      end
      total = n[0] * n[1] * n[2] * n[3];
      @(negedge clk); load = 1;
      @(negedge clk); load = 0; step = 1;
      got = 0; cyc = 0;
      for (int i3 = 0; i3 < n[3]; i3++)
        for (int i2 = 0; i2 < n[2]; i2++)
          for (int i1 = 0; i1 < n[1]; i1++)
            for (int i0 = 0; i0 < n[0]; i0++) begin
              exp_a = AW'(int'(ptr0) + i0*abs_s[0] + i1*abs_s[1] + i2*abs_s[2] + i3*abs_s[3]);
              checks++;
              if (!valid || ptr !== exp_a) begin
                failures++;
                $display("%0t FAIL job %0d iter (%0d,%0d,%0d,%0d): valid=%0b ptr=%h exp=%h",
                         $time, job, i3, i2, i1, i0, valid, ptr, exp_a);
              end
              checks++;
              if (last !== (got == total - 1)) begin
                failures++;
                $display("FAIL job %0d: last=%0b at %0d of %0d", job, last, got, total);
              end
              got++;
              @(negedge clk); cyc++;
            end
      step = 0;
      checks++;
      if (valid || cyc != total) begin
        failures++;
        $display("FAIL job %0d: still valid after %0d addresses (cycles %0d)", job, total, cyc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
