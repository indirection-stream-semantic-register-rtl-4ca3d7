// ssr_affine_iter: the four nested affine address iterators of a stream
// register, sharing one memory pointer.
//
// load_i captures a job: per-loop bounds (iterations minus one), per-loop
// strides, the start pointer and the number of loops in use minus one
// (dims_i). While valid_o is high, ptr_o is the current address. Each
// step_i advances the iteration: the innermost loop whose counter is below
// its bound increments, every loop inside it restarts at zero, and that
// loop's stride is added to the pointer. So the stride of a loop is the
// pointer increment applied when that loop is the outermost one to iterate,
// as in the SSR the paper extends; software folds the rewinding of the inner
// loops into it. last_o flags the final address of the job; stepping past it
// drops valid_o. A new job may be loaded in the cycle the last step happens.
// All updates take effect at the next clock edge; there is no combinational
// path from step_i to ptr_o.
module ssr_affine_iter #(
  parameter int unsigned NumLoops   = 4,
  parameter int unsigned BoundWidth = 18,
  parameter int unsigned AddrWidth  = 18,
  localparam int unsigned DimWidth  = (NumLoops > 1) ? $clog2(NumLoops) : 1
) (
  input  logic                                 clk_i,
  input  logic                                 rst_ni,
  input  logic                                 load_i,
  input  logic [NumLoops-1:0][BoundWidth-1:0]  bound_i,
  input  logic [NumLoops-1:0][AddrWidth-1:0]   stride_i,
  input  logic [AddrWidth-1:0]                 ptr_i,
  input  logic [DimWidth-1:0]                  dims_i,
  output logic                                 valid_o,
  output logic [AddrWidth-1:0]                 ptr_o,
  output logic                                 last_o,
  input  logic                                 step_i
);

  logic [NumLoops-1:0][BoundWidth-1:0] bound_q, ctr_q;
  logic [NumLoops-1:0][AddrWidth-1:0]  stride_q;
  logic [DimWidth-1:0]                 dims_q;
  logic [AddrWidth-1:0]                ptr_q;
  logic                                valid_q;

  // A loop "wraps" when its counter has reached its bound; loops beyond the
  // configured dimension count always wrap.
  logic [NumLoops-1:0] wrap;
  logic [DimWidth-1:0] lvl;      // loop that iterates on the next step

  always_comb begin
    for (int unsigned d = 0; d < NumLoops; d++) begin
      wrap[d] = (DimWidth'(d) > dims_q) || (ctr_q[d] == bound_q[d]);
    end
    lvl = '0;
    for (int d = NumLoops - 1; d >= 0; d--) begin
      if (!wrap[d]) lvl = DimWidth'(d);
    end
  end

  assign valid_o = valid_q;
  assign ptr_o   = ptr_q;
  assign last_o  = &wrap;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bound_q  <= '0;
      stride_q <= '0;
      ctr_q    <= '0;
      dims_q   <= '0;
      ptr_q    <= '0;
      valid_q  <= 1'b0;
    end else if (load_i) begin
      bound_q  <= bound_i;
      stride_q <= stride_i;
      ctr_q    <= '0;
      dims_q   <= dims_i;
      ptr_q    <= ptr_i;
      valid_q  <= 1'b1;
    end else if (step_i && valid_q) begin
      if (last_o) begin
        valid_q <= 1'b0;
      end else begin
        for (int unsigned d = 0; d < NumLoops; d++) begin
          if (DimWidth'(d) < lvl)       ctr_q[d] <= '0;
          else if (DimWidth'(d) == lvl) ctr_q[d] <= ctr_q[d] + 1'b1;
        end
        ptr_q <= ptr_q + stride_q[lvl];
      end
    end
  end

endmodule
