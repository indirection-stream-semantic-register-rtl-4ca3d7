// issr_idx_serializer: turns buffered 64-bit index words into data addresses.
//
// The head of the index FIFO (word_i) holds four 16-bit or two 32-bit
// indices. A two-bit short offset counter (soffs) selects the current index
// in 16-bit units and advances by idx_size_i (1 for 16-bit, 2 for 32-bit
// indices) at each emitted address. init_i loads soffs from the index
// array's start address, so arrays need not be 64-bit aligned. A word is
// popped when soffs wraps around or when the job's last index (last_i) is
// emitted. Each index is cut to IndexWidth bits, shifted left by
// 3 + idx_shift_i (64-bit words, optionally a power-of-two stride) and added
// to data_base_i. The structure (soffs counter, serializer, <<(n+3) shift,
// base adder) follows the paper's address generator figure; the encoding of
// idx_size_i as the soffs increment is read off that figure. The output is
// combinational from the FIFO head; addr_valid_o follows word_valid_i.
module issr_idx_serializer #(
  parameter int unsigned IndexWidth = 18,
  parameter int unsigned AddrWidth  = 18,
  parameter int unsigned ShiftWidth = 5
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic                   init_i,
  input  logic [1:0]             init_soffs_i,
  input  logic [1:0]             idx_size_i,
  input  logic [ShiftWidth-1:0]  idx_shift_i,
  input  logic [AddrWidth-1:0]   data_base_i,
  input  logic [63:0]            word_i,
  input  logic                   word_valid_i,
  output logic                   word_ready_o,
  input  logic                   last_i,
  output logic [AddrWidth-1:0]   addr_o,
  output logic                   addr_valid_o,
  input  logic                   addr_ready_i
);

  logic [1:0]  soffs_q;
  logic [2:0]  soffs_sum;
  logic [63:0] word_shifted;
  logic [31:0] idx_raw;
  logic [IndexWidth-1:0] idx;
  logic        emit;

  assign soffs_sum    = {1'b0, soffs_q} + {1'b0, idx_size_i};
  assign word_shifted = word_i >> {soffs_q, 4'b0000};
  assign idx_raw      = (idx_size_i == 2'd2) ? word_shifted[31:0] : {16'b0, word_shifted[15:0]};
  assign idx          = IndexWidth'(idx_raw);

  assign addr_valid_o = word_valid_i;
  assign addr_o       = data_base_i + (AddrWidth'(idx) << ({1'b0, idx_shift_i} + (ShiftWidth+1)'(3)));
  assign emit         = addr_valid_o && addr_ready_i;
  assign word_ready_o = emit && (soffs_sum[2] || last_i);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)     soffs_q <= '0;
    else if (init_i) soffs_q <= init_soffs_i;
    else if (emit)   soffs_q <= soffs_sum[1:0];
  end

endmodule
