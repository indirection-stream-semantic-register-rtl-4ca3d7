// tb_tcdm_model: behavioural model of the tightly coupled data memory with
// NumPorts independent ports onto one array, for testbenches only.
//
// 2**WordsLog2 64-bit words, addressed by byte address (bits [2:0] ignored,
// upper bits beyond the array wrap). A read accepted in cycle t returns its
// data with rsp_valid_o in cycle t+1; writes honour the byte strobes and
// return nothing. With stall_i high each port refuses requests at random
// (about one cycle in three), which models bank conflicts. nreq_o counts
// accepted requests of all ports. Ports are served in index order within a
// cycle, so a write and a read of one word in the same cycle see the write
// only if the writing port has the lower index. The array is public so testbenches can preload and
// inspect it directly.
module tb_tcdm_model
  import issr_pkg::*;
#(
  parameter int unsigned WordsLog2 = 15,
  parameter int unsigned NumPorts  = 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      stall_i,
  input  mem_req_t [NumPorts-1:0]   req_i,
  input  logic     [NumPorts-1:0]   qvalid_i,
  output logic     [NumPorts-1:0]   qready_o,
  output data_t    [NumPorts-1:0]   rsp_data_o,
  output logic     [NumPorts-1:0]   rsp_valid_o,
  output int                        nreq_o
);

  data_t words [2**WordsLog2];
  logic [NumPorts-1:0] ready_q;

  assign qready_o = ready_q;

  always @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ready_q     <= '1;
      rsp_valid_o <= '0;
      rsp_data_o  <= '0;
      nreq_o      <= 0;
    end else begin
      int n;
      n = nreq_o;
      for (int p = 0; p < NumPorts; p++) begin
        ready_q[p]     <= stall_i ? (($urandom % 3) != 0) : 1'b1;
        rsp_valid_o[p] <= 1'b0;
        if (qvalid_i[p] && qready_o[p]) begin
          n++;
          if (req_i[p].write) begin
            for (int b = 0; b < 8; b++)
              if (req_i[p].strb[b]) words[req_i[p].addr[WordsLog2+2:3]][8*b +: 8] = req_i[p].data[8*b +: 8];
          end else begin
            rsp_valid_o[p] <= 1'b1;
            rsp_data_o[p]  <= words[req_i[p].addr[WordsLog2+2:3]];
          end
        end
      end
      nreq_o <= n;
    end
  end

endmodule
