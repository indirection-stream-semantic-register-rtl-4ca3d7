// ssr_switch: maps the stream registers onto architectural FP registers.
//
// While redirection is enabled (redir_i, set by the core through a CSR),
// register number i (ft0, ft1, ...) of the FPU's three read operand ports
// and its write port is served by stream lane i instead of the register
// file; the *_is_ssr_o flags tell the FPU subsystem which operands and
// results to take from or give to the streamer. A read port mapped to a
// lane sees the lane's FIFO head and its valid (fpu_rready_o). When the FPU
// retires an instruction it raises fpu_rdone_i on each port it read; the
// lane advances once per instruction, even if two operands name the same
// stream register. A write to a mapped register is passed to the lane with
// valid/ready. The lane-to-register numbering (lane i is fi) and the
// handshake names are this design's own choices; the paper gives the
// switch's function. The switch is purely combinational.
module ssr_switch
  import issr_pkg::*;
#(
  parameter int unsigned NumLanes = 2,
  parameter int unsigned NumPorts = 3
) (
  input  logic                          redir_i,
  // FPU read operand ports
  input  logic [NumPorts-1:0][4:0]      fpu_raddr_i,
  input  logic [NumPorts-1:0]           fpu_rvalid_i,
  output logic [NumPorts-1:0]           fpu_rready_o,
  output data_t [NumPorts-1:0]          fpu_rdata_o,
  input  logic [NumPorts-1:0]           fpu_rdone_i,
  output logic [NumPorts-1:0]           fpu_ris_ssr_o,
  // FPU write port
  input  logic [4:0]                    fpu_waddr_i,
  input  data_t                         fpu_wdata_i,
  input  logic                          fpu_wvalid_i,
  output logic                          fpu_wready_o,
  output logic                          fpu_wis_ssr_o,
  // lanes
  input  data_t [NumLanes-1:0]          lane_rdata_i,
  input  logic [NumLanes-1:0]           lane_rvalid_i,
  output logic [NumLanes-1:0]           lane_rready_o,
  output data_t [NumLanes-1:0]          lane_wdata_o,
  output logic [NumLanes-1:0]           lane_wvalid_o,
  input  logic [NumLanes-1:0]           lane_wready_i
);

  always_comb begin
    lane_rready_o = '0;
    for (int unsigned p = 0; p < NumPorts; p++) begin
      fpu_ris_ssr_o[p] = redir_i && (fpu_raddr_i[p] < 5'(NumLanes));
      fpu_rready_o[p]  = 1'b0;
      fpu_rdata_o[p]   = '0;
      for (int unsigned l = 0; l < NumLanes; l++) begin
        if (fpu_ris_ssr_o[p] && (fpu_raddr_i[p] == 5'(l))) begin
          fpu_rready_o[p] = lane_rvalid_i[l];
          fpu_rdata_o[p]  = lane_rdata_i[l];
          if (fpu_rdone_i[p]) lane_rready_o[l] = 1'b1;
        end
      end
    end
    fpu_wis_ssr_o = redir_i && (fpu_waddr_i < 5'(NumLanes));
    fpu_wready_o  = 1'b0;
    for (int unsigned l = 0; l < NumLanes; l++) begin
      lane_wdata_o[l]  = fpu_wdata_i;
      lane_wvalid_o[l] = fpu_wis_ssr_o && fpu_wvalid_i && (fpu_waddr_i == 5'(l));
      if (fpu_wis_ssr_o && (fpu_waddr_i == 5'(l))) fpu_wready_o = lane_wready_i[l];
    end
  end

endmodule
