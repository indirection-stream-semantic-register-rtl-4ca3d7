// issr_pkg: constants and types shared by the stream register (SSR),
// indirection stream register (ISSR) and streamer modules.
//
// The data path is 64 bit wide, matching the double-precision FPU the
// streamer feeds. Memory requests carry a 32-bit byte address (the core's
// address space); the stream registers compute addresses with a narrower,
// parameterizable width (AddrWidth, 18 bit by default) and zero-extend them.
// The configuration register map below is this design's own choice; the
// paper only says that the registers are memory-mapped and shadowed.
package issr_pkg;

  localparam int unsigned DataWidth = 64;
  localparam int unsigned StrbWidth = DataWidth / 8;
  localparam int unsigned MemAddrWidth = 32;
  localparam int unsigned CfgDataWidth = 32;
  localparam int unsigned CfgRegWidth = 5;   // word index of a register inside one lane
  localparam int unsigned NumLoops = 4;      // nested affine loops per stream register

  typedef logic [DataWidth-1:0] data_t;

  // Memory request of one stream register port (TCDM style: valid/ready on
  // the request, in-order responses with a valid and no back-pressure).
  typedef struct packed {
    logic [MemAddrWidth-1:0] addr;
    logic                    write;
    data_t                   data;
    logic [StrbWidth-1:0]    strb;
  } mem_req_t;

  // Configuration register word indices inside one lane.
  localparam logic [CfgRegWidth-1:0] RegStatus   = 5'd0;
  localparam logic [CfgRegWidth-1:0] RegRepeat   = 5'd1;
  localparam logic [CfgRegWidth-1:0] RegBound0   = 5'd2;   // 2..5: bound of loop 0..3
  localparam logic [CfgRegWidth-1:0] RegStride0  = 5'd6;   // 6..9: stride of loop 0..3
  localparam logic [CfgRegWidth-1:0] RegIdxCfg   = 5'd10;  // idx_size, idx_shift, indir_mode
  localparam logic [CfgRegWidth-1:0] RegDataBase = 5'd11;  // base address for indirection
  localparam logic [CfgRegWidth-1:0] RegRptr0    = 5'd24;  // 24..27: start read job, dims 1..4
  localparam logic [CfgRegWidth-1:0] RegWptr0    = 5'd28;  // 28..31: start write job, dims 1..4

  // Fields of RegIdxCfg.
  localparam int unsigned IdxSizeLsb  = 0;   // [1:0] index size in 16-bit units: 1 or 2
  localparam int unsigned IdxShiftLsb = 8;   // [12:8] extra left shift of each index
  localparam int unsigned IndirBit    = 16;  // [16] indirection mode enable

  // Fields of RegStatus (read only).
  localparam int unsigned StatDoneBit   = 0; // no job running, none pending, lane drained
  localparam int unsigned StatShadowBit = 1; // a job waits in the shadow registers

  // Index sizes as written to the idx_size field.
  localparam logic [1:0] IdxSize16 = 2'd1;
  localparam logic [1:0] IdxSize32 = 2'd2;

endpackage
