// llamaf_pkg: constants and types shared by the GQMV accelerator.
//
// The accelerator computes out = W x for a weight matrix W quantized to
// INT8 in groups of GS consecutive columns, each group carrying one FP32
// scale, and an activation vector x quantized the same way. GS = 256 and the
// 128-bit (16-byte) memory beat follow the paper; the address width and the
// FP32 bit pattern used for NaN are choices of this design.
package llamaf_pkg;

  localparam int unsigned GS         = 256;   // quantization group size
  localparam int unsigned BEAT_BYTES = 16;    // bytes per memory beat (128-bit port)
  localparam int unsigned BEAT_W     = 8 * BEAT_BYTES;
  localparam int unsigned ADDR_W     = 32;    // byte address width
  localparam int unsigned LEN_W      = 8;     // burst length field (beats - 1)

  typedef logic [31:0] fp32_t;                // IEEE-754 single precision bits
  typedef logic signed [15:0] int16_t;
  typedef logic signed [31:0] int32_t;

  localparam fp32_t FP32_QNAN = 32'h7FC0_0000;

  // INT8 -> INT16 cast (sign extension)
  function automatic int16_t int8_to_16(logic [7:0] v);
    return {{8{v[7]}}, v};
  endfunction

  // INT16 lane product; operands that came from INT8 never overflow it
  function automatic int16_t mul16(int16_t a, int16_t b);
    return int16_t'(a * b);
  endfunction

  // INT16 -> INT32 cast (sign extension)
  function automatic int32_t int16_to_32(int16_t v);
    return {{16{v[15]}}, v};
  endfunction

  // kernel arguments, as the host hands them over at start
  typedef struct packed {
    logic [ADDR_W-1:0] xq_addr;    // INT8 vector xq, n bytes
    logic [ADDR_W-1:0] xs_addr;    // FP32 scales of x, n/GS words
    logic [ADDR_W-1:0] wq_addr;    // INT8 matrix, m*n bytes, row-major
    logic [ADDR_W-1:0] ws_addr;    // FP32 scales of W, m*n/GS words
    logic [ADDR_W-1:0] out_addr;   // FP32 result, m words
    logic [31:0]       m;          // number of rows
  } gqmv_args_t;

  // read-port signals as they leave the chip top (see mem_rd_if)
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] addr;
    logic [LEN_W-1:0]  len;      // beats - 1
  } rd_req_t;

  typedef struct packed {
    logic              valid;
    logic [BEAT_W-1:0] data;
    logic              last;
  } rd_resp_t;

  // read ports of one kernel
  localparam int unsigned PORT_X  = 0;
  localparam int unsigned PORT_WQ = 1;
  localparam int unsigned PORT_WS = 2;
  localparam int unsigned NPORTS  = 3;

endpackage
