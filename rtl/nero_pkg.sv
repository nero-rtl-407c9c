// nero_pkg: widths, kernel selection and AXI3 channel types shared by the
// NERO accelerator functional unit and its processing elements.
//
// Widths follow the paper: 256-bit HBM pseudo-channel ports (AXI3), a 512-bit
// CAPI2 data path, 1024-bit POWER9 cache lines and 32-bit floats, so one
// 512-bit beat carries 16 floats. The AXI3 structs carry only the fields this
// design drives (no IDs, no cache/prot/QoS); that reduction is this design's
// own choice.
package nero_pkg;

  localparam int unsigned HBM_W   = 256;   // HBM pseudo-channel port width
  localparam int unsigned CAPI_W  = 512;   // CAPI2 / PE stream width
  localparam int unsigned CL_W    = 1024;  // POWER9 cache line
  localparam int unsigned WORD_W  = 32;    // float32
  localparam int unsigned LANES   = CAPI_W / WORD_W;  // 16 floats per beat
  localparam int unsigned HBM_AW  = 33;    // 8 GiB of HBM2
  localparam int unsigned AXI_LEN = 4;     // AXI3 burst length field

  typedef enum logic [0:0] {
    K_VADVC = 1'b0,
    K_HDIFF = 1'b1
  } kernel_e;

  // Phase of a PE job: copy host data into HBM, compute HBM to HBM, copy the
  // results back to the host, or compute straight from and to the host stream
  // with the HBM bypassed.
  typedef enum logic [1:0] {
    PH_LOAD    = 2'd0,
    PH_COMPUTE = 2'd1,
    PH_UNLOAD  = 2'd2,
    PH_BYPASS  = 2'd3
  } phase_e;

  // Number of fields the field splitter separates per kernel: the four
  // tridiagonal coefficient fields of vadvc, the single source field of hdiff.
  function automatic int unsigned num_fields(input kernel_e k);
    return (k == K_VADVC) ? 4 : 1;
  endfunction

  typedef struct packed {
    logic [HBM_AW-1:0]  addr;
    logic [AXI_LEN-1:0] len;    // beats - 1
  } axi_addr_t;

  typedef struct packed {
    logic [HBM_W-1:0] data;
    logic             last;
  } axi_r_t;

  typedef struct packed {
    logic [HBM_W-1:0]   data;
    logic [HBM_W/8-1:0] strb;
    logic               last;
  } axi_w_t;

endpackage
