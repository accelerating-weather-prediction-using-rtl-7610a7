// nero_pkg: widths, kernel selection and HBM port types shared by the
// accelerator's modules.
//
// One host cache line is 1024 bits (32 float32 values); one HBM
// pseudo-channel port is 256 bits wide. Each processing element (PE) owns one
// HBM pseudo-channel and talks to it through a simplified AXI3 master port,
// bundled here as a request struct (driven by the accelerator) and a response
// struct (driven by the memory). The widths are the paper's; the struct
// grouping, burst length and address width are this design's choices.
package nero_pkg;

  localparam int unsigned LINE_W   = 1024;  // OCAPI cache line
  localparam int unsigned HBM_W    = 256;   // HBM pseudo-channel port
  localparam int unsigned LINE_LANES = LINE_W / 32;  // float32 per cache line
  localparam int unsigned HBM_ADDR_W = 28;  // 8 GiB / 32 pseudo-channels = 256 MiB
  localparam int unsigned HBM_BURST  = 16;  // beats per AXI3 burst

  typedef enum logic [0:0] {
    KERNEL_VADVC = 1'b0,  // vertical advection (Thomas solver)
    KERNEL_HDIFF = 1'b1   // horizontal diffusion (Laplacian + flux)
  } kernel_e;

  // Accelerator -> HBM (AXI3 write address, write data, write response ready,
  // read address, read data ready).
  typedef struct packed {
    logic                  awvalid;
    logic [HBM_ADDR_W-1:0] awaddr;
    logic [3:0]            awlen;
    logic                  wvalid;
    logic [HBM_W-1:0]      wdata;
    logic                  wlast;
    logic                  bready;
    logic                  arvalid;
    logic [HBM_ADDR_W-1:0] araddr;
    logic [3:0]            arlen;
    logic                  rready;
  } hbm_req_t;

  // HBM -> accelerator.
  typedef struct packed {
    logic             awready;
    logic             wready;
    logic             bvalid;
    logic             arready;
    logic             rvalid;
    logic [HBM_W-1:0] rdata;
    logic             rlast;
  } hbm_rsp_t;

  // Number of 1024-bit lines in one window entering and leaving a PE.
  // vadvc: DEPTH levels x NUM_FIELDS fields x GROUPS lines in, DEPTH x GROUPS out.
  // hdiff: PLANES planes x ROWS rows, in and out.
  function automatic int unsigned win_in_lines(kernel_e k, int unsigned depth, int unsigned fields,
                                               int unsigned groups, int unsigned planes,
                                               int unsigned rows);
    return (k == KERNEL_VADVC) ? depth * fields * groups : planes * rows;
  endfunction

  function automatic int unsigned win_out_lines(kernel_e k, int unsigned depth,
                                                int unsigned groups, int unsigned planes,
                                                int unsigned rows);
    return (k == KERNEL_VADVC) ? depth * groups : planes * rows;
  endfunction

endpackage
