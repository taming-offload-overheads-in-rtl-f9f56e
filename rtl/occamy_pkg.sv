// occamy_pkg: types and constants shared by the Occamy offload fabric.
//
// The fabric carries two kinds of single-beat memory-mapped transactions: narrow
// (64-bit data, core loads/stores, configuration, synchronisation) and wide
// (512-bit data, DMA). A request carries an address and an address mask: a mask
// bit set to 1 makes the matching address bit a don't-care, so one write can name
// 2^n destinations (the multicast encoding of the paper). Responses carry read
// data and an error flag. Handshakes: requests use valid/ready, responses are
// valid-only and must be accepted in the cycle they are presented.
//
// Sizes that follow the paper: 8 quadrants of 4 clusters, 9 cores per cluster,
// 128 KB TCDM in 32 banks, 512 KB narrow SPM, 1 MB wide SPM, 64b/512b networks,
// 0x40000 bytes between clusters, cluster index in address bits [19:18] and
// quadrant index in bits [22:20], 32-bit addresses as drawn in the paper.
// The base addresses of the regions are this design's own choice.
package occamy_pkg;

  localparam int unsigned ADDR_W   = 32;
  localparam int unsigned NARROW_W = 64;
  localparam int unsigned WIDE_W   = 512;

  localparam int unsigned NR_QUADRANTS      = 8;
  localparam int unsigned NR_CLUSTERS_PER_Q = 4;
  localparam int unsigned NR_CORES          = 9;   // 8 compute + 1 data mover
  localparam int unsigned DM_CORE           = 8;   // index of the data-mover core

  typedef logic [ADDR_W-1:0] addr_t;

  typedef struct packed {
    logic                  write;
    addr_t                 addr;
    addr_t                 mask;   // 1 = address bit is don't-care (multicast)
    logic [NARROW_W-1:0]   wdata;
    logic [NARROW_W/8-1:0] strb;
  } nreq_t;

  typedef struct packed {
    logic [NARROW_W-1:0] rdata;
    logic                err;
  } nrsp_t;

  typedef struct packed {
    logic                write;
    addr_t               addr;
    addr_t               mask;
    logic [WIDE_W-1:0]   wdata;
    logic [WIDE_W/8-1:0] strb;
  } wreq_t;

  typedef struct packed {
    logic [WIDE_W-1:0] rdata;
    logic              err;
  } wrsp_t;

  // One address-map rule: an aligned power-of-two region in the same
  // (address, mask) form as a multicast request.
  typedef struct packed {
    logic  en;
    addr_t addr;
    addr_t mask;
  } rule_t;

  // Address map.
  localparam addr_t CLUSTER_BASE   = 32'h1000_0000;
  localparam addr_t CLUSTER_SIZE   = 32'h0004_0000;  // 0x40000 per cluster
  localparam addr_t QUADRANT_SIZE  = 32'h0010_0000;  // 4 clusters
  localparam addr_t TCDM_SIZE      = 32'h0002_0000;  // 128 KB
  localparam addr_t CL_PERIPH_OFFS = 32'h0003_0000;  // cluster peripherals (MCIP)
  localparam addr_t CL_PERIPH_SIZE = 32'h0000_1000;
  localparam addr_t CLINT_BASE     = 32'h0400_0000;
  localparam addr_t CLINT_SIZE     = 32'h0010_0000;
  localparam addr_t PERIPH_BASE    = 32'h0200_0000;
  localparam addr_t PERIPH_SIZE    = 32'h0100_0000;
  localparam addr_t NSPM_BASE      = 32'h7000_0000;
  localparam addr_t NSPM_SIZE      = 32'h0008_0000;  // 512 KB
  localparam addr_t WSPM_BASE      = 32'h8000_0000;
  localparam addr_t WSPM_SIZE      = 32'h0010_0000;  // 1 MB

  // Cluster peripheral register offsets (within CL_PERIPH region).
  localparam addr_t MCIP_SET_OFFS  = 32'h0;   // write: set the written bits
  localparam addr_t MCIP_CLR_OFFS  = 32'h8;   // write: clear the written bits

  // CLINT register offsets.
  localparam addr_t CLINT_MSIP_OFFS     = 32'h0000;  // 4 bytes per hart
  localparam addr_t CLINT_OFFLOAD_OFFS  = 32'h8000;  // 8 bytes per job
  localparam addr_t CLINT_ARRIVALS_OFFS = 32'h9000;  // 8 bytes per job
  localparam addr_t CLINT_CAUSE_OFFS    = 32'hA000;  // completed job ID

  // DMA register offsets (within CL_PERIPH region, after the MCIP registers).
  localparam addr_t DMA_SRC_OFFS    = 32'h100;
  localparam addr_t DMA_DST_OFFS    = 32'h108;
  localparam addr_t DMA_LEN_OFFS    = 32'h110;
  localparam addr_t DMA_START_OFFS  = 32'h118;  // write: launch; read: busy
  localparam addr_t DMA_STATUS_OFFS = 32'h120;  // read: completed transfers

  function automatic rule_t region(addr_t base, addr_t size);
    region = '{en: 1'b1, addr: base, mask: size - 1};
  endfunction

  function automatic addr_t cluster_base(int unsigned q, int unsigned c);
    cluster_base = CLUSTER_BASE + addr_t'(q) * QUADRANT_SIZE + addr_t'(c) * CLUSTER_SIZE;
  endfunction

endpackage
