// das_pkg: types and constants shared by the DAS-enabled many-core cluster.
//
// The cluster moves every L1 access as a request/response pair with a
// valid/ready handshake on each channel. A request carries two return-route
// fields that the interconnect fills in on the way to the bank: r_pe is the
// crossbar input the request used in its source tile, r_lvl the input it used
// in a SubGroup, Group or Cluster crossbar. The bank adds r_in, its own tile
// crossbar input. The response retraces the path by reading these fields.
//
// das_region_t is one DAS region as held in the CSRs: start address, size in
// bytes, partition granularity p (2^p banks per partition) and s (2^s rows
// remapped). The register bus and DMA job formats are this design's own.
package das_pkg;

  localparam int unsigned AddrWidth      = 32;
  localparam int unsigned DataWidth      = 32;
  localparam int unsigned TagWidth       = 8;
  localparam int unsigned PeRouteWidth   = 5;  // tile crossbar inputs  <= 32
  localparam int unsigned LvlRouteWidth  = 8;  // level crossbar inputs <= 256
  localparam int unsigned BankRouteWidth = 5;  // tile crossbar inputs  <= 32
  localparam int unsigned DasFieldWidth  = 4;  // p and s fields of the DAS CSR
  localparam int unsigned RegAddrWidth   = 12;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [TagWidth-1:0]  tag_t;

  // L1 request, from a PE, from a remote tile or from a DMA backend.
  typedef struct packed {
    addr_t                    addr;
    data_t                    wdata;
    logic                     we;
    logic [3:0]               be;
    tag_t                     tag;
    logic [PeRouteWidth-1:0]  r_pe;
    logic [LvlRouteWidth-1:0] r_lvl;
  } mem_req_t;

  // L1 response. Writes are acknowledged with a response as well.
  typedef struct packed {
    data_t                     rdata;
    tag_t                      tag;
    logic [PeRouteWidth-1:0]   r_pe;
    logic [LvlRouteWidth-1:0]  r_lvl;
    logic [BankRouteWidth-1:0] r_in;
  } mem_rsp_t;

  // One DAS region. size == 0 disables the region.
  typedef struct packed {
    addr_t                    start;
    addr_t                    size;
    logic [DasFieldWidth-1:0] s;
    logic [DasFieldWidth-1:0] p;
  } das_region_t;

  // Single-cycle register bus used for the DAS CSRs and the DMA frontend.
  typedef struct packed {
    logic                    valid;
    logic                    we;
    logic [RegAddrWidth-1:0] addr;
    data_t                   wdata;
  } reg_req_t;

  // A DMA job or piece of one: L2 address, L1 address, length in bytes and
  // direction (to_l2 = 1 moves L1 -> L2).
  typedef struct packed {
    addr_t l2_addr;
    addr_t l1_addr;
    addr_t len;
    logic  to_l2;
  } dma_job_t;

endpackage
