// Shared types and constants of the offload subsystem.
//
// The subsystem sits between a host core and a fabric of accelerator clusters.
// It carries the host's job-dispatch stores to the clusters, with multicast, and
// it holds the synchronization unit (a credit counter) that the clusters
// increment when their share of a job is done.
//
// All requests in the subsystem use one simple valid/ready request bundle,
// mem_req_t, which is accepted in the cycle where valid and ready are both high.
// Reads are answered one cycle after acceptance.
//
// The widths and the address map are this design's choice; the source
// architecture gives none of them. The 64-bit data width matches the 64-bit
// host core; the 48-bit address width and the map below are assumed.
package offload_pkg;

  parameter int unsigned AddrWidth = 48;
  parameter int unsigned DataWidth = 64;
  parameter int unsigned StrbWidth = DataWidth / 8;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;

  // One memory request: write enable, address, write data and byte strobes.
  typedef struct packed {
    logic  we;
    addr_t addr;
    data_t wdata;
    strb_t strb;
  } mem_req_t;

  // Address map.
  // Cluster i occupies ClusterBase + i * ClusterSize .. + ClusterSize - 1.
  parameter addr_t       ClusterBase       = 48'h0000_1000_0000;
  parameter int unsigned ClusterOffsetBits = 18;  // 256 KiB per cluster
  parameter int unsigned MaxClusterIdxBits = 8;   // room for up to 256 clusters
  // The synchronization unit occupies SyncBase .. SyncBase + 2**SyncOffsetBits - 1.
  parameter addr_t       SyncBase          = 48'h0000_0200_0000;
  parameter int unsigned SyncOffsetBits    = 12;

  // Register offsets inside the synchronization unit (64-bit registers).
  typedef enum logic [4:0] {
    RegThreshold = 5'h00,  // RW: number of clusters to wait for; writing clears count and interrupt
    RegIncrement = 5'h08,  // W : any write adds one credit
    RegCount     = 5'h10,  // R : current credit count
    RegStatus    = 5'h18   // R : bit 0 = interrupt pending
  } sync_reg_e;

endpackage
