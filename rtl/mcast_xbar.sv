// Host-to-cluster interconnect with multicast.
//
// The host dispatches a job by storing the job handler and its arguments into
// every cluster that takes part. Without multicast it has to repeat each store
// once per cluster, so the dispatch time grows with the number of clusters.
// Here a store carries a destination mask with one bit per cluster, and the
// interconnect delivers it to all clusters of the mask at once: the dispatch
// time no longer depends on the number of clusters. That function is the
// published one; how it is built is this design's own, simplest, choice.
//
// Decoding of a host request:
//  - address in the cluster region and mask != 0: multicast to every cluster
//    whose mask bit is set, at the same offset inside each cluster;
//  - address in the cluster region and mask == 0: unicast to the cluster the
//    address selects;
//  - address in the synchronization unit's region: forwarded to periph_*;
//  - anything else, a cluster index beyond NUM_CLUSTERS, or a read to the
//    cluster region (the cluster ports are write-only): accepted, dropped,
//    and host_err_o pulses in that cycle.
//
// Timing: combinational valid/ready (no register stage). A multicast is a
// fork: each destination is offered the request until it accepts; clusters
// that have accepted are remembered in sent_q and not offered it again;
// host_ready_o rises in the cycle the last destination accepts. With all
// destinations ready a multicast or unicast takes one cycle.
module mcast_xbar
  import offload_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // Host port
  input  logic                     host_valid_i,
  output logic                     host_ready_o,
  input  mem_req_t                 host_req_i,
  input  logic [NUM_CLUSTERS-1:0]  host_mask_i,
  output logic                     host_err_o,
  // Cluster ports
  output logic [NUM_CLUSTERS-1:0]  cl_valid_o,
  input  logic [NUM_CLUSTERS-1:0]  cl_ready_i,
  output mem_req_t                 cl_req_o [NUM_CLUSTERS],
  // Synchronization unit port
  output logic                     periph_valid_o,
  input  logic                     periph_ready_i,
  output mem_req_t                 periph_req_o
);

  typedef logic [NUM_CLUSTERS-1:0] mask_t;

  localparam int unsigned ClusterRegionBits = ClusterOffsetBits + MaxClusterIdxBits;

  logic  in_cluster_region, in_sync_region, idx_ok;
  logic [MaxClusterIdxBits-1:0] cl_idx;
  logic [ClusterOffsetBits-1:0] cl_offset;
  mask_t dest, sent_q, pending, accepted;
  logic  to_clusters, is_err;

  assign in_cluster_region =
      (host_req_i.addr >> ClusterRegionBits) == (ClusterBase >> ClusterRegionBits);
  assign in_sync_region =
      (host_req_i.addr >> SyncOffsetBits) == (SyncBase >> SyncOffsetBits);
  assign cl_idx    = host_req_i.addr[ClusterOffsetBits +: MaxClusterIdxBits];
  assign cl_offset = host_req_i.addr[ClusterOffsetBits-1:0];
  assign idx_ok    = 32'(cl_idx) < NUM_CLUSTERS;

  always_comb begin
    dest = '0;
    if (host_mask_i != '0) dest = host_mask_i;
    else
      for (int unsigned i = 0; i < NUM_CLUSTERS; i++)
        dest[i] = (32'(cl_idx) == i);
  end

  assign to_clusters = in_cluster_region && host_req_i.we && (host_mask_i != '0 || idx_ok);
  assign is_err      = !in_sync_region && !to_clusters;

  // Fork towards the clusters.
  assign pending  = to_clusters ? (dest & ~sent_q) : '0;
  assign accepted = pending & cl_ready_i;

  for (genvar i = 0; i < NUM_CLUSTERS; i++) begin : gen_cl
    assign cl_valid_o[i]    = host_valid_i && pending[i];
    assign cl_req_o[i].we    = host_req_i.we;
    assign cl_req_o[i].addr  = ClusterBase
                             + (addr_t'(i) << ClusterOffsetBits)
                             + addr_t'(cl_offset);
    assign cl_req_o[i].wdata = host_req_i.wdata;
    assign cl_req_o[i].strb  = host_req_i.strb;
  end

  assign periph_valid_o = host_valid_i && in_sync_region;
  assign periph_req_o   = host_req_i;

  always_comb begin
    if (in_sync_region)   host_ready_o = periph_ready_i;
    else if (to_clusters) host_ready_o = (pending & ~cl_ready_i) == '0;
    else                  host_ready_o = 1'b1;
  end

  assign host_err_o = host_valid_i && is_err;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      sent_q <= '0;
    end else if (host_valid_i && to_clusters) begin
      if (host_ready_o) sent_q <= '0;
      else              sent_q <= sent_q | accepted;
    end
  end

  // The host must hold a request stable until it is accepted.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      host_valid_i && !host_ready_o |=> host_valid_i && $stable(host_req_i) && $stable(host_mask_i));

endmodule
