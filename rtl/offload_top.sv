// Offload subsystem of a heterogeneous MPSoC: host port, multicast
// interconnect to the accelerator clusters, and the credit-counter
// synchronization unit with its completion interrupt.
//
// An offload runs as follows. (1) The host writes the number M of clusters it
// will use into the credit counter's THRESHOLD register. (2) It stores the job
// handler and arguments into the clusters; with a non-zero multicast mask one
// store reaches all M clusters in the same cycle(s), so dispatch cost does not
// grow with M. (3) Each cluster, when done, stores to the INCREMENT register.
// (4) When M credits have arrived, irq_o rises and the host knows the job is
// complete. Steps (1)-(4) and the two hardware extensions (multicast and the
// credit counter) follow the published design; the host core, its load-store
// unit extension and the clusters themselves are outside this module and are
// reached through its ports.
//
// Structure:
//   host_* --> mcast_xbar --cl_*--> clusters (write-only ports, one per cluster)
//                  |
//                  +-- periph --> sync_arbiter port 0
//   clusters --cl_sync_*--> sync_arbiter ports 1..NUM_CLUSTERS --> credit_counter --> irq_o
//
// All ports use the valid/ready mem_req_t bundle of offload_pkg; host reads of
// the synchronization unit return one cycle after acceptance on host_rsp_*.
// There are no register stages on any path, so a request accepted in cycle t
// reaches the credit counter's registers at the clock edge ending cycle t.
module offload_top
  import offload_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS = 32
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // Host (CVA6) memory port, with the multicast mask from its load-store unit
  input  logic                     host_req_valid_i,
  output logic                     host_req_ready_o,
  input  mem_req_t                 host_req_i,
  input  logic [NUM_CLUSTERS-1:0]  host_mcast_mask_i,
  output logic                     host_rsp_valid_o,
  output data_t                    host_rsp_rdata_o,
  output logic                     host_err_o,
  // Job-dispatch ports into the clusters
  output logic [NUM_CLUSTERS-1:0]  cl_req_valid_o,
  input  logic [NUM_CLUSTERS-1:0]  cl_req_ready_i,
  output mem_req_t                 cl_req_o [NUM_CLUSTERS],
  // Cluster ports towards the synchronization unit
  input  logic [NUM_CLUSTERS-1:0]  cl_sync_valid_i,
  output logic [NUM_CLUSTERS-1:0]  cl_sync_ready_o,
  input  mem_req_t                 cl_sync_req_i [NUM_CLUSTERS],
  // Job-completion interrupt to the host
  output logic                     irq_o
);

  localparam int unsigned NumPorts = NUM_CLUSTERS + 1;

  logic     periph_valid, periph_ready;
  mem_req_t periph_req;

  logic [NumPorts-1:0] arb_valid, arb_ready, arb_rsp_valid;
  mem_req_t            arb_req [NumPorts];
  data_t               arb_rsp_rdata;

  logic     cc_valid, cc_ready, cc_rsp_valid;
  mem_req_t cc_req;
  data_t    cc_rsp_rdata;

  mcast_xbar #(.NUM_CLUSTERS(NUM_CLUSTERS)) i_mcast_xbar (
    .clk_i,
    .rst_ni,
    .host_valid_i   (host_req_valid_i),
    .host_ready_o   (host_req_ready_o),
    .host_req_i     (host_req_i),
    .host_mask_i    (host_mcast_mask_i),
    .host_err_o     (host_err_o),
    .cl_valid_o     (cl_req_valid_o),
    .cl_ready_i     (cl_req_ready_i),
    .cl_req_o       (cl_req_o),
    .periph_valid_o (periph_valid),
    .periph_ready_i (periph_ready),
    .periph_req_o   (periph_req)
  );

  // Port 0 is the host, port i+1 is cluster i.
  assign arb_valid[0] = periph_valid;
  assign arb_req[0]   = periph_req;
  assign periph_ready = arb_ready[0];
  for (genvar i = 0; i < NUM_CLUSTERS; i++) begin : gen_sync_ports
    assign arb_valid[i+1]     = cl_sync_valid_i[i];
    assign arb_req[i+1]       = cl_sync_req_i[i];
    assign cl_sync_ready_o[i] = arb_ready[i+1];
  end

  sync_arbiter #(.NUM_PORTS(NumPorts)) i_sync_arbiter (
    .clk_i,
    .rst_ni,
    .in_valid_i      (arb_valid),
    .in_ready_o      (arb_ready),
    .in_req_i        (arb_req),
    .in_rsp_valid_o  (arb_rsp_valid),
    .in_rsp_rdata_o  (arb_rsp_rdata),
    .out_valid_o     (cc_valid),
    .out_ready_i     (cc_ready),
    .out_req_o       (cc_req),
    .out_rsp_valid_i (cc_rsp_valid),
    .out_rsp_rdata_i (cc_rsp_rdata)
  );

  credit_counter #(.NUM_CLUSTERS(NUM_CLUSTERS)) i_credit_counter (
    .clk_i,
    .rst_ni,
    .req_valid_i (cc_valid),
    .req_ready_o (cc_ready),
    .req_i       (cc_req),
    .rsp_valid_o (cc_rsp_valid),
    .rsp_rdata_o (cc_rsp_rdata),
    .irq_o
  );

  assign host_rsp_valid_o = arb_rsp_valid[0];
  assign host_rsp_rdata_o = arb_rsp_rdata;

endmodule
