// Behavioural model of one accelerator cluster, for simulation only.
//
// It stands in for a compute cluster as seen by the offload subsystem. It
// accepts job-dispatch writes on its request port (with random back-pressure
// when stall_i is set) into an 8-word mailbox indexed by the word offset.
// A write to word 0, the job handler pointer, is the doorbell: the model then
// "runs" for the number of cycles held in word 1 and, when done, writes the
// synchronization unit's INCREMENT register once through its sync port,
// holding the request until it is accepted. It counts what it received so
// the testbench can check it.
module cluster_model
  import offload_pkg::*;
#(
  parameter int unsigned IDX = 0
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     stall_i,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  mem_req_t req_i,
  output logic     sync_valid_o,
  input  logic     sync_ready_i,
  output mem_req_t sync_req_o
);

  data_t mailbox [8];
  int    writes;
  int    jobs;
  int    busy;
  logic  ready_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) ready_q <= 1'b1;
    else         ready_q <= !stall_i || ($urandom_range(0, 2) == 0);
  end
  assign req_ready_o = ready_q;

  assign sync_req_o.we    = 1'b1;
  assign sync_req_o.addr  = SyncBase + addr_t'(RegIncrement);
  assign sync_req_o.wdata = data_t'(IDX);
  assign sync_req_o.strb  = '1;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      writes       <= 0;
      jobs         <= 0;
      busy         <= -1;
      sync_valid_o <= 1'b0;
      for (int i = 0; i < 8; i++) mailbox[i] <= '0;
    end else begin
      if (req_valid_i && req_ready_o) begin
        mailbox[req_i.addr[5:3]] <= req_i.wdata;
        writes <= writes + 1;
        if (req_i.addr[5:3] == 3'd0) begin
          jobs <= jobs + 1;
          busy <= int'(mailbox[1]);
        end
      end
      if (busy > 0) busy <= busy - 1;
      if (busy == 0) begin
        busy         <= -1;
        sync_valid_o <= 1'b1;
      end
      if (sync_valid_o && sync_ready_i) sync_valid_o <= 1'b0;
    end
  end

  // The address must have been rebased to this cluster.
  assert property (@(posedge clk_i) disable iff (!rst_ni)
      req_valid_i |-> (req_i.addr >> ClusterOffsetBits) ==
                      ((ClusterBase >> ClusterOffsetBits) + addr_t'(IDX)));

endmodule
