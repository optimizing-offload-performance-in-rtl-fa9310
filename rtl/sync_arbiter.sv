// Round-robin arbiter in front of the synchronization unit.
//
// Several requesters (the host and every cluster) share the single register
// port of the credit counter. This arbiter grants one of them per cycle, so
// increments that arrive together are applied one after the other and none is
// lost: that is what makes the cluster's single store an atomic increment.
//
// How it works: the requester after the one granted last has the highest
// priority, the search wraps around, and the grant pointer moves only when a
// grant is actually accepted by the target. The grant is combinational from
// the request valids (valid/ready handshake, no added latency). The index of a
// granted read is remembered for one cycle so that the target's read response
// (rsp_valid_i, one cycle after acceptance) is returned to the requester that
// asked for it.
//
// The source only says that the clusters write a register of the unit; the
// round-robin policy and the one-per-cycle throughput are this design's choice.
module sync_arbiter
  import offload_pkg::*;
#(
  parameter int unsigned NUM_PORTS = 33,
  parameter int unsigned IdxWidth  = (NUM_PORTS > 1) ? $clog2(NUM_PORTS) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // Requesters
  input  logic [NUM_PORTS-1:0]  in_valid_i,
  output logic [NUM_PORTS-1:0]  in_ready_o,
  input  mem_req_t              in_req_i [NUM_PORTS],
  output logic [NUM_PORTS-1:0]  in_rsp_valid_o,
  output data_t                 in_rsp_rdata_o,
  // Target
  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output mem_req_t              out_req_o,
  input  logic                  out_rsp_valid_i,
  input  data_t                 out_rsp_rdata_i
);

  typedef logic [IdxWidth-1:0] idx_t;

  idx_t last_q;            // index granted last
  idx_t gnt_idx;
  logic gnt_any;
  idx_t rd_idx_q;

  // Search from last_q + 1 upwards, wrapping.
  always_comb begin
    gnt_idx = '0;
    gnt_any = 1'b0;
    for (int unsigned k = 1; k <= NUM_PORTS; k++) begin
      int unsigned cand;
      cand = (int'(last_q) + k) % NUM_PORTS;
      if (!gnt_any && in_valid_i[cand]) begin
        gnt_any = 1'b1;
        gnt_idx = idx_t'(cand);
      end
    end
  end

  assign out_valid_o = gnt_any;
  assign out_req_o   = in_req_i[gnt_idx];

  always_comb begin
    in_ready_o = '0;
    if (gnt_any) in_ready_o[gnt_idx] = out_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_q   <= idx_t'(NUM_PORTS - 1);
      rd_idx_q <= '0;
    end else if (gnt_any && out_ready_i) begin
      last_q <= gnt_idx;
      if (!in_req_i[gnt_idx].we) rd_idx_q <= gnt_idx;
    end
  end

  always_comb begin
    in_rsp_valid_o = '0;
    if (out_rsp_valid_i) in_rsp_valid_o[rd_idx_q] = 1'b1;
  end
  assign in_rsp_rdata_o = out_rsp_rdata_i;

  // At most one requester is granted per cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(in_ready_o));

endmodule
