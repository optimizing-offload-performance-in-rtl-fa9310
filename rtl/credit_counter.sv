// Credit counter: accelerator-to-host synchronization unit.
//
// At the start of an offload the host writes the number of clusters it is
// offloading to into the THRESHOLD register. Each cluster that finishes its
// part of the job writes the INCREMENT register; the write itself adds one
// credit, so no read-modify-write by the cluster is needed. When the count
// reaches the threshold, the unit raises irq_o towards the host. This much
// is the published design.
//
// Choices made here (the source is silent on them):
//  - irq_o is a level that rises one cycle after the write that completes the
//    count and stays high until the host writes THRESHOLD again.
//  - Writing THRESHOLD also clears the count. A threshold of zero disables the
//    interrupt. Only the low CntWidth bits of the written value are kept.
//  - The count saturates at its maximum instead of wrapping.
//  - COUNT and STATUS are readable; read data is returned one cycle after the
//    read is accepted (rsp_valid_o). Writes get no response.
//  - The unit takes one request per cycle and is always ready; atomicity of
//    increments from many clusters comes from the arbiter in front of it,
//    which serialises them.
//
// Interface: one mem_req_t request port (req_valid_i/req_ready_o/req_i) whose
// address is decoded on its low bits only, a read response (rsp_valid_o,
// rsp_rdata_o) and the interrupt irq_o.
module credit_counter
  import offload_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS = 32,
  parameter int unsigned CntWidth     = $clog2(NUM_CLUSTERS + 1)
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     req_valid_i,
  output logic     req_ready_o,
  input  mem_req_t req_i,
  output logic     rsp_valid_o,
  output data_t    rsp_rdata_o,
  output logic     irq_o
);

  typedef logic [CntWidth-1:0] cnt_t;

  cnt_t  threshold_q, count_q, count_d, threshold_d;
  logic  irq_q, irq_d;
  logic  rsp_valid_d;
  data_t rdata_d, rdata_q;
  logic  rsp_valid_q;
  logic [4:0] offset;

  assign req_ready_o = 1'b1;
  assign offset      = req_i.addr[4:0];

  always_comb begin
    threshold_d = threshold_q;
    count_d     = count_q;
    irq_d       = irq_q;
    rsp_valid_d = 1'b0;
    rdata_d     = '0;
    if (req_valid_i && req_i.we) begin
      unique case (offset)
        RegThreshold: begin
          threshold_d = req_i.wdata[CntWidth-1:0];
          count_d     = '0;
          irq_d       = 1'b0;
        end
        RegIncrement: begin
          if (count_q != '1) count_d = count_q + cnt_t'(1);
        end
        default: ;
      endcase
    end else if (req_valid_i) begin
      rsp_valid_d = 1'b1;
      unique case (offset)
        RegThreshold: rdata_d = data_t'(threshold_q);
        RegCount:     rdata_d = data_t'(count_q);
        RegStatus:    rdata_d = data_t'(irq_q);
        default:      rdata_d = '0;
      endcase
    end
    // Fire as soon as the (new) count reaches a non-zero threshold.
    if (threshold_d != '0 && count_d >= threshold_d) irq_d = 1'b1;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      threshold_q <= '0;
      count_q     <= '0;
      irq_q       <= 1'b0;
      rsp_valid_q <= 1'b0;
      rdata_q     <= '0;
    end else begin
      threshold_q <= threshold_d;
      count_q     <= count_d;
      irq_q       <= irq_d;
      rsp_valid_q <= rsp_valid_d;
      rdata_q     <= rdata_d;
    end
  end

  assign irq_o       = irq_q;
  assign rsp_valid_o = rsp_valid_q;
  assign rsp_rdata_o = rdata_q;

endmodule
