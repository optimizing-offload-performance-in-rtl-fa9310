// Self-checking testbench of the credit counter.
//
// Drives the register port directly. For several thresholds M it writes
// THRESHOLD = M, then issues M increments with random gaps, and checks after
// every cycle that irq_o is low until exactly one cycle after the M-th
// increment is accepted and high from then on. It also checks the COUNT and
// STATUS read-back (one-cycle read latency), that rewriting THRESHOLD clears
// the count and the interrupt, that threshold zero never fires, and that the
// count saturates. Expected values come from a simple counter kept here.
module tb_credit_counter;
  import offload_pkg::*;

  localparam int unsigned NC = 32;

  logic     clk = 0, rst_n = 0;
  logic     req_valid;
  logic     req_ready;
  mem_req_t req;
  logic     rsp_valid;
  data_t    rsp_rdata;
  logic     irq;

  int checks = 0, failures = 0;

  credit_counter #(.NUM_CLUSTERS(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_i(req),
    .rsp_valid_o(rsp_valid), .rsp_rdata_o(rsp_rdata), .irq_o(irq)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // Requests are driven with blocking assignments one time unit after a
  // rising edge and sampled at the next rising edge.
  task automatic write(input logic [4:0] off, input data_t d);
    req_valid  = 1'b1;
    req.we     = 1'b1;
    req.addr   = SyncBase + addr_t'(off);
    req.wdata  = d;
    req.strb   = '1;
    @(posedge clk);
    check(req_ready, "always ready");
    #1 req_valid = 1'b0;
  endtask

  task automatic read(input logic [4:0] off, output data_t d);
    req_valid  = 1'b1;
    req.we     = 1'b0;
    req.addr   = SyncBase + addr_t'(off);
    @(posedge clk);
    #1 req_valid = 1'b0;
    check(rsp_valid, "read response one cycle after request");
    d = rsp_rdata;
    @(posedge clk);
    #1;
    check(!rsp_valid, "single read response");
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t d;
    req_valid = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    check(!irq, "no irq after reset");

    // Threshold zero: increments never fire.
    write(RegThreshold, 0);
    repeat (5) write(RegIncrement, 64'hdead);
    #1 check(!irq, "threshold 0 never fires");

    for (int m = 1; m <= int'(NC); m = (m < 4) ? m + 1 : m * 2) begin
      write(RegThreshold, data_t'(m));
      #1 check(!irq, "threshold write clears irq");
      read(RegCount, d);
      check(d == 0, "threshold write clears count");
      read(RegThreshold, d);
      check(d == data_t'(m), "threshold read-back");
      for (int k = 1; k <= m; k++) begin
        int gap;
        gap = $urandom_range(0, 3);
        repeat (gap) begin
          @(posedge clk);
          #1 check(!irq, "irq stays low during gaps");
        end
        write(RegIncrement, data_t'($urandom));
        // Sampled right after the edge that registered increment k.
        #1;
        if (k < m) check(!irq, $sformatf("irq low after %0d of %0d credits", k, m));
        else       check(irq,  $sformatf("irq one cycle after credit %0d of %0d", k, m));
      end
      read(RegCount, d);
      check(d == data_t'(m), "count equals threshold");
      read(RegStatus, d);
      check(d == 1, "status shows pending interrupt");
      repeat (3) @(posedge clk);
      #1 check(irq, "irq is a held level");
    end

    // Saturation: threshold NC, send more credits than the counter can hold.
    write(RegThreshold, data_t'(NC));
    repeat (70) write(RegIncrement, 0);
    read(RegCount, d);
    check(d == data_t'((1 << $clog2(NC + 1)) - 1), $sformatf("count saturates (%0d)", d));
    #1 check(irq, "irq after overflow attempt");
    write(RegThreshold, data_t'(2));
    #1 check(!irq, "rewrite clears irq");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
