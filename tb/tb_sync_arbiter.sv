// Self-checking testbench of the round-robin arbiter.
//
// NUM_PORTS requesters each hold a queue of write requests (data tagged with
// the port number and a sequence number) and present them with random gaps;
// the target accepts with random back-pressure. A reference model kept here
// predicts, every cycle, which port round-robin order must grant (the first
// valid port after the last granted one). The testbench checks that exactly
// that port is granted, that the forwarded request is that port's, that
// every request is delivered once and in order, and that a read issued by
// one port gets its response (one cycle after acceptance) on that port only.
// A phase with all ports requesting together checks that the target sees one
// request per ready cycle (full throughput).
module tb_sync_arbiter;
  import offload_pkg::*;

  localparam int unsigned N = 5;
  localparam int unsigned PerPort = 40;

  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, in_rsp_valid;
  mem_req_t     in_req [N];
  data_t        in_rsp_rdata;
  logic         out_valid, out_ready, out_rsp_valid;
  mem_req_t     out_req;
  data_t        out_rsp_rdata;

  int checks = 0, failures = 0;

  sync_arbiter #(.NUM_PORTS(N)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_req_i(in_req),
    .in_rsp_valid_o(in_rsp_valid), .in_rsp_rdata_o(in_rsp_rdata),
    .out_valid_o(out_valid), .out_ready_i(out_ready), .out_req_o(out_req),
    .out_rsp_valid_i(out_rsp_valid), .out_rsp_rdata_i(out_rsp_rdata)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  int sent [N];       // requests accepted per port
  int recv [N];       // requests seen at the target per port
  int last_gnt;       // reference round-robin pointer
  bit all_req_phase;
  int full_cycles, full_grants;
  bit rd_pending;
  int rd_port;

  // Target model: answers reads one cycle later with a recognisable value.
  always_ff @(posedge clk) begin
    out_rsp_valid <= out_valid && out_ready && !out_req.we;
    out_rsp_rdata <= out_req.wdata ^ 64'hffff_0000_ffff_0000;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive new requests one time unit after each edge.
  task automatic drive(input bit force_all);
    for (int p = 0; p < int'(N); p++) begin
      if (sent[p] < int'(PerPort)) begin
        if (!in_valid[p] && (force_all || $urandom_range(0, 2) == 0)) begin
          in_valid[p]     = 1'b1;
          in_req[p].we    = (p == 2 && sent[p] % 8 == 7) ? 1'b0 : 1'b1;
          in_req[p].addr  = SyncBase + addr_t'(8);
          in_req[p].wdata = data_t'({p[15:0], 16'(sent[p])});
          in_req[p].strb  = '1;
        end
      end
    end
    out_ready = force_all ? 1'b1 : ($urandom_range(0, 3) != 0);
  endtask

  initial begin
    in_valid = '0;
    out_ready = 0;
    for (int p = 0; p < int'(N); p++) begin
      in_req[p] = '0; sent[p] = 0; recv[p] = 0;
    end
    last_gnt = N - 1;
    rd_pending = 0;
    full_cycles = 0; full_grants = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int exp_gnt;
      bit any;
      all_req_phase = (cyc < 100);
      drive(all_req_phase);
      #1;
      // Reference: first valid port after last_gnt.
      any = 0; exp_gnt = 0;
      for (int k = 1; k <= int'(N); k++) begin
        int c;
        c = (last_gnt + k) % N;
        if (!any && in_valid[c]) begin any = 1; exp_gnt = c; end
      end
      check(out_valid == any, "out_valid iff some port requests");
      if (any) begin
        check(out_req == in_req[exp_gnt], $sformatf("forwarded request is port %0d's", exp_gnt));
        for (int p = 0; p < int'(N); p++)
          check(in_ready[p] == (p == exp_gnt && out_ready), $sformatf("ready of port %0d", p));
      end
      if (all_req_phase && out_ready) begin
        full_cycles++;
        if (out_valid) full_grants++;
      end
      @(posedge clk);
      // Response from the previous cycle's read.
      check(in_rsp_valid == (rd_pending ? (N'(1) << rd_port) : '0), "read response routed to its port");
      if (rd_pending)
        check(in_rsp_rdata == (data_t'({16'(rd_port), 16'(recv[rd_port]-1)}) ^ 64'hffff_0000_ffff_0000), "read data");
      rd_pending = 0;
      if (any && out_ready) begin
        check(out_req.wdata == data_t'({16'(exp_gnt), 16'(recv[exp_gnt])}), "in-order delivery per port");
        recv[exp_gnt]++;
        sent[exp_gnt]++;
        if (!out_req.we) begin rd_pending = 1; rd_port = exp_gnt; end
        last_gnt = exp_gnt;
      end
      #1;
      for (int p = 0; p < int'(N); p++) if (in_valid[p] && !(any && out_ready && p == exp_gnt)) ; else in_valid[p] = 1'b0;
      begin
        bit done;
        done = 1;
        for (int p = 0; p < int'(N); p++) if (recv[p] < int'(PerPort)) done = 0;
        if (done && !rd_pending) break;
      end
    end
    for (int p = 0; p < int'(N); p++) check(recv[p] == int'(PerPort), $sformatf("all requests of port %0d delivered", p));
    check(full_grants == full_cycles && full_cycles > 0, "one grant per ready cycle when all request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
