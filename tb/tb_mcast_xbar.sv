// Self-checking testbench of the multicast interconnect.
//
// Sends a random mix of multicast writes (random non-zero masks), unicast
// writes (mask zero, cluster chosen by the address), requests to the
// synchronization unit's range, and requests that must be refused (address
// outside every range, cluster index beyond NUM_CLUSTERS, read to the
// cluster range). The clusters and the peripheral port apply random
// back-pressure. A model kept here tracks which destinations have already
// taken the current request and checks, every cycle: the set of cluster
// valids, the host ready (high exactly when the last outstanding destination
// accepts), the address rebased to each cluster, the data, and the error
// pulse. It counts deliveries per cluster against the number expected and
// measures that, with every destination ready, a multicast to any number of
// clusters takes one cycle.
module tb_mcast_xbar;
  import offload_pkg::*;

  localparam int unsigned NC = 8;
  typedef logic [NC-1:0] mask_t;

  logic     clk = 0, rst_n = 0;
  logic     host_valid, host_ready, host_err;
  mem_req_t host_req;
  mask_t    host_mask;
  mask_t    cl_valid, cl_ready;
  mem_req_t cl_req [NC];
  logic     periph_valid, periph_ready;
  mem_req_t periph_req;

  int checks = 0, failures = 0;

  mcast_xbar #(.NUM_CLUSTERS(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_valid_i(host_valid), .host_ready_o(host_ready), .host_req_i(host_req),
    .host_mask_i(host_mask), .host_err_o(host_err),
    .cl_valid_o(cl_valid), .cl_ready_i(cl_ready), .cl_req_o(cl_req),
    .periph_valid_o(periph_valid), .periph_ready_i(periph_ready), .periph_req_o(periph_req)
  );

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  int deliveries [NC];
  int expected   [NC];
  int n_mcast = 0, n_ucast = 0, n_periph = 0, n_err = 0;

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic addr_t cl_addr(int unsigned idx, logic [ClusterOffsetBits-1:0] off);
    return ClusterBase + (addr_t'(idx) << ClusterOffsetBits) + addr_t'(off);
  endfunction

  // kind: 0 multicast, 1 unicast, 2 sync unit, 3 error
  // Returns the number of cycles the request took to be accepted.
  task automatic send(input int kind, input bit all_ready, output int cycles);
    mask_t dest, sent;
    logic [ClusterOffsetBits-1:0] off;
    int unsigned idx;
    bit done;
    off = ClusterOffsetBits'($urandom) & ~ClusterOffsetBits'(7);
    dest = '0;
    host_req.we    = 1'b1;
    host_req.wdata = {$urandom, $urandom};
    host_req.strb  = '1;
    host_mask      = '0;
    case (kind)
      0: begin
        host_mask = mask_t'($urandom);
        if (host_mask == '0) host_mask = mask_t'(1);
        dest = host_mask;
        idx = $urandom_range(0, 255);           // cluster field is ignored
        host_req.addr = ClusterBase + (addr_t'(idx) << ClusterOffsetBits) + addr_t'(off);
        n_mcast++;
      end
      1: begin
        idx = $urandom_range(0, NC - 1);
        dest[idx] = 1'b1;
        host_req.addr = cl_addr(idx, off);
        n_ucast++;
      end
      2: begin
        host_req.addr = SyncBase + addr_t'($urandom_range(0, 3) * 8);
        host_req.we   = $urandom_range(0, 1);
        n_periph++;
      end
      default: begin
        n_err++;
        case ($urandom_range(0, 2))
          0: host_req.addr = 48'h0000_8000_0000 + addr_t'(off);   // unmapped
          1: host_req.addr = cl_addr(NC + $urandom_range(0, 10), off); // no such cluster
          default: begin                                           // read of a cluster
            host_req.addr = cl_addr($urandom_range(0, NC - 1), off);
            host_req.we = 1'b0;
          end
        endcase
      end
    endcase
    host_valid = 1'b1;
    sent = '0;
    cycles = 0;
    done = 0;
    while (!done) begin
      mask_t remaining;
      cl_ready     = all_ready ? '1 : mask_t'($urandom);
      periph_ready = all_ready ? 1'b1 : ($urandom_range(0, 1) == 1);
      #1;
      cycles++;
      remaining = dest & ~sent;
      check(cl_valid == remaining, $sformatf("cluster valids %b, expected %b", cl_valid, remaining));
      check(periph_valid == (kind == 2), "peripheral valid");
      check(host_err == (kind == 3), "error pulse");
      for (int i = 0; i < int'(NC); i++)
        if (cl_valid[i]) begin
          check(cl_req[i].addr == cl_addr(i, off), $sformatf("cluster %0d address rebased", i));
          check(cl_req[i].wdata == host_req.wdata && cl_req[i].we, "cluster data");
        end
      if (kind == 2) begin
        check(host_ready == periph_ready, "ready from peripheral");
        check(periph_req == host_req, "peripheral request");
      end else if (kind == 3) check(host_ready, "error accepted at once");
      else check(host_ready == ((remaining & ~cl_ready) == '0), "host ready when last destination takes it");
      @(posedge clk);
      for (int i = 0; i < int'(NC); i++)
        if (cl_valid[i] && cl_ready[i]) deliveries[i]++;
      sent = sent | (cl_valid & cl_ready);
      done = host_ready;
      #1;
    end
    for (int i = 0; i < int'(NC); i++) if (dest[i]) expected[i]++;
    host_valid = 1'b0;
    cl_ready   = '0;
    #1;
    check(cl_valid == '0 && !periph_valid, "no valid without host request");
  endtask

  initial begin
    int cyc;
    host_valid = 0; host_req = '0; host_mask = '0; cl_ready = '0; periph_ready = 0;
    for (int i = 0; i < int'(NC); i++) begin deliveries[i] = 0; expected[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    // Latency: every destination ready -> one cycle, for any mask size.
    for (int k = 1; k <= int'(NC); k++) begin
      host_req.we = 1; host_req.wdata = 64'(k); host_req.strb = '1;
      host_req.addr = ClusterBase;
      host_mask = mask_t'((1 << k) - 1);
      host_valid = 1; cl_ready = '1;
      #1 check(host_ready && cl_valid == host_mask, $sformatf("multicast to %0d clusters in one cycle", k));
      @(posedge clk);
      for (int i = 0; i < k; i++) begin deliveries[i]++; expected[i]++; end
      #1 host_valid = 0;
    end
    for (int t = 0; t < 600; t++) begin
      send($urandom_range(0, 3), 1'b0, cyc);
    end
    for (int t = 0; t < 50; t++) begin
      send($urandom_range(0, 1), 1'b1, cyc);
      check(cyc == 1, "one cycle with all destinations ready");
    end
    for (int i = 0; i < int'(NC); i++)
      check(deliveries[i] == expected[i], $sformatf("cluster %0d got %0d of %0d writes", i, deliveries[i], expected[i]));
    check(n_mcast > 0 && n_ucast > 0 && n_periph > 0 && n_err > 0, "every request kind exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
