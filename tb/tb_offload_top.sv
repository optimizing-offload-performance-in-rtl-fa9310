// End-to-end testbench of the offload subsystem, at its default size
// (32 clusters).
//
// The host side is driven directly; each cluster is a cluster_model. For
// every cluster count M in {1, 2, 4, 8, 16, 32}, in both dispatch modes
// (unicast: every job word stored once per cluster, as without the multicast
// extension; multicast: every job word stored once with a mask of M bits) and
// with and without cluster back-pressure, the testbench runs one offload:
//   1. write THRESHOLD = M;
//   2. dispatch the job (4 words: data pointer, argument, job length, and
//      last the handler pointer, which starts the cluster);
//   3. the clusters run for ceil(2.6 * N / (8 * M)) cycles with N = 1024,
//      the per-cluster compute term of the runtime model of the source
//      architecture, and each then writes INCREMENT;
//   4. wait for the interrupt and read back COUNT and STATUS.
// It checks the dispatch cycle count (4 cycles for multicast whatever M,
// 4*M for unicast, when no cluster stalls), that each selected cluster got
// the job exactly once and the others nothing, that the interrupt follows a
// credit model kept here cycle by cycle (high from the cycle after the M-th
// credit), that at most one access reaches the counter per cycle, and that
// for M >= 2 the multicast offload completes sooner than the unicast one.
// It also issues one unmapped store and expects the error pulse. Each
// mechanism (multicast, unicast, back-pressure stall, simultaneous credits,
// interrupt, read-back, decode error, threshold rewrite) is counted, and one
// that never happened counts as a failure.
module tb_offload_top;
  import offload_pkg::*;

  localparam int unsigned NC = 32;
  localparam int unsigned W  = 4;
  localparam int unsigned N  = 1024;
  typedef logic [NC-1:0] mask_t;

  logic     clk = 0, rst_n = 0;
  logic     host_req_valid, host_req_ready, host_rsp_valid, host_err, irq;
  mem_req_t host_req;
  mask_t    host_mask;
  data_t    host_rsp_rdata;
  mask_t    cl_req_valid, cl_req_ready, cl_sync_valid, cl_sync_ready;
  mem_req_t cl_req [NC];
  mem_req_t cl_sync_req [NC];
  logic     stall;

  int checks = 0, failures = 0;

  offload_top dut (
    .clk_i(clk), .rst_ni(rst_n),
    .host_req_valid_i(host_req_valid), .host_req_ready_o(host_req_ready),
    .host_req_i(host_req), .host_mcast_mask_i(host_mask),
    .host_rsp_valid_o(host_rsp_valid), .host_rsp_rdata_o(host_rsp_rdata),
    .host_err_o(host_err),
    .cl_req_valid_o(cl_req_valid), .cl_req_ready_i(cl_req_ready), .cl_req_o(cl_req),
    .cl_sync_valid_i(cl_sync_valid), .cl_sync_ready_o(cl_sync_ready), .cl_sync_req_i(cl_sync_req),
    .irq_o(irq)
  );

  for (genvar i = 0; i < int'(NC); i++) begin : gen_cl
    cluster_model #(.IDX(i)) i_cl (
      .clk_i(clk), .rst_ni(rst_n), .stall_i(stall),
      .req_valid_i(cl_req_valid[i]), .req_ready_o(cl_req_ready[i]), .req_i(cl_req[i]),
      .sync_valid_o(cl_sync_valid[i]), .sync_ready_i(cl_sync_ready[i]), .sync_req_o(cl_sync_req[i])
    );
  end

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 30) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // Mechanism counters
  int n_mcast = 0, n_ucast = 0, n_stall = 0, n_conflict = 0, n_irq = 0;
  int n_read = 0, n_err = 0, n_rewrite = 0;

  // Credit model, updated at every rising edge from the port activity.
  int  thr_m = 0, credits = 0;
  bit  irq_exp = 0, irq_prev = 0;
  bit  err_seen = 0;
  always @(posedge clk) if (rst_n) begin
    int acc;
    bit thr_wr;
    check(irq == irq_exp, "interrupt follows the credit model");
    if (irq && !irq_prev) n_irq++;
    if (!irq && irq_prev) n_rewrite++;
    irq_prev = irq;
    acc = $countones(cl_sync_valid & cl_sync_ready);
    thr_wr = host_req_valid && host_req_ready && host_req.we &&
             host_req.addr == SyncBase + addr_t'(RegThreshold);
    check(acc + int'(thr_wr) <= 1, "one access to the counter per cycle");
    if ($countones(cl_sync_valid) >= 2) n_conflict++;
    if (host_req_valid && !host_req_ready) n_stall++;
    if (host_err) err_seen = 1;
    if (thr_wr) begin
      thr_m = int'(host_req.wdata);
      credits = 0;
    end else credits += acc;
    irq_exp = (thr_m != 0) && (credits >= thr_m);
  end

  initial begin
    #5000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host store; returns the cycles until accepted.
  task automatic host_write(input addr_t a, input data_t d, input mask_t m, output int cycles);
    bit r;
    host_req_valid = 1'b1;
    host_req.we    = 1'b1;
    host_req.addr  = a;
    host_req.wdata = d;
    host_req.strb  = '1;
    host_mask      = m;
    cycles = 0;
    do begin
      #8 r = host_req_ready;
      @(posedge clk);
      cycles++;
      #1;
    end while (!r);
    host_req_valid = 1'b0;
    host_mask = '0;
  endtask

  task automatic host_read(input addr_t a, output data_t d);
    bit r;
    host_req_valid = 1'b1;
    host_req.we    = 1'b0;
    host_req.addr  = a;
    host_mask      = '0;
    do begin
      #8 r = host_req_ready;
      @(posedge clk);
      #1;
    end while (!r);
    host_req_valid = 1'b0;
    #7;
    check(host_rsp_valid, "read response one cycle after acceptance");
    d = host_rsp_rdata;
    n_read++;
    @(posedge clk);
    #1;
  endtask

  function automatic addr_t cl_addr(int unsigned idx, int unsigned word);
    return ClusterBase + (addr_t'(idx) << ClusterOffsetBits) + addr_t'(word * 8);
  endfunction

  // One offload; returns dispatch cycles and total cycles to the interrupt.
  task automatic offload(input int m, input bit mcast, output int disp, output int total);
    data_t words [W];
    int    jobs0 [NC], writes0 [NC];
    int    c, t0, work;
    data_t d;
    mask_t mask;
    work = (26 * int'(N) + 80 * m - 1) / (80 * m);   // ceil(2.6 N / (8 M))
    // Word order: 3 = data pointer, 2 = argument, 1 = job length, 0 = handler (doorbell).
    words[3] = 64'h0000_0000_8000_0000;
    words[2] = 64'h3ff0_0000_0000_0000;
    words[1] = data_t'(work);
    words[0] = 64'h0000_0000_8000_1000;
    mask = mask_t'((64'(1) << m) - 1);
    for (int i = 0; i < int'(NC); i++) begin
      jobs0[i] = gen_jobs(i); writes0[i] = gen_writes(i);
    end
    t0 = int'($time / 10);
    host_write(SyncBase + addr_t'(RegThreshold), data_t'(m), '0, c);
    disp = 0;
    for (int w = int'(W) - 1; w >= 0; w--) begin
      if (mcast) begin
        host_write(cl_addr(0, w), words[w], mask, c);
        disp += c;
      end else
        for (int i = 0; i < m; i++) begin
          host_write(cl_addr(i, w), words[w], '0, c);
          disp += c;
        end
    end
    if (mcast) n_mcast++; else n_ucast++;
    c = 0;
    while (!irq && c < 5000) begin
      @(posedge clk);
      c++;
    end
    check(irq, $sformatf("interrupt for the offload to %0d clusters", m));
    total = int'($time / 10) - t0;
    #1;
    host_read(SyncBase + addr_t'(RegCount), d);
    check(d == data_t'(m), $sformatf("COUNT = %0d after offload to %0d", d, m));
    host_read(SyncBase + addr_t'(RegStatus), d);
    check(d == 1, "STATUS shows the interrupt");
    for (int i = 0; i < int'(NC); i++) begin
      bit sel = (i < m);
      check(gen_jobs(i) - jobs0[i] == int'(sel), $sformatf("cluster %0d started %0d jobs", i, gen_jobs(i) - jobs0[i]));
      check(gen_writes(i) - writes0[i] == (sel ? int'(W) : 0), $sformatf("cluster %0d job words", i));
    end
  endtask

  function automatic int gen_jobs(int i);
    int r = 0;
    case (i)
`define CL_CASE(n) n: r = gen_cl[n].i_cl.jobs;
      `CL_CASE(0)  `CL_CASE(1)  `CL_CASE(2)  `CL_CASE(3)  `CL_CASE(4)  `CL_CASE(5)  `CL_CASE(6)  `CL_CASE(7)
      `CL_CASE(8)  `CL_CASE(9)  `CL_CASE(10) `CL_CASE(11) `CL_CASE(12) `CL_CASE(13) `CL_CASE(14) `CL_CASE(15)
      `CL_CASE(16) `CL_CASE(17) `CL_CASE(18) `CL_CASE(19) `CL_CASE(20) `CL_CASE(21) `CL_CASE(22) `CL_CASE(23)
      `CL_CASE(24) `CL_CASE(25) `CL_CASE(26) `CL_CASE(27) `CL_CASE(28) `CL_CASE(29) `CL_CASE(30) `CL_CASE(31)
`undef CL_CASE
      default: r = 0;
    endcase
    return r;
  endfunction

  function automatic int gen_writes(int i);
    int r = 0;
    case (i)
`define CL_CASE(n) n: r = gen_cl[n].i_cl.writes;
      `CL_CASE(0)  `CL_CASE(1)  `CL_CASE(2)  `CL_CASE(3)  `CL_CASE(4)  `CL_CASE(5)  `CL_CASE(6)  `CL_CASE(7)
      `CL_CASE(8)  `CL_CASE(9)  `CL_CASE(10) `CL_CASE(11) `CL_CASE(12) `CL_CASE(13) `CL_CASE(14) `CL_CASE(15)
      `CL_CASE(16) `CL_CASE(17) `CL_CASE(18) `CL_CASE(19) `CL_CASE(20) `CL_CASE(21) `CL_CASE(22) `CL_CASE(23)
      `CL_CASE(24) `CL_CASE(25) `CL_CASE(26) `CL_CASE(27) `CL_CASE(28) `CL_CASE(29) `CL_CASE(30) `CL_CASE(31)
`undef CL_CASE
      default: r = 0;
    endcase
    return r;
  endfunction

  initial begin
    int disp, tot_u, tot_m, c;
    int ms [6] = '{1, 2, 4, 8, 16, 32};
    host_req_valid = 0; host_req = '0; host_mask = '0; stall = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #1;
    foreach (ms[k]) begin
      stall = 0;
      offload(ms[k], 1'b0, disp, tot_u);
      check(disp == int'(W) * ms[k], $sformatf("unicast dispatch to %0d clusters: %0d cycles", ms[k], disp));
      offload(ms[k], 1'b1, disp, tot_m);
      check(disp == int'(W), $sformatf("multicast dispatch to %0d clusters: %0d cycles", ms[k], disp));
      if (ms[k] >= 2) check(tot_m < tot_u, $sformatf("M=%0d: multicast %0d < unicast %0d cycles", ms[k], tot_m, tot_u));
      $display("M=%0d offload cycles: unicast %0d, multicast %0d", ms[k], tot_u, tot_m);
      stall = 1;
      offload(ms[k], 1'b0, disp, tot_u);
      check(disp >= int'(W) * ms[k], "unicast dispatch under back-pressure");
      offload(ms[k], 1'b1, disp, tot_m);
      check(disp >= int'(W), "multicast dispatch under back-pressure");
    end
    stall = 0;
    host_write(48'h0000_8000_0000, 64'h1, '0, c);
    check(err_seen, "unmapped store raises the error pulse");
    if (err_seen) n_err++;
    host_write(SyncBase + addr_t'(RegThreshold), 64'd0, '0, c);
    repeat (2) @(posedge clk);
    #1 check(!irq, "threshold rewrite clears the interrupt");
    $display("mechanisms: multicast=%0d unicast=%0d stall=%0d simultaneous_credits=%0d irq=%0d read=%0d err=%0d rewrite=%0d",
             n_mcast, n_ucast, n_stall, n_conflict, n_irq, n_read, n_err, n_rewrite);
    check(n_mcast > 0, "multicast dispatch happened");
    check(n_ucast > 0, "unicast dispatch happened");
    check(n_stall > 0, "back-pressure stall happened");
    check(n_conflict > 0, "simultaneous credits happened");
    check(n_irq == 24, "one interrupt per offload");
    check(n_read > 0, "host read-back happened");
    check(n_err > 0, "decode error happened");
    check(n_rewrite > 0, "threshold rewrite cleared the interrupt");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
