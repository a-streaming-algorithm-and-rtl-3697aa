// topk_workload_tb: accuracy run at the default size on a synthetic trace.
//
// Real backbone traces are not available to a testbench, so the trace is
// synthetic, sized like the smallest of the one-minute backbone traces the
// design was evaluated on (3,895,532 packets, about 395,000 flows): 3,895,532
// packets whose flows are drawn log-uniformly from 700,000 5-tuples (a
// Zipf-like law with exponent about 1; about 434,000 distinct flows occur),
// sent one per cycle. After the window the whole PQA is
// read out, sorted by count, and, for K = 1024 ... 32768, compared with the
// true per-flow packet counts using the usual definitions:
//   precision = TP / K, where the ground truth is every flow whose true count
//               is at least the K-th largest true count (ties included);
//   ARE       = mean over i < K of |est_i - true_i| / true_i, with the
//               estimates and the true counts each sorted in descending order.
// The check requires precision >= 0.90 and ARE <= 5% for every K; the
// measured values are printed.
module topk_workload_tb;
  localparam int S = 6, R = 8192;
  localparam int NFLOWS = 700000, NPKT = 3895532;
  localparam int KS [6] = '{1024, 2048, 4096, 8192, 16384, 32768};

  logic clk = 1'b0, rst_n = 1'b0;
  logic [103:0] flow_id;
  logic in_valid, output_req, rd_ready, rd_valid, busy;
  logic [S-1:0][19:0] count;
  logic [S-1:0][31:0] out_id;
  logic ev_fwd, ev_insert, ev_update, ev_reject;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  topk_accel dut (.*);

  int true_cnt [bit [31:0]];       // keyed by the flow's 32-bit hash

  function automatic bit [103:0] flow_of(int k);
    return {32'h0a00_0000 + 32'(k * 7919), 32'(k * 32'd2654435761), 16'(k), 16'(k >> 16), 8'd17};
  endfunction

  // learn each flow's hash from the sketch output (out_id is row 1's hash)
  always @(posedge clk) begin
    if (rst_n && dut.u_sketch.ready) begin
      if (!true_cnt.exists(dut.u_sketch.out_id)) true_cnt[dut.u_sketch.out_id] = 0;
      true_cnt[dut.u_sketch.out_id]++;
    end
  end

  bit [31:0] got_id [$];
  int        got_cnt [$];

  initial begin
    int k, idx [$], tv [$];
    flow_id = '0; in_valid = 1'b0; output_req = 1'b0; rd_ready = 1'b1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (busy) @(negedge clk);
    for (int i = 0; i < NPKT; i++) begin
      real u;
      u = real'($urandom()) / 4294967296.0;
      k = int'($floor($exp(u * $ln(real'(NFLOWS))))) - 1;
      in_valid = 1'b1;
      flow_id = flow_of(k);
      @(negedge clk);
    end
    in_valid = 1'b0;
    output_req = 1'b1;
    @(negedge clk);
    output_req = 1'b0;
    while (got_cnt.size() < R * S) begin
      @(posedge clk);
      if (rd_valid && rd_ready)
        for (int j = 0; j < S; j++) begin
          got_id.push_back(out_id[j]);
          got_cnt.push_back(int'(count[j]));
        end
      @(negedge clk);
    end
    // sort the read-out list by estimate, descending
    idx = got_cnt.find_index() with (1);
    idx.sort() with (-got_cnt[item]);
    foreach (true_cnt[h]) tv.push_back(true_cnt[h]);
    tv.rsort();
    $display("flows seen %0d, packets %0d", tv.size(), NPKT);
    foreach (KS[n]) begin
      int K, thr, tp;
      real are;
      int ests [$];
      K = KS[n];
      ests.delete();
      thr = tv[K - 1];
      tp = 0;
      are = 0.0;
      for (int i = 0; i < K; i++) begin
        bit [31:0] h;
        h = got_id[idx[i]];
        if (got_cnt[idx[i]] != 0 && true_cnt.exists(h) && true_cnt[h] >= thr) tp++;
        ests.push_back(got_cnt[idx[i]]);
      end
      for (int i = 0; i < K; i++) are += (ests[i] > tv[i] ? ests[i] - tv[i] : tv[i] - ests[i]) / real'(tv[i]);
      are = are / K;
      $display("K=%0d: precision %0.3f, ARE %0.2f%% (K-th true count %0d)", K, real'(tp) / K, 100.0 * are, thr);
      checks += 2;
      if (real'(tp) / K < 0.90) failures++;
      if (are > 0.05) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (NPKT + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
