// topk_accel_tb: end-to-end test of the accelerator at its full size
// (S = 6, R = 8192, six 2^21-bit sketch rows). A skewed stream of 5-tuples
// (one elephant flow carrying a quarter of the packets, the rest drawn from a
// log-uniform distribution over 60000 flows, with bursts of back-to-back
// repeats) goes in one packet per cycle. The sketch and priority-queue models
// follow every packet. output_req then ends the window; all 8192 queues are
// read under a random rd_ready and compared with the models. A second, short
// window checks that the sketch and the PQA were emptied. The testbench also
// reports how well the read-out list finds the true top 1000 flows.
//
// Mechanisms that must occur at least once: sketch read-after-write hazards
// (same flow within 3 cycles), PQA forwarding, PQA cases I/II/III, 8-bit and
// 16-bit counter overflow, readout back-pressure, packets dropped while busy.
module topk_accel_tb;
  import topk_ref_pkg::*;

  localparam int S = 6, R = 8192, LAT = 12;
  localparam int NFLOWS = 60000, NPKT = 320000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic [103:0] flow_id;
  logic in_valid, output_req, rd_ready, rd_valid, busy;
  logic [S-1:0][19:0] count;
  logic [S-1:0][31:0] out_id;
  logic ev_fwd, ev_insert, ev_update, ev_reject;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  topk_accel dut (.*);

  tower_model tm = new();
  pqa_model   pm = new(S, R);

  int n_hazard = 0, n_fwd = 0, n_ins = 0, n_upd = 0, n_rej = 0, n_stall = 0, n_drop = 0;
  int true_cnt [int];

  function automatic bit [103:0] flow_of(int k);
    return {32'(k * 32'd2654435761), 32'hc0a8_0000 + 32'(k), 16'(k ^ 16'h5a5a), 16'd443, 8'd6};
  endfunction

  // models follow the packets in the order they enter
  bit [103:0] fq [$];
  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      if (busy) n_drop++;
      else      fq.push_back(flow_id);
    end
    if (rst_n && dut.u_sketch.ready) begin
      bit [103:0] f;
      bit [19:0]  e;
      f = fq.pop_front();
      e = tm.insert(f);
      checks++;
      if (dut.u_sketch.est !== e) begin
        failures++;
        if (failures < 10) $display("estimate mismatch %0d vs %0d", dut.u_sketch.est, e);
      end
      pm.insert(mm3(f, SEEDS[0]), e);
    end
    if (rst_n) begin
      n_fwd += int'(ev_fwd);
      n_ins += int'(ev_insert);
      n_upd += int'(ev_update);
      n_rej += int'(ev_reject);
      if (rd_valid && !rd_ready) n_stall++;
    end
  end

  // readout of the whole PQA, compared with the model
  int rows_seen;
  bit [31:0] got_id [$];
  bit [19:0] got_cnt [$];
  task automatic readout(bit expect_empty);
    got_id = {};
    got_cnt = {};
    output_req = 1'b1;
    @(negedge clk);
    output_req = 1'b0;
    rows_seen = 0;
    while (rows_seen < R) begin
      rd_ready = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        bit [19:0] ec [];
        bit [31:0] ei [];
        pm.expect_row(rows_seen, ec, ei);
        for (int j = 0; j < S; j++) begin
          checks++;
          if (expect_empty ? (count[j] != 0)
                           : (count[j] !== ec[j] || (ec[j] != 0 && out_id[j] !== ei[j]))) begin
            failures++;
            if (failures < 10) $display("queue %0d elem %0d got %0d/%h exp %0d/%h",
                                        rows_seen, j, count[j], out_id[j], ec[j], ei[j]);
          end
          if (count[j] != 0) begin
            got_id.push_back(out_id[j]);
            got_cnt.push_back(count[j]);
          end
        end
        rows_seen++;
      end
      @(negedge clk);
    end
    rd_ready = 1'b1;
    repeat (4) @(negedge clk);
    checks++;
    if (rd_valid) failures++;
  endtask

  int last_k [4];
  initial begin
    int k, burst;
    flow_id = '0; in_valid = 1'b0; output_req = 1'b0; rd_ready = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // a packet offered during the reset-time clear is dropped
    in_valid = 1'b1; flow_id = flow_of(1);
    @(negedge clk);
    in_valid = 1'b0;
    while (busy) @(negedge clk);
    burst = 0;
    for (int i = 0; i < NPKT; i++) begin
      if (burst > 0) burst--;
      else if ($urandom_range(0, 3) == 0) k = 0;
      else begin
        real u;
        u = real'($urandom()) / 4294967296.0;
        k = 1 + int'($floor($exp(u * $ln(real'(NFLOWS)))));
        if ($urandom_range(0, 49) == 0) burst = $urandom_range(1, 6);
      end
      if (k == last_k[0] || k == last_k[1] || k == last_k[2]) n_hazard++;
      last_k[2] = last_k[1]; last_k[1] = last_k[0]; last_k[0] = k;
      in_valid = ($urandom_range(0, 15) != 0);
      flow_id = flow_of(k);
      if (in_valid) true_cnt[int'(mm3(flow_of(k), SEEDS[0]))]++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    readout(1'b0);
    // how well does the read-out list find the true top 1000 flows?
    begin
      int tv [$], thr, tp;
      int idx [$];
      foreach (true_cnt[h]) tv.push_back(true_cnt[h]);
      tv.rsort();
      thr = tv[999];
      idx = got_cnt.find_index() with (1);
      idx.sort() with (-int'(got_cnt[item]));
      tp = 0;
      for (int i = 0; i < 1000 && i < idx.size(); i++)
        if (true_cnt.exists(int'(got_id[idx[i]])) && true_cnt[int'(got_id[idx[i]])] >= thr) tp++;
      $display("top-1000 precision %0d/1000 (flows in PQA: %0d)", tp, got_cnt.size());
      checks++;
      if (tp < 900) failures++;
    end
    // second window: both structures start empty
    while (busy) @(negedge clk);
    tm.clear();
    pm.clear();
    for (int i = 0; i < 300; i++) begin
      in_valid = 1'b1;
      flow_id = flow_of($urandom_range(0, 40));
      @(negedge clk);
    end
    in_valid = 1'b0;
    readout(1'b0);
    while (busy) @(negedge clk);
    readout(1'b1);
    checks += 8;
    if (n_hazard == 0)    begin failures++; $display("no sketch hazard"); end
    if (n_fwd == 0)       begin failures++; $display("no PQA forwarding"); end
    if (n_ins == 0)       begin failures++; $display("no case I"); end
    if (n_upd == 0)       begin failures++; $display("no case II"); end
    if (n_rej == 0)       begin failures++; $display("no case III"); end
    if (tm.n_ovf8 == 0 || tm.n_ovf16 == 0) begin failures++; $display("no overflow"); end
    if (n_stall == 0)     begin failures++; $display("no readout stall"); end
    if (n_drop == 0)      begin failures++; $display("no dropped packet"); end
    $display("sketch hazards %0d, PQA forwards %0d, case I %0d, II %0d, III %0d",
             n_hazard, n_fwd, n_ins, n_upd, n_rej);
    $display("8-bit overflows %0d, 16-bit overflows %0d, readout stalls %0d, dropped %0d",
             tm.n_ovf8, tm.n_ovf16, n_stall, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
