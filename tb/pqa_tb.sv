// pqa_tb: priority queue array at R = 16 queues of S = 6 (small so that the
// same queue is hit by insertions one and two cycles apart). Insertions come
// one per cycle from a pool of flows with rising estimates; every insertion is
// applied to the list model as it leaves stage U. After the stream,
// output_req reads all queues out under a random rd_ready and each queue is
// compared with the model; a second window then checks that the readout
// cleared the memory. Also checked: one queue per transfer, R transfers, and
// that forwarding and cases I, II and III all happened, and that with
// rd_ready held high the queues leave at one per cycle.
module pqa_tb;
  import topk_ref_pkg::*;

  localparam int S = 6, R = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, output_req, rd_ready, rd_valid, busy, upstream_busy;
  logic [19:0] in_est;
  logic [31:0] in_id;
  logic [S-1:0][19:0] rd_count;
  logic [S-1:0][31:0] rd_id;
  logic ev_fwd, ev_insert, ev_update, ev_reject;
  int checks = 0, failures = 0;
  int n_fwd = 0, n_ins = 0, n_upd = 0, n_rej = 0, n_stall = 0;

  always #5 clk = ~clk;

  pqa #(.S(S), .R(R)) dut (.*);

  pqa_model m = new(S, R);

  // estimate of each pool flow grows, as the sketch's would
  bit [31:0] pool [256];
  bit [19:0] pest [256];

  always @(posedge clk) begin
    if (rst_n) begin
      n_fwd += int'(ev_fwd);
      n_ins += int'(ev_insert);
      n_upd += int'(ev_update);
      n_rej += int'(ev_reject);
      if (rd_valid && !rd_ready) n_stall++;
    end
  end

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int rows_seen;
  // full_rate: rd_ready stays high; then the first queue must appear within
  // 8 cycles of output_req (drain, read, FIFO) and one queue must follow every cycle
  task automatic readout(bit expect_empty, bit full_rate);
    int t_req, t_first, t_last;
    output_req = 1'b1;
    t_req = cyc;
    @(negedge clk);
    output_req = 1'b0;
    rows_seen = 0;
    while (rows_seen < R) begin
      rd_ready = full_rate || ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        bit [19:0] ec [];
        bit [31:0] ei [];
        if (rows_seen == 0) t_first = cyc;
        t_last = cyc;
        m.expect_row(rows_seen, ec, ei);
        for (int j = 0; j < S; j++) begin
          checks++;
          if (expect_empty ? (rd_count[j] != 0)
                           : (rd_count[j] !== ec[j] || (ec[j] != 0 && rd_id[j] !== ei[j]))) begin
            failures++;
            if (failures < 10) $display("queue %0d elem %0d got %0d/%h exp %0d/%h",
                                        rows_seen, j, rd_count[j], rd_id[j], ec[j], ei[j]);
          end
        end
        rows_seen++;
      end
      @(negedge clk);
    end
    rd_ready = 1'b1;
    repeat (4) @(negedge clk);
    checks += 2;
    if (rd_valid) failures++;   // exactly R transfers
    if (busy) failures++;       // back in insertion mode
    if (full_rate) begin
      checks += 2;
      if (t_first - t_req > 8) begin
        failures++;
        $display("first queue %0d cycles after output_req", t_first - t_req);
      end
      if (t_last - t_first != R - 1) begin
        failures++;
        $display("readout of %0d queues took %0d cycles", R, t_last - t_first + 1);
      end
    end
  endtask


  initial begin
    in_valid = 1'b0; output_req = 1'b0; rd_ready = 1'b0; upstream_busy = 1'b0;
    in_est = '0; in_id = '0;
    for (int i = 0; i < 256; i++) begin
      pool[i] = $urandom();
      pest[i] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (busy) @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      int k;
      in_valid = ($urandom_range(0, 7) != 0);
      k = ($urandom_range(0, 1) == 0) ? $urandom_range(0, 15) : $urandom_range(0, 255);
      if (in_valid) begin
        pest[k] = pest[k] + 20'($urandom_range(0, 9));
        if (pest[k] == 0) pest[k] = 1;
        in_est = pest[k];
        in_id  = pool[k];
        m.insert(in_id, in_est);
      end
      @(negedge clk);
    end
    // upstream still busy for a while: readout must wait
    upstream_busy = 1'b1;
    output_req = 1'b1;
    @(negedge clk);
    output_req = 1'b0;
    // insertions still arriving while upstream is busy must be kept
    for (int i = 0; i < 10; i++) begin
      int k;
      k = $urandom_range(0, 15);
      in_valid = (i < 6);
      pest[k] = pest[k] + 20'd5;
      in_est = pest[k];
      in_id  = pool[k];
      if (in_valid) m.insert(in_id, in_est);
      @(negedge clk);
    end
    in_valid = 1'b0;
    checks++;
    if (rd_valid) failures++;
    upstream_busy = 1'b0;
    rows_seen = 0;
    while (rows_seen < R) begin
      rd_ready = ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (rd_valid && rd_ready) begin
        bit [19:0] ec [];
        bit [31:0] ei [];
        m.expect_row(rows_seen, ec, ei);
        for (int j = 0; j < S; j++) begin
          checks++;
          if (rd_count[j] !== ec[j] || (ec[j] != 0 && rd_id[j] !== ei[j])) begin
            failures++;
            if (failures < 10) $display("queue %0d elem %0d got %0d/%h exp %0d/%h",
                                        rows_seen, j, rd_count[j], rd_id[j], ec[j], ei[j]);
          end
        end
        rows_seen++;
      end
      @(negedge clk);
    end
    rd_ready = 1'b1;
    repeat (4) @(negedge clk);
    checks += 2;
    if (rd_valid) failures++;
    if (busy) failures++;
    // second window: empty after the readout
    m.clear();
    readout(1'b1, 1'b1);
    // third window: a few insertions, full-rate readout
    for (int i = 0; i < 40; i++) begin
      in_valid = 1'b1;
      in_est = 20'(i + 1);
      in_id = pool[i];
      m.insert(in_id, in_est);
      @(negedge clk);
    end
    in_valid = 1'b0;
    readout(1'b0, 1'b1);
    checks += 5;
    if (n_fwd == 0)   begin failures++; $display("no forwarding"); end
    if (n_ins == 0)   begin failures++; $display("no case I"); end
    if (n_upd == 0)   begin failures++; $display("no case II"); end
    if (n_rej == 0)   begin failures++; $display("no case III"); end
    if (n_stall == 0) begin failures++; $display("no readout stall"); end
    $display("forwarded %0d, case I %0d, II %0d, III %0d, readout stalls %0d",
             n_fwd, n_ins, n_upd, n_rej, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
