// tower_sketch_tb: checks the six-row conservative-update sketch against the
// algorithmic model, packet by packet: the estimate, out_id (row 1's hash)
// and the 12-cycle latency. Phase 1 is a skewed random stream (a few heavy
// flows among many light ones, back-to-back repeats), followed by 150000
// packets over 100000 distinct flows, which fill the sketch densely so that
// the conservative update differs from a plain increment. Phase 2 is one flow
// repeated until its 8-bit and 16-bit counters overflow and the estimate
// saturates at 2^20-1. Phase 3 clears the sketch and checks that it restarts
// from zero.
module tower_sketch_tb;
  import topk_ref_pkg::*;

  localparam int LAT = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, clear_req;
  logic [103:0] flow_id;
  logic ready, busy, pipe_busy;
  logic [19:0] est;
  logic [31:0] out_id;
  int checks = 0, failures = 0;
  int n_sat = 0;

  always #5 clk = ~clk;

  tower_sketch dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .flow_id(flow_id),
    .clear_req(clear_req), .ready(ready), .est(est), .out_id(out_id),
    .busy(busy), .pipe_busy(pipe_busy));

  tower_model model = new();
  bit [103:0] fq [$];
  int         tq [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && in_valid && !busy) begin
      fq.push_back(flow_id);
      tq.push_back(cyc);
    end
    if (rst_n && ready) begin
      bit [103:0] f;
      bit [19:0]  e;
      int t;
      f = fq.pop_front();
      t = tq.pop_front();
      e = model.insert(f);
      if (e == 20'hfffff) n_sat++;
      checks += 3;
      if (cyc - t != LAT) begin
        failures++;
        $display("latency %0d", cyc - t);
      end
      if (est !== e) begin
        failures++;
        if (failures < 10) $display("est mismatch flow %h got %0d exp %0d", f, est, e);
      end
      if (out_id !== mm3(f, SEEDS[0])) failures++;
    end
  end

  bit [103:0] pool [512];

  task automatic wait_idle();
    while (busy) @(negedge clk);
  endtask

  initial begin
    in_valid = 1'b0; clear_req = 1'b0; flow_id = '0;
    for (int i = 0; i < 512; i++) pool[i] = {$urandom(), $urandom(), $urandom(), 8'($urandom())};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    checks++;
    if (!busy) failures++;           // clearing after reset
    wait_idle();
    // phase 1: skewed stream
    for (int i = 0; i < 20000; i++) begin
      int k;
      in_valid = ($urandom_range(0, 9) != 0);
      k = $urandom_range(0, 99);
      if (k < 40)      flow_id = pool[$urandom_range(0, 3)];
      else if (k < 70) flow_id = pool[$urandom_range(4, 31)];
      else             flow_id = pool[$urandom_range(32, 511)];
      if ($urandom_range(0, 4) == 0) flow_id = {$urandom(), $urandom(), $urandom(), 8'($urandom())};
      @(negedge clk);
    end
    // phase 1b: many distinct flows, so that counters are shared by several
    // flows and the conservative update differs from a plain increment
    for (int i = 0; i < 150000; i++) begin
      int unsigned k;
      in_valid = 1'b1;
      k = $urandom_range(0, 99999);
      flow_id = {mm3(104'(k), 32'h1234_5678), mm3(104'(k), 32'h0bad_f00d),
                 mm3(104'(k), 32'h5555_aaaa), 8'(k)};
      if ($urandom_range(0, 3) == 0) flow_id = pool[$urandom_range(0, 31)];
      @(negedge clk);
    end
    // phase 2: one flow until saturation, mixed with a second one
    for (int i = 0; i < 1150000; i++) begin
      in_valid = 1'b1;
      flow_id = (i % 16 == 15) ? pool[5] : pool[0];
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks += 3;
    if (model.n_ovf8 == 0)  begin failures++; $display("no 8-bit overflow");  end
    if (model.n_ovf16 == 0) begin failures++; $display("no 16-bit overflow"); end
    if (n_sat == 0)         begin failures++; $display("estimate never saturated"); end
    // phase 3: clear and restart
    clear_req = 1'b1;
    @(negedge clk);
    clear_req = 1'b0;
    checks++;
    if (!busy) failures++;
    wait_idle();
    model.clear();
    for (int i = 0; i < 2000; i++) begin
      in_valid = 1'b1;
      flow_id = pool[$urandom_range(0, 63)];
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (pipe_busy || fq.size() != 0) failures++;
    $display("8-bit overflows %0d, 16-bit overflows %0d, saturated estimates %0d",
             model.n_ovf8, model.n_ovf16, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
