// tower_row_tb: drives three sketch rows (8-, 16- and 32-bit counters) with
// one hash stream drawn from a few hot addresses, so that packets one to four
// cycles apart often hit the same word or the same counter. The testbench
// plays the sketch core as a plain counter (always increment a counter that
// has not overflowed) and checks every bucket the rows show against an
// associative-array model, the 3-cycle latency, 8-bit overflow and clearing.
module tower_row_tb;
  localparam int NR = 3;
  localparam int DELTAS [NR] = '{8, 16, 32};

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [31:0] hash;
  logic clr_we;
  logic [11:0] clr_addr;
  logic [NR-1:0] bvld, wr_en, busy;
  logic [31:0] bext [NR];
  logic [31:0] inc  [NR];
  int checks = 0, failures = 0;
  int n_ovf = 0;

  always #5 clk = ~clk;

  for (genvar r = 0; r < NR; r++) begin : g_dut
    tower_row #(.DELTA(DELTAS[r])) dut (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .hash(hash),
      .bucket_valid(bvld[r]), .bucket_ext(bext[r]),
      .wr_en(wr_en[r]), .inc_val(inc[r]),
      .clr_we(clr_we), .clr_addr(clr_addr), .busy(busy[r]));
    always_comb begin
      wr_en[r] = bvld[r] && (bext[r] != 32'hffff_ffff);
      inc[r]   = bext[r] + 1;
    end
  end

  // model
  bit [31:0] cnt [NR][int unsigned];
  bit [31:0] hq [$];
  int        tq [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int unsigned idx_of(int r, bit [31:0] h);
    return h & ((32'd1 << (21 - $clog2(DELTAS[r]))) - 1);
  endfunction

  always @(posedge clk) begin
    if (rst_n && in_valid) begin
      hq.push_back(hash);
      tq.push_back(cyc);
    end
    if (rst_n && bvld[0]) begin
      bit [31:0] h;
      int t;
      h = hq.pop_front();
      t = tq.pop_front();
      checks++;
      if (cyc - t != 3) begin
        failures++;
        $display("latency %0d", cyc - t);
      end
      for (int r = 0; r < NR; r++) begin
        bit [31:0] v, full, e;
        int unsigned i;
        i = idx_of(r, h);
        v = cnt[r].exists(i) ? cnt[r][i] : 0;
        full = (DELTAS[r] == 32) ? 32'hffff_ffff : (32'd1 << DELTAS[r]) - 1;
        e = (v == full) ? 32'hffff_ffff : v;
        checks++;
        if (bext[r] !== e || !bvld[r]) begin
          failures++;
          if (failures < 10) $display("row %0d idx %h got %h exp %h", r, i, bext[r], e);
        end
        if (v != full) begin
          cnt[r][i] = v + 1;
          if (v + 1 == full && r == 0) n_ovf++;
        end
      end
    end
  end

  bit [31:0] hot [8];

  task automatic do_clear();
    clr_we = 1'b1;
    for (int a = 0; a < 4096; a++) begin
      clr_addr = 12'(a);
      @(negedge clk);
    end
    clr_we = 1'b0;
    for (int r = 0; r < NR; r++) cnt[r].delete();
  endtask

  initial begin
    in_valid = 1'b0; hash = '0; clr_we = 1'b0; clr_addr = '0;
    // hot hashes: same word/different counter, same counter, different bank
    hot[0] = 32'h0001_2345;
    hot[1] = 32'h0001_2344;          // same 64-bit word as hot[0] in every row
    hot[2] = 32'h0001_2346;
    hot[3] = 32'hf001_2345;          // same counter as hot[0] (upper bits unused)
    hot[4] = 32'h0003_2345;          // other bank, same bank address
    hot[5] = 32'h0000_0000;
    hot[6] = 32'h0000_ffff;
    hot[7] = 32'hdead_beef;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    do_clear();
    for (int i = 0; i < 6000; i++) begin
      in_valid = ($urandom_range(0, 7) != 0);
      if ($urandom_range(0, 9) == 0) hash = $urandom();
      else                           hash = hot[$urandom_range(0, 7)];
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (6) @(negedge clk);
    checks++;
    if (n_ovf == 0) begin
      failures++;
      $display("no 8-bit counter overflowed");
    end
    // clear and read back zeros
    do_clear();
    for (int i = 0; i < 8; i++) begin
      in_valid = 1'b1; hash = hot[i];
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (6) @(negedge clk);
    checks++;
    if (busy != '0) failures++;
    $display("8-bit overflows seen: %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
