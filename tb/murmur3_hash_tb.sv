// murmur3_hash_tb: checks the pipelined hash against published-style golden
// values and against the byte-by-byte reference, one key per cycle, and
// checks that every hash appears exactly 8 cycles after its key.
module murmur3_hash_tb;
  import topk_ref_pkg::*;

  localparam int LAT = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid;
  logic [103:0] key;
  logic out_valid, busy;
  logic [31:0] hash_a, hash_b;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  murmur3_hash #(.SEED(32'h9747_b28c)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .key(key),
    .out_valid(out_valid), .hash(hash_a), .busy(busy));
  murmur3_hash #(.SEED(32'h1b87_3593)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .key(key),
    .out_valid(), .hash(hash_b), .busy());

  // stimulus log, indexed by cycle
  logic [103:0] key_log [int];
  bit           vld_log [int];
  int cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    key_log[cyc] = key;
    vld_log[cyc] = in_valid;
    if (rst_n && cyc >= LAT) begin
      checks++;
      if (out_valid !== vld_log[cyc - LAT]) begin
        failures++;
        $display("valid mismatch at cycle %0d", cyc);
      end
      if (vld_log[cyc - LAT]) begin
        checks += 2;
        if (hash_a !== mm3(key_log[cyc - LAT], 32'h9747_b28c)) begin
          failures++;
          $display("hash A mismatch key=%h got %h exp %h", key_log[cyc-LAT], hash_a,
                   mm3(key_log[cyc - LAT], 32'h9747_b28c));
        end
        if (hash_b !== mm3(key_log[cyc - LAT], 32'h1b87_3593)) failures++;
      end
    end
  end

  // golden values computed with an independent implementation
  function automatic void golden();
    checks += 3;
    if (mm3(104'h0, 32'h0) !== 32'hb996_0eb1) failures++;
    if (mm3(104'h0102030405060708090a0b0c0d, 32'h9747_b28c) !== 32'he75d_b3ce) failures++;
    if (mm3({104{1'b1}}, 32'h1b87_3593) !== 32'h265d_5b4f) failures++;
  endfunction

  initial begin
    in_valid = 1'b0;
    key = '0;
    golden();
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // fixed vectors, back to back
    in_valid = 1'b1; key = 104'h0102030405060708090a0b0c0d;
    @(negedge clk); key = {104{1'b1}};
    @(negedge clk); key = 104'h0;
    // random keys, random gaps
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      key = {$urandom(), $urandom(), $urandom(), 8'($urandom())};
    end
    @(negedge clk); in_valid = 1'b0;
    repeat (LAT + 2) @(posedge clk);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
