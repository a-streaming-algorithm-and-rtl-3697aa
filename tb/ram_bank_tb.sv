// ram_bank_tb: random writes and reads on a small bank against an array
// model; checks the two-cycle read latency and that a read and a write of the
// same address on one edge return the old word.
module ram_bank_tb;
  localparam int DEPTH = 64, WIDTH = 16;
  logic clk = 1'b0;
  logic we;
  logic [5:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  int checks = 0, failures = 0;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_q [$];

  always #5 clk = ~clk;

  ram_bank #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (
    .clk(clk), .we(we), .waddr(waddr), .wdata(wdata), .raddr(raddr), .rdata(rdata));

  // expected word: model contents on the edge that samples the array, which
  // is one cycle after raddr is presented
  logic [5:0] raddr_d;
  logic       started = 1'b0;
  always @(posedge clk) begin
    if (started) exp_q.push_back(model[raddr_d]);
    raddr_d <= raddr;
    if (we) model[waddr] <= wdata;
    if (exp_q.size() > 1) begin
      checks++;
      if (rdata !== exp_q.pop_front()) begin
        failures++;
        $display("read mismatch at %0t", $time);
      end
    end
  end

  initial begin
    we = 1'b1; raddr = '0;
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      waddr = 6'(a); wdata = WIDTH'($urandom());
      @(posedge clk); #1;
    end
    we = 1'b0;
    @(posedge clk); #1;
    started = 1'b1;
    raddr_d = raddr;
    for (int i = 0; i < 2000; i++) begin
      we    = $urandom_range(0, 1);
      waddr = 6'($urandom_range(0, 7));       // small range: many collisions
      raddr = 6'($urandom_range(0, 7));
      wdata = WIDTH'($urandom());
      @(posedge clk); #1;
    end
    // explicit latency check: write a marker, read it, count cycles
    we = 1'b1; waddr = 6'd40; wdata = 16'hbeef; raddr = 6'd41;
    @(posedge clk); #1;
    we = 1'b0; raddr = 6'd40;
    @(posedge clk); #1;
    raddr = 6'd41;
    checks++;
    if (rdata === 16'hbeef) failures++;       // not yet after one cycle
    @(posedge clk); #1;
    checks++;
    if (rdata !== 16'hbeef) failures++;       // there after two cycles
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
