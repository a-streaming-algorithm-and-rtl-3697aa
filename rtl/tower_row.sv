// tower_row: one row of the TowerSketch, a 2^21-bit array of DELTA-bit
// counters held in eight 4K x 64-bit banks.
//
// Addressing (from the row's hash): the low 6-log2(DELTA) bits pick the
// counter inside a 64-bit word, the next 12 bits are the bank address and the
// next 3 bits pick one of the eight banks. All eight banks are read at once;
// a multiplexer keeps the selected bank's word, which is shifted right by
// offset*DELTA bits; the low DELTA bits are the counter. The counter is
// extended to 32 bits, an all-ones counter (overflowed) becoming 2^32-1.
//
// Pipeline, one packet per cycle:
//   A  in_valid/hash: address to the banks
//   B  bank address register
//   C  bank data; word select, forwarding, shift, extend -> E register
//   E  bucket_ext shown to the sketch core, which answers in the same cycle
//      with wr_en and the incremented value inc_val; the new counter is put
//      back into the word and the write is registered
//   W  the registered write reaches the banks
// bucket_valid/bucket_ext appear 3 cycles after in_valid.
//
// Forwarding: a word read from the banks may be stale, because up to three
// younger writes of older packets have not reached the array when it is read.
// Stage C therefore takes the newest of (the write being formed in E this
// cycle, the registered write in W, the write of the previous cycle) that
// hits the same word, else the bank data. The source does not describe
// forwarding inside the sketch, only that the whole pipeline takes one packet
// per cycle; this mechanism is this design's own. The read/insert/write-back
// scheme and the bit split are the source's.
//
// clr_we/clr_addr write zeros to one address of all eight banks (used to
// empty the row); no packet may be in flight while clearing.
module tower_row #(
  parameter int unsigned DELTA = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // packet in (stage A)
  input  logic        in_valid,
  input  logic [31:0] hash,
  // bucket out (stage E) and the core's decision in the same cycle
  output logic        bucket_valid,
  output logic [31:0] bucket_ext,
  input  logic        wr_en,
  input  logic [31:0] inc_val,
  // clearing
  input  logic        clr_we,
  input  logic [11:0] clr_addr,
  // pipeline occupancy
  output logic        busy
);
  import topk_pkg::*;

  localparam int unsigned OFF_W  = 6 - $clog2(DELTA);   // counter in word
  localparam int unsigned WA_W   = BANK_AW + 3;         // word address {bank, addr}

  typedef struct packed {
    logic             vld;
    logic [WA_W-1:0]  wa;    // {bank select, bank address}
    logic [OFF_W-1:0] off;
  } req_t;

  typedef struct packed {
    logic              vld;
    logic [WA_W-1:0]   wa;
    logic [WORD_W-1:0] word;
  } wr_t;

  // ---------------- stage A: split the hash --------------------------------
  req_t a_req;
  always_comb begin
    a_req.vld = in_valid;
    a_req.off = hash[OFF_W-1:0];
    a_req.wa  = hash[OFF_W +: WA_W];
  end

  req_t b_req, c_req;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      b_req <= '0;
      c_req <= '0;
    end else begin
      b_req <= a_req;
      c_req <= b_req;
    end
  end

  // ---------------- banks ---------------------------------------------------
  wr_t w_q, w_q2;                  // registered write (W) and the one before
  logic [WORD_W-1:0] bank_rd [N_BANKS];

  for (genvar g = 0; g < N_BANKS; g++) begin : g_bank
    logic             bwe;
    logic [BANK_AW-1:0] bwa;
    logic [WORD_W-1:0]  bwd;
    always_comb begin
      if (clr_we) begin
        bwe = 1'b1;
        bwa = clr_addr;
        bwd = '0;
      end else begin
        bwe = w_q.vld && (w_q.wa[WA_W-1 -: 3] == 3'(g));
        bwa = w_q.wa[BANK_AW-1:0];
        bwd = w_q.word;
      end
    end
    ram_bank #(.DEPTH(1 << BANK_AW), .WIDTH(WORD_W)) u_bank (
      .clk   (clk),
      .we    (bwe),
      .waddr (bwa),
      .wdata (bwd),
      .raddr (a_req.wa[BANK_AW-1:0]),
      .rdata (bank_rd[g])
    );
  end

  // ---------------- stage E registers and the write being formed -----------
  logic              e_vld;
  logic [WA_W-1:0]   e_wa;
  logic [OFF_W-1:0]  e_off;
  logic [WORD_W-1:0] e_word;
  logic [31:0]       e_ext;
  wr_t               e_wr;       // write formed in stage E this cycle

  always_comb begin
    e_wr.vld  = e_vld && wr_en;
    e_wr.wa   = e_wa;
    e_wr.word = e_word;
    e_wr.word[e_off * DELTA +: DELTA] = inc_val[DELTA-1:0];
  end

  // ---------------- stage C: select, forward, extract -----------------------
  logic [WORD_W-1:0] c_word_mem, c_word;
  logic [DELTA-1:0]  c_bucket;
  always_comb begin
    c_word_mem = bank_rd[c_req.wa[WA_W-1 -: 3]];
    if (e_wr.vld && e_wr.wa == c_req.wa)      c_word = e_wr.word;
    else if (w_q.vld && w_q.wa == c_req.wa)   c_word = w_q.word;
    else if (w_q2.vld && w_q2.wa == c_req.wa) c_word = w_q2.word;
    else                                      c_word = c_word_mem;
    c_bucket = DELTA'(c_word >> (c_req.off * DELTA));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      e_vld <= 1'b0;
      w_q   <= '0;
      w_q2  <= '0;
    end else begin
      e_vld <= c_req.vld;
      w_q   <= e_wr;
      w_q2  <= w_q;
    end
  end

  always_ff @(posedge clk) begin
    e_wa   <= c_req.wa;
    e_off  <= c_req.off;
    e_word <= c_word;
    e_ext  <= (&c_bucket) ? EXT_INF : 32'(c_bucket);
  end

  assign bucket_valid = e_vld;
  assign bucket_ext   = e_ext;
  assign busy         = b_req.vld | c_req.vld | e_vld | w_q.vld | w_q2.vld;

  // The sketch core never writes an overflowed counter.
  a_no_write_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    (e_vld && wr_en) |-> (e_ext != EXT_INF));

endmodule
