// tower_sketch: TowerSketch with conservative update, six rows.
//
// Rows 1-3 hold 8-bit counters, rows 4-5 16-bit counters and row 6 32-bit
// counters; every row is 2^21 bits. For each valid flow_id, six MurmurHash3
// units (one seed per row) address one counter per row. The six counters are
// extended to 32 bits (an overflowed, all-ones counter reads as 2^32-1 =
// +infinity) and each is compared with all the others: wr_en[i] marks the
// rows whose counter has not overflowed and is not larger than any other
// counter that has not overflowed, i.e. holds the minimum. Those counters are incremented and written back; a
// multiplexer per row picks the incremented or the old value, and a
// comparator tree (6 -> 3 -> 2 -> 1) over the values that have not overflowed
// gives the estimate. This is
// the conservative-update insertion of the source, computed in one cycle
// (stage E of tower_row) so that a packet sees the update of the packet just
// before it.
//
// Interface: in_valid/flow_id in; ready/est/out_id out LAT = 12 cycles later
// (8 hash, 3 row read, 1 output register), one packet per cycle. out_id is
// row 1's hash, which the priority queue array reuses as the flow's hash.
// est is the 32-bit minimum clipped to EST_W = 20 bits (the estimate bus width
// of the block diagram); if every counter has overflowed it is 2^20-1.
//
// Clearing (this design's choice, the source does not say how the sketch is
// emptied): after reset and after each clear_req pulse, the sketch waits for
// its pipeline to empty and then writes zeros to all 4096 addresses of every
// bank, one address per cycle. While clearing, busy is high and in_valid is
// ignored. pipe_busy tells whether any packet is still in the pipeline.
module tower_sketch (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [103:0] flow_id,
  input  logic         clear_req,
  output logic         ready,
  output logic [19:0]  est,
  output logic [31:0]  out_id,
  output logic         busy,
  output logic         pipe_busy
);
  import topk_pkg::*;

  localparam int unsigned ROW_LAT  = 3;

  // ---------------- clear controller ---------------------------------------
  typedef enum logic [1:0] {S_CLEAR, S_RUN, S_DRAIN} state_t;
  state_t state;
  logic [BANK_AW-1:0] clr_addr;
  logic               clr_we;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_CLEAR;
      clr_addr <= '0;
    end else begin
      unique case (state)
        S_RUN:   if (clear_req) state <= S_DRAIN;
        S_DRAIN: if (!pipe_busy) begin
                   state    <= S_CLEAR;
                   clr_addr <= '0;
                 end
        S_CLEAR: begin
                   clr_addr <= clr_addr + 1'b1;
                   if (&clr_addr) state <= S_RUN;
                 end
        default: state <= S_CLEAR;
      endcase
    end
  end
  assign clr_we = (state == S_CLEAR);
  assign busy   = (state != S_RUN);

  logic accept;
  assign accept = in_valid && (state == S_RUN) && !clear_req;

  // ---------------- hashes ---------------------------------------------------
  logic [N_ROWS-1:0] h_vld;
  logic [31:0]       h_val [N_ROWS];
  logic [N_ROWS-1:0] h_busy;
  for (genvar r = 0; r < N_ROWS; r++) begin : g_hash
    murmur3_hash #(.SEED(ROW_SEED[r])) u_hash (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (accept),
      .key       (flow_id),
      .out_valid (h_vld[r]),
      .hash      (h_val[r]),
      .busy      (h_busy[r])
    );
  end

  // row 1's hash travels alongside the row pipeline
  logic [31:0] id_pipe [ROW_LAT];
  always_ff @(posedge clk) begin
    id_pipe[0] <= h_val[0];
    for (int i = 1; i < ROW_LAT; i++) id_pipe[i] <= id_pipe[i-1];
  end

  // ---------------- rows -----------------------------------------------------
  logic [N_ROWS-1:0] b_vld, row_busy, wr_en;
  logic [31:0]       bucket [N_ROWS];
  logic [31:0]       inc    [N_ROWS];
  logic [31:0]       upd    [N_ROWS];

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    tower_row #(.DELTA(ROW_DELTA[r])) u_row (
      .clk          (clk),
      .rst_n        (rst_n),
      .in_valid     (h_vld[r]),
      .hash         (h_val[r]),
      .bucket_valid (b_vld[r]),
      .bucket_ext   (bucket[r]),
      .wr_en        (wr_en[r]),
      .inc_val      (inc[r]),
      .clr_we       (clr_we),
      .clr_addr     (clr_addr),
      .busy         (row_busy[r])
    );
  end

  // ---------------- COMP, +1, MUX, MIN (stage E) ----------------------------
  // overflow of an updated value: its counter bits are all ones
  function automatic logic is_ovf(input logic [31:0] v, input int unsigned delta);
    logic [31:0] mask;
    mask = (delta == 32) ? 32'hffff_ffff : ((32'd1 << delta) - 32'd1);
    return (v & mask) == mask;
  endfunction

  // COMP: every counter is compared with every other one. Counter i is
  // incremented when it has not overflowed and no other counter that has
  // not overflowed is smaller, i.e. when it holds the minimum.
  logic [31:0] minval2;
  logic [31:0] cand [N_ROWS];
  always_comb begin
    for (int i = 0; i < N_ROWS; i++) begin
      logic is_min;
      is_min = (bucket[i] != EXT_INF);
      for (int j = 0; j < N_ROWS; j++)
        if (j != i && bucket[j] != EXT_INF && bucket[j] < bucket[i]) is_min = 1'b0;
      wr_en[i] = b_vld[i] && is_min;
      // +1 and MUX
      inc[i]   = bucket[i] + 32'd1;
      upd[i]   = wr_en[i] ? inc[i] : bucket[i];
      // values that have overflowed take no part in the minimum
      cand[i]  = is_ovf(upd[i], ROW_DELTA[i]) ? EXT_INF : upd[i];
    end
  end

  // MIN: comparator tree over the six candidates, 6 -> 3 -> 2 -> 1
  function automatic logic [31:0] min2(input logic [31:0] a, input logic [31:0] b);
    return (a < b) ? a : b;
  endfunction
  logic [31:0] m1 [3];
  always_comb begin
    m1[0]   = min2(cand[0], cand[1]);
    m1[1]   = min2(cand[2], cand[3]);
    m1[2]   = min2(cand[4], cand[5]);
    minval2 = min2(min2(m1[0], m1[1]), m1[2]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ready <= 1'b0;
    else        ready <= b_vld[0];
  end

  always_ff @(posedge clk) begin
    est    <= (minval2 >= 32'((1 << EST_W) - 1)) ? '1 : minval2[EST_W-1:0];
    out_id <= id_pipe[ROW_LAT-1];
  end

  assign pipe_busy = (|h_busy) | (|row_busy) | ready;

endmodule
