// pqa: priority queue array, R queues of S elements each, holding the
// largest flows seen in an observation window.
//
// Storage is S memory banks of R entries; entry r of every bank together
// forms queue r. An element is {valid, tag, count}. The queue of a flow is
// chosen by the low log2(R) bits of its 32-bit hash (in_id); the remaining
// TAG_W bits are the tag. At the default R = 8192 an element is 1+19+20 = 40
// bits, and each bank is 8192 x 40 bits (two 4K x 72 UltraRAMs, twelve for the
// six banks).
//
// Insertion pipeline, one insertion per cycle, no stall:
//   R0  queue index to the banks
//   R1  bank address register
//   U   bank data; forwarding; pqa_update computes the new queue
//   W   the new queue, if it changed, is written to the S banks
// A queue read in R0 misses the writes of the two insertions just before it
// (one is in W, the other reached the array on the same edge as the read).
// U therefore takes the queue from the W register or from the write of the
// previous cycle when their index matches (two-cycle forwarding).
//
// Control FSM:
//   CLEAR   after reset: zeros to all R entries, one per cycle
//   INSERT  in_valid inserts {in_id, in_est}
//   DRAIN   after output_req: wait until upstream_busy is low and the
//           insertion pipeline is empty
//   READ    read queue 0..R-1, one per cycle while the output FIFO has room,
//           write zeros behind each read; rd_valid/rd_ready handshake on a
//           4-entry FIFO; back to INSERT when the last queue has left
// Readout shows one whole queue per transfer: rd_count[j] and rd_id[j] for
// j = 0..S-1 (rd_id = {tag, queue index}, the flow's 32-bit hash; an empty
// element reads count 0). Insertions that arrive in CLEAR or READ are dropped;
// those still coming out of the sketch during DRAIN are kept.
//
// The bank organisation, the 2-read/1-update/1-write pipeline with two-cycle
// forwarding, the FSM that switches to reading, the queue-per-cycle readout
// with clearing and the bus names follow the source. The reset-time clear,
// the DRAIN state, the FIFO and the readout ordering are this design's.
module pqa #(
  parameter int unsigned S      = 6,
  parameter int unsigned R      = 8192,
  parameter int unsigned EST_W  = 20,
  parameter int unsigned HASH_W = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // insertion (from the sketch)
  input  logic                     in_valid,
  input  logic [EST_W-1:0]         in_est,
  input  logic [HASH_W-1:0]        in_id,
  input  logic                     upstream_busy,
  // readout
  input  logic                     output_req,
  input  logic                     rd_ready,
  output logic                     rd_valid,
  output logic [S-1:0][EST_W-1:0]  rd_count,
  output logic [S-1:0][HASH_W-1:0] rd_id,
  output logic                     busy,       // not accepting insertions
  // event strobes, for monitoring
  output logic                     ev_fwd,     // U used a forwarded queue
  output logic                     ev_insert,  // case I
  output logic                     ev_update,  // case II
  output logic                     ev_reject   // case III
);
  localparam int unsigned IDX_W = $clog2(R);
  localparam int unsigned TAG_W = HASH_W - IDX_W;
  localparam int unsigned EL_W  = 1 + TAG_W + EST_W;
  localparam int unsigned FIFO_D = 4;

  typedef struct packed {
    logic             vld;
    logic [TAG_W-1:0] tag;
    logic [EST_W-1:0] cnt;
  } elem_t;

  typedef struct packed {
    logic             vld;
    logic [IDX_W-1:0] idx;
    logic [TAG_W-1:0] tag;
    logic [EST_W-1:0] est;
  } ins_t;

  typedef struct packed {
    logic               vld;
    logic [IDX_W-1:0]   idx;
    logic [S-1:0][EL_W-1:0] q;
  } wr_t;

  typedef enum logic [2:0] {S_CLEAR, S_INSERT, S_DRAIN, S_READ} state_t;
  state_t state;

  // ---------------- control ---------------------------------------------------
  logic [IDX_W-1:0] clr_idx;       // CLEAR sweep
  logic [IDX_W-1:0] rd_idx;        // READ: next queue to read
  logic             rd_issued_all;
  logic             rd_issue;
  logic [1:0]       rp_vld;        // reads in flight (R1, U)
  logic [IDX_W-1:0] rp_idx [2];
  logic [$clog2(FIFO_D+1)-1:0] f_cnt;
  logic             f_pop;
  logic             ins_busy;

  // ---------------- insertion pipeline ----------------------------------------
  ins_t r0, r1, u;
  wr_t  w_q, w_q2, u_wr;

  always_comb begin
    r0.vld = in_valid && (state == S_INSERT || state == S_DRAIN);
    r0.idx = in_id[IDX_W-1:0];
    r0.tag = in_id[HASH_W-1:IDX_W];
    r0.est = in_est;
  end

  // ---------------- banks -------------------------------------------------------
  logic             b_we;
  logic [IDX_W-1:0] b_waddr, b_raddr;
  logic [S-1:0][EL_W-1:0] b_wdata, b_rdata;

  always_comb begin
    b_raddr = (state == S_READ) ? rd_idx : r0.idx;
    if (state == S_CLEAR) begin
      b_we = 1'b1;  b_waddr = clr_idx;    b_wdata = '0;
    end else if (state == S_READ) begin
      b_we = rp_vld[1];  b_waddr = rp_idx[1];  b_wdata = '0;
    end else begin
      b_we = w_q.vld;  b_waddr = w_q.idx;  b_wdata = w_q.q;
    end
  end

  for (genvar g = 0; g < S; g++) begin : g_bank
    ram_bank #(.DEPTH(R), .WIDTH(EL_W)) u_bank (
      .clk   (clk),
      .we    (b_we),
      .waddr (b_waddr),
      .wdata (b_wdata[g]),
      .raddr (b_raddr),
      .rdata (b_rdata[g])
    );
  end

  // ---------------- stage U ---------------------------------------------------------
  logic [S-1:0][EL_W-1:0] u_q;
  logic                   u_fwd;
  logic [S-1:0]           q_vld, n_vld;
  logic [S-1:0][TAG_W-1:0] q_tag, n_tag;
  logic [S-1:0][EST_W-1:0] q_cnt, n_cnt;
  logic u_changed, u_found, u_ins;

  always_comb begin
    u_fwd = 1'b1;
    if (w_q.vld && w_q.idx == u.idx)        u_q = w_q.q;
    else if (w_q2.vld && w_q2.idx == u.idx) u_q = w_q2.q;
    else begin
      u_q   = b_rdata;
      u_fwd = 1'b0;
    end
    for (int j = 0; j < S; j++) begin
      elem_t e;
      e = elem_t'(u_q[j]);
      q_vld[j] = e.vld;
      q_tag[j] = e.tag;
      q_cnt[j] = e.cnt;
    end
  end

  pqa_update #(.S(S), .TAG_W(TAG_W), .CNT_W(EST_W)) u_upd (
    .q_vld     (q_vld),
    .q_tag     (q_tag),
    .q_cnt     (q_cnt),
    .in_tag    (u.tag),
    .in_est    (u.est),
    .n_vld     (n_vld),
    .n_tag     (n_tag),
    .n_cnt     (n_cnt),
    .changed   (u_changed),
    .found     (u_found),
    .is_insert (u_ins)
  );

  always_comb begin
    u_wr.vld = u.vld && u_changed;
    u_wr.idx = u.idx;
    for (int j = 0; j < S; j++) u_wr.q[j] = {n_vld[j], n_tag[j], n_cnt[j]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r1   <= '0;
      u    <= '0;
      w_q  <= '0;
      w_q2 <= '0;
    end else begin
      r1   <= r0;
      u    <= r1;
      w_q  <= u_wr;
      w_q2 <= w_q;
    end
  end

  assign ins_busy  = r1.vld | u.vld | w_q.vld;
  assign ev_fwd    = u.vld && u_fwd;
  assign ev_insert = u.vld && u_ins;
  assign ev_update = u.vld && u_changed && u_found;
  assign ev_reject = u.vld && !u_changed;

  // ---------------- FSM -------------------------------------------------------------
  logic out_pending;   // output_req seen while clearing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_CLEAR;
      clr_idx       <= '0;
      rd_idx        <= '0;
      rd_issued_all <= 1'b0;
      out_pending   <= 1'b0;
    end else begin
      if (output_req && state != S_INSERT) out_pending <= 1'b1;
      unique case (state)
        S_CLEAR: begin
          clr_idx <= clr_idx + 1'b1;
          if (&clr_idx) state <= S_INSERT;
        end
        S_INSERT: if (output_req || out_pending) begin
          state       <= S_DRAIN;
          out_pending <= 1'b0;
        end
        S_DRAIN: if (!upstream_busy && !ins_busy) begin
          state         <= S_READ;
          rd_idx        <= '0;
          rd_issued_all <= 1'b0;
        end
        S_READ: begin
          if (rd_issue) begin
            rd_idx <= rd_idx + 1'b1;
            if (rd_idx == IDX_W'(R - 1)) rd_issued_all <= 1'b1;
          end
          if (rd_issued_all && rp_vld == '0 && f_cnt == '0) state <= S_INSERT;
        end
        default: state <= S_CLEAR;
      endcase
    end
  end
  assign busy = (state != S_INSERT);

  // ---------------- readout: read, clear, FIFO -----------------------------------
  assign rd_issue = (state == S_READ) && !rd_issued_all &&
                    (32'(f_cnt) + 32'(rp_vld[0]) + 32'(rp_vld[1]) < 32'(FIFO_D));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rp_vld <= '0;
    else        rp_vld <= {rp_vld[0], rd_issue};
  end
  always_ff @(posedge clk) begin
    rp_idx[0] <= rd_idx;
    rp_idx[1] <= rp_idx[0];
  end

  logic [S-1:0][EL_W-1:0] f_q   [FIFO_D];
  logic [IDX_W-1:0]       f_idx [FIFO_D];
  logic [$clog2(FIFO_D)-1:0] f_wp, f_rp;
  logic f_push;

  assign f_push = rp_vld[1];
  assign f_pop  = rd_valid && rd_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_wp  <= '0;
      f_rp  <= '0;
      f_cnt <= '0;
    end else begin
      if (f_push) f_wp <= f_wp + 1'b1;
      if (f_pop)  f_rp <= f_rp + 1'b1;
      f_cnt <= f_cnt + f_push - f_pop;
    end
  end
  always_ff @(posedge clk) begin
    if (f_push) begin
      f_q[f_wp]   <= b_rdata;
      f_idx[f_wp] <= rp_idx[1];
    end
  end

  assign rd_valid = (f_cnt != '0);
  always_comb begin
    for (int j = 0; j < S; j++) begin
      elem_t e;
      e = elem_t'(f_q[f_rp][j]);
      rd_count[j] = e.vld ? e.cnt : '0;
      rd_id[j]    = {e.tag, f_idx[f_rp]};
    end
  end

  // ---------------- checks ------------------------------------------------------------
  a_fifo_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    f_push |-> (32'(f_cnt) < 32'(FIFO_D) || f_pop));
  a_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_valid && !rd_ready) |=> (rd_valid && $stable(rd_count) && $stable(rd_id)));
  for (genvar j = 0; j + 1 < S; j++) begin : g_sorted
    a_sorted: assert property (@(posedge clk) disable iff (!rst_n)
      u_wr.vld |-> (n_cnt[j] <= n_cnt[j+1]));
  end

endmodule
