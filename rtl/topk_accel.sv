// topk_accel: streaming top-K flow detector, one packet per clock cycle.
//
// Each packet's 104-bit 5-tuple (flow_id, with in_valid) is inserted into a
// six-row TowerSketch with conservative update, which returns an estimate of
// the flow's packet count so far together with a 32-bit hash of the flow
// (out_id). The estimate and hash are inserted into a priority queue array
// (PQA) of R queues of S elements that keeps the flows with the largest
// estimates. At the end of an observation window, a pulse on output_req
// drains both pipelines and reads the PQA out, one queue of S {count, out_id}
// pairs per rd_valid/rd_ready transfer, R transfers in all; sorting those
// R*S entries and keeping the K largest is left to software. The same pulse
// empties the sketch, and the readout empties the PQA, so the next window
// starts clean.
//
// Latency: an estimate reaches the PQA 12 cycles after its packet, and the
// PQA updates the queue 3 cycles later. busy is high while either part is
// clearing or reading out; packets presented then are dropped. After reset,
// busy stays high for max(4096, R) cycles while the memories are zeroed.
//
// The two blocks, their connection and the bus names follow the source; the
// source's "output" input is named output_req here (output is a keyword). The
// busy output and the event strobes are this design's additions.
module topk_accel #(
  parameter int unsigned S = 6,
  parameter int unsigned R = 8192
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [103:0]      flow_id,
  input  logic              in_valid,
  input  logic              output_req,
  input  logic              rd_ready,
  output logic              rd_valid,
  output logic [S-1:0][19:0] count,
  output logic [S-1:0][31:0] out_id,
  output logic              busy,
  // event strobes
  output logic              ev_fwd,
  output logic              ev_insert,
  output logic              ev_update,
  output logic              ev_reject
);
  logic        sk_ready, sk_busy, sk_pipe_busy, pq_busy;
  logic [19:0] sk_est;
  logic [31:0] sk_id;

  tower_sketch u_sketch (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .flow_id   (flow_id),
    .clear_req (output_req),
    .ready     (sk_ready),
    .est       (sk_est),
    .out_id    (sk_id),
    .busy      (sk_busy),
    .pipe_busy (sk_pipe_busy)
  );

  pqa #(.S(S), .R(R), .EST_W(20), .HASH_W(32)) u_pqa (
    .clk           (clk),
    .rst_n         (rst_n),
    .in_valid      (sk_ready),
    .in_est        (sk_est),
    .in_id         (sk_id),
    .upstream_busy (sk_pipe_busy),
    .output_req    (output_req),
    .rd_ready      (rd_ready),
    .rd_valid      (rd_valid),
    .rd_count      (count),
    .rd_id         (out_id),
    .busy          (pq_busy),
    .ev_fwd        (ev_fwd),
    .ev_insert     (ev_insert),
    .ev_update     (ev_update),
    .ev_reject     (ev_reject)
  );

  assign busy = sk_busy | pq_busy;

endmodule
