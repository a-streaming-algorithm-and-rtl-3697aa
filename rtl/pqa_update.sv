// pqa_update: combinational update of one S-element priority queue.
//
// The queue is kept sorted by frequency with the lowest count in element 0
// and the highest in element S-1; each element has a valid flag, a tag (the
// flow's hash bits above the queue index) and a count. An incoming {in_tag,
// in_est} is handled in the three cases of the source:
//   I   tag absent, in_est greater than the lowest count: insert it and
//       discard the lowest element;
//   II  tag present with a lower count: raise its count and move it up;
//   III otherwise: leave the queue unchanged (also when the tag is present
//       with an equal or higher count).
// Two thermometer codes steer one multiplexer per element:
//   eq_cnt[j] = in_est < cnt[j]          (the input is lower than element j)
//   eq_tag[j] = tag found at or below j  (all ones when the tag is absent)
// shift = eq_tag ^ eq_cnt marks the elements that change. Element j takes the
// input where shift[j] is set and shift[j+1] is not (the insertion point, the
// 1-to-0 transition of eq_cnt), the element from its right neighbour j+1
// where both are set, and keeps its own value otherwise.
//
// The thermometer/XOR scheme is the source's. The direction (element S-1
// holds the highest count, so elements move in from the right) follows the
// source's hardware description; its algorithm listing numbers the queue the
// other way round, which does not change the result. The valid flag, which
// keeps empty elements from matching a tag, is this design's addition.
module pqa_update #(
  parameter int unsigned S     = 6,
  parameter int unsigned TAG_W = 19,
  parameter int unsigned CNT_W = 20
) (
  input  logic [S-1:0]            q_vld,
  input  logic [S-1:0][TAG_W-1:0] q_tag,
  input  logic [S-1:0][CNT_W-1:0] q_cnt,
  input  logic [TAG_W-1:0]        in_tag,
  input  logic [CNT_W-1:0]        in_est,
  output logic [S-1:0]            n_vld,
  output logic [S-1:0][TAG_W-1:0] n_tag,
  output logic [S-1:0][CNT_W-1:0] n_cnt,
  output logic                    changed,   // the queue must be written back
  output logic                    found,     // the tag was in the queue
  output logic                    is_insert  // case I happened
);
  typedef enum logic [1:0] {KEEP, TAKE_IN, TAKE_RIGHT} msel_t;

  logic [S-1:0] match, eq_tag, eq_cnt, shift;
  logic [CNT_W-1:0] found_cnt;
  msel_t msel [S];

  always_comb begin
    for (int j = 0; j < S; j++) begin
      match[j]  = q_vld[j] && (q_tag[j] == in_tag);
      eq_cnt[j] = q_vld[j] && (in_est < q_cnt[j]);
    end
    found     = |match;
    found_cnt = '0;
    for (int j = 0; j < S; j++)
      if (match[j]) found_cnt = q_cnt[j];
    // thermometer: ones from the matching element upwards
    begin
      logic acc;
      acc = !found;
      for (int j = 0; j < S; j++) begin
        acc       = acc || match[j];
        eq_tag[j] = acc;
      end
    end

    if (found) changed = in_est > found_cnt;
    else       changed = !q_vld[0] || (in_est > q_cnt[0]);
    is_insert = changed && !found;

    shift = changed ? (eq_tag ^ eq_cnt) : '0;

    for (int j = 0; j < S; j++) begin
      if (!shift[j])                         msel[j] = KEEP;
      else if (j == S - 1 || !shift[j + 1])  msel[j] = TAKE_IN;
      else                                   msel[j] = TAKE_RIGHT;
    end

    for (int j = 0; j < S; j++) begin
      unique case (msel[j])
        TAKE_IN: begin
          n_vld[j] = 1'b1;
          n_tag[j] = in_tag;
          n_cnt[j] = in_est;
        end
        TAKE_RIGHT: begin
          n_vld[j] = q_vld[(j + 1) % S];
          n_tag[j] = q_tag[(j + 1) % S];
          n_cnt[j] = q_cnt[(j + 1) % S];
        end
        default: begin
          n_vld[j] = q_vld[j];
          n_tag[j] = q_tag[j];
          n_cnt[j] = q_cnt[j];
        end
      endcase
    end
  end

endmodule
