// pqa_update_tb: exhaustive-style random test of the combinational queue
// update. Each trial builds a sorted queue (empty elements at the bottom,
// distinct tags, counts from a small range so that ties are common), picks an
// input that is a tag already in the queue or a new one, and compares the
// result, element by element, and the changed/found/insert flags with the
// list model of the priority queue.
module pqa_update_tb;
  import topk_ref_pkg::*;

  localparam int S = 6, TAG_W = 19, CNT_W = 20;
  logic [S-1:0]            q_vld, n_vld;
  logic [S-1:0][TAG_W-1:0] q_tag, n_tag;
  logic [S-1:0][CNT_W-1:0] q_cnt, n_cnt;
  logic [TAG_W-1:0] in_tag;
  logic [CNT_W-1:0] in_est;
  logic changed, found, is_insert;
  int checks = 0, failures = 0;
  int n_case [3] = '{0, 0, 0};

  pqa_update #(.S(S), .TAG_W(TAG_W), .CNT_W(CNT_W)) dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      pqa_model m;
      int nv, maxc;
      bit [19:0] ec [];
      bit [31:0] ei [];
      int ins0, upd0;
      m = new(S, 1);
      m.q[0] = {};
      nv   = $urandom_range(0, S);
      maxc = ($urandom_range(0, 1) == 0) ? 8 : 100000;
      // ascending counts for the valid top elements
      begin
        int c [$];
        for (int j = 0; j < nv; j++) c.push_back($urandom_range(1, maxc));
        c.sort();
        for (int j = 0; j < S; j++) begin
          if (j < S - nv) begin
            q_vld[j] = 1'b0; q_tag[j] = TAG_W'($urandom()); q_cnt[j] = '0;
          end else begin
            ref_elem_t e;
            q_vld[j] = 1'b1;
            q_tag[j] = TAG_W'(j * 4099 + t * 7);     // distinct within the queue
            q_cnt[j] = CNT_W'(c[j - (S - nv)]);
            e.tag = 32'(q_tag[j]); e.cnt = q_cnt[j];
            m.q[0].push_back(e);
          end
        end
      end
      if (nv > 0 && $urandom_range(0, 1) == 0) in_tag = q_tag[$urandom_range(S - nv, S - 1)];
      else                                     in_tag = TAG_W'(32'h7ffff - t);
      in_est = CNT_W'($urandom_range(1, maxc + 1));
      ins0 = m.n_ins; upd0 = m.n_upd;
      m.insert(32'(in_tag), in_est);
      m.expect_row(0, ec, ei);
      #1;
      for (int j = 0; j < S; j++) begin
        checks++;
        if ((n_vld[j] ? n_cnt[j] : '0) !== ec[j] || (ec[j] != 0 && n_tag[j] !== TAG_W'(ei[j]))) begin
          failures++;
          if (failures < 10)
            $display("trial %0d elem %0d got %0d/%h exp %0d/%h", t, j, n_cnt[j], n_tag[j], ec[j], ei[j]);
        end
      end
      checks += 2;
      if (changed !== (m.n_ins != ins0 || m.n_upd != upd0)) failures++;
      if (is_insert !== (m.n_ins != ins0)) failures++;
      if (m.n_ins != ins0)      n_case[0]++;
      else if (m.n_upd != upd0) n_case[1]++;
      else                      n_case[2]++;
    end
    for (int c = 0; c < 3; c++) begin
      checks++;
      if (n_case[c] == 0) failures++;
    end
    $display("case I %0d, case II %0d, case III %0d", n_case[0], n_case[1], n_case[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
