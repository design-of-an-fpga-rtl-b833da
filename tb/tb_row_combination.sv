// tb_row_combination -- checks the row combination unit (W = 10).
// Random step records of the four quadrants are applied in lockstep, with
// empty selections made frequent.  Expected: west = NW|SW and east = NE|SE
// for horizontal records, north = NW|NE and south = SW|SE for vertical ones,
// headers kept, and a merged record with an empty selection dropped and
// flagged instead of sent.  Then random final quadrants are streamed in and
// the rebuilt array must equal the quadrants placed back by the reference
// mapping, with final_done one cycle after the last row.
module tb_row_combination;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 10, QW = W/2, NI = 4;
  localparam int RW = rec_w(W, NI), XW = idx_w(W);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_valid [4], v_valid [4], m_valid [4], m_drop [4];
  logic [RW-1:0] h_rec [4], v_rec [4], m_rec [4];
  logic fin_valid, fin_last, final_done;
  logic [QW-1:0] fin_vec [4];
  logic [$clog2(QW)-1:0] fin_idx;
  logic [W*W-1:0] final_bits;

  row_combination #(.W(W), .N_ITER(NI)) dut (.*);

  int checks = 0, failures = 0, n_drop = 0, n_sent = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // random selection of the lines of quadrant q (original numbering)
  function automatic logic [W-1:0] qsel(int q, bit vert);
    logic [W-1:0] s = '0;
    bit low = vert ? (q % 2 == 0) : (q < 2);   // west columns / north rows
    if ($urandom_range(0, 2) != 0)
      for (int i = 0; i < QW; i++) s[low ? i : QW + i] = 1'($urandom_range(0, 1));
    return s;
  endfunction

  initial begin
    mat_t qm [4];
    logic [W-1:0] hs [4], vs [4];
    int tag, hk, vk;
    for (int q = 0; q < 4; q++) begin h_valid[q] = 0; v_valid[q] = 0; h_rec[q] = '0; v_rec[q] = '0; fin_vec[q] = '0; end
    fin_valid = 0; fin_last = 0; fin_idx = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      tag = $urandom_range(0, 3); hk = $urandom_range(0, QW-1); vk = $urandom_range(0, QW-1);
      @(negedge clk);
      for (int q = 0; q < 4; q++) begin
        hs[q] = qsel(q, 0); vs[q] = qsel(q, 1);
        h_valid[q] = 1; v_valid[q] = (t % 3 != 0);
        h_rec[q] = {2'(tag), AXIS_H, 1'(q % 2), XW'((q % 2 == 0) ? QW-1-hk : QW+hk), hs[q]};
        v_rec[q] = {2'(tag), AXIS_V, 1'(q / 2), XW'((q < 2) ? QW-1-vk : QW+vk), vs[q]};
      end
      @(negedge clk);
      for (int q = 0; q < 4; q++) begin h_valid[q] = 0; v_valid[q] = 0; end
      begin
        logic [W-1:0] exp_sel [4];
        logic [RW-1:0] hdr [4];
        bit present [4];
        exp_sel[0] = hs[QUAD_NW] | hs[QUAD_SW]; hdr[0] = h_rec[QUAD_NW]; present[0] = 1;
        exp_sel[1] = hs[QUAD_NE] | hs[QUAD_SE]; hdr[1] = h_rec[QUAD_NE]; present[1] = 1;
        exp_sel[2] = vs[QUAD_NW] | vs[QUAD_NE]; hdr[2] = v_rec[QUAD_NW]; present[2] = (t % 3 != 0);
        exp_sel[3] = vs[QUAD_SW] | vs[QUAD_SE]; hdr[3] = v_rec[QUAD_SW]; present[3] = (t % 3 != 0);
        for (int l = 0; l < 4; l++) begin
          automatic bit send = present[l] && exp_sel[l] != '0;
          check(m_valid[l] == send, $sformatf("t%0d lane %0d valid", t, l));
          check(m_drop[l] == (present[l] && !send), $sformatf("t%0d lane %0d drop", t, l));
          if (send) begin
            check(m_rec[l] == {hdr[l][RW-1:W], exp_sel[l]}, $sformatf("t%0d lane %0d record", t, l));
            n_sent++;
          end
          if (present[l] && !send) n_drop++;
        end
      end
    end
    check(n_drop > 10 && n_sent > 100, "both merged and dropped records occurred");
    // final array
    for (int job = 0; job < 3; job++) begin
      mat_t full;
      for (int q = 0; q < 4; q++) begin
        for (int r = 0; r < 128; r++) qm[q][r] = '0;
        for (int i = 0; i < QW; i++) for (int j = 0; j < QW; j++) qm[q][i][j] = 1'($urandom_range(0, 1));
      end
      for (int r = 0; r < 128; r++) full[r] = '0;
      for (int q = 0; q < 4; q++)
        for (int i = 0; i < QW; i++) for (int j = 0; j < QW; j++)
          full[orig_row(W, q, i)][orig_col(W, q, j)] = qm[q][i][j];
      for (int k = 0; k < QW; k++) begin
        @(negedge clk);
        fin_valid = 1; fin_idx = k[$clog2(QW)-1:0]; fin_last = (k == QW-1);
        for (int q = 0; q < 4; q++) fin_vec[q] = qm[q][k][QW-1:0];
      end
      @(negedge clk); fin_valid = 0; fin_last = 0;
      check(final_done, "final_done after the last row");
      for (int r = 0; r < W; r++)
        for (int c = 0; c < W; c++)
          check(final_bits[r*W + c] == full[r][c], $sformatf("final (%0d,%0d)", r, c));
      @(negedge clk);
      check(!final_done, "final_done is a pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
