// tb_output_combination -- checks the output stage (W = 10) with a stalling
// output stream.  A job is imitated: per step, random lockstep records of the
// four quadrants (some with empty selections), then the final quadrant rows.
// The output stream must carry, in order, beats with tuser = 1 holding the
// non-empty merged records, then ceil(W*W/PKT_W) beats with tuser = 0
// holding the final array (row-major) with tlast on the last; done must
// pulse when that beat is taken, and n_moves / n_dropped must count the
// records sent and removed.  tready is low on random cycles.
module tb_output_combination;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 10, QW = W/2, NI = 4;
  localparam int RW = rec_w(W, NI), XW = idx_w(W), RPB = PKT_W / RW;
  localparam int NPKT = (W*W + PKT_W - 1) / PKT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, fin_valid, fin_last, m_tvalid, m_tready, m_tlast, m_tuser, done;
  logic h_valid [4], v_valid [4];
  logic [RW-1:0] h_rec [4], v_rec [4];
  logic [QW-1:0] fin_vec [4];
  logic [$clog2(QW)-1:0] fin_idx;
  logic [PKT_W-1:0] m_tdata;
  logic [15:0] n_moves, n_dropped;

  output_combination #(.W(W), .N_ITER(NI), .FIFO_DEPTH(32)) dut (.*);

  int checks = 0, failures = 0, stalls = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // output capture
  logic [PKT_W-1:0] beats [$];
  bit               users [$], lasts [$];
  int               done_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_tvalid && m_tready) begin beats.push_back(m_tdata); users.push_back(m_tuser); lasts.push_back(m_tlast); end
    if (m_tvalid && !m_tready) stalls++;
    if (done) begin
      done_cnt++;
      check(lasts.size() > 0 && lasts[$], "done with the last beat");
    end
  end
  always @(negedge clk) m_tready = ($urandom_range(0, 1) != 0);

  function automatic logic [W-1:0] qsel(int q, bit vert);
    logic [W-1:0] s = '0;
    bit low = vert ? (q % 2 == 0) : (q < 2);
    if ($urandom_range(0, 3) != 0)
      for (int i = 0; i < QW; i++) s[low ? i : QW + i] = 1'($urandom_range(0, 1));
    return s;
  endfunction

  initial begin
    logic [RW-1:0] exp_recs [$];
    int exp_drop;
    start = 0; fin_valid = 0; fin_last = 0; fin_idx = '0; m_tready = 1;
    for (int q = 0; q < 4; q++) begin h_valid[q] = 0; v_valid[q] = 0; h_rec[q] = '0; v_rec[q] = '0; fin_vec[q] = '0; end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 4; job++) begin
      mat_t qm [4], full;
      exp_recs.delete(); exp_drop = 0; beats.delete(); users.delete(); lasts.delete();
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int it = 0; it < NI; it++) begin
        for (int vert = 0; vert < 2; vert++) begin
          for (int k = 0; k < QW; k++) begin
            logic [W-1:0] s [4];
            @(negedge clk);
            for (int q = 0; q < 4; q++) begin
              s[q] = qsel(q, vert[0]);
              h_valid[q] = (vert == 0); v_valid[q] = (vert == 1);
              h_rec[q] = {2'(it), AXIS_H, 1'(q % 2), XW'((q % 2 == 0) ? QW-1-k : QW+k), s[q]};
              v_rec[q] = {2'(it), AXIS_V, 1'(q / 2), XW'((q < 2) ? QW-1-k : QW+k), s[q]};
            end
            // expected merged records in lane order
            if (vert == 0) begin
              if ((s[0] | s[2]) != '0) exp_recs.push_back({h_rec[0][RW-1:W], s[0] | s[2]}); else exp_drop++;
              if ((s[1] | s[3]) != '0) exp_recs.push_back({h_rec[1][RW-1:W], s[1] | s[3]}); else exp_drop++;
            end else begin
              if ((s[0] | s[1]) != '0) exp_recs.push_back({v_rec[0][RW-1:W], s[0] | s[1]}); else exp_drop++;
              if ((s[2] | s[3]) != '0) exp_recs.push_back({v_rec[2][RW-1:W], s[2] | s[3]}); else exp_drop++;
            end
          end
        end
      end
      // final rows: they come with the last vertical step in the real design;
      // here they follow right after it
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
        for (int q = 0; q < 4; q++) begin h_valid[q] = 0; v_valid[q] = 0; fin_vec[q] = qm[q][k][QW-1:0]; end
        fin_valid = 1; fin_idx = k[$clog2(QW)-1:0]; fin_last = (k == QW-1);
      end
      @(negedge clk); fin_valid = 0; fin_last = 0;
      wait (done_cnt == job + 1);
      @(negedge clk);
      // check the stream
      begin
        automatic int nb_moves = (exp_recs.size() + RPB - 1) / RPB;
        automatic int n = 0;
        check(beats.size() == nb_moves + NPKT, $sformatf("job %0d beats %0d exp %0d", job, beats.size(), nb_moves + NPKT));
        for (int b = 0; b < beats.size(); b++) begin
          check(users[b] == (b < nb_moves), $sformatf("beat %0d tuser", b));
          check(lasts[b] == (b == beats.size() - 1), $sformatf("beat %0d tlast", b));
          if (b < nb_moves) begin
            for (int s = 0; s < RPB; s++) begin
              if (n < exp_recs.size()) check(beats[b][s*RW +: RW] == exp_recs[n], $sformatf("record %0d", n));
              else check(beats[b][s*RW +: RW] == '0, "zero slot");
              n++;
            end
          end else begin
            for (int i = 0; i < PKT_W; i++) begin
              automatic int lin = (b - nb_moves) * PKT_W + i;
              if (lin < W*W) check(beats[b][i] == full[lin / W][lin % W], $sformatf("array bit %0d", lin));
            end
          end
        end
        check(int'(n_moves) == exp_recs.size(), $sformatf("n_moves %0d exp %0d", n_moves, exp_recs.size()));
        check(int'(n_dropped) == exp_drop, $sformatf("n_dropped %0d exp %0d", n_dropped, exp_drop));
      end
    end
    check(stalls > 0, "the output stream stalled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
