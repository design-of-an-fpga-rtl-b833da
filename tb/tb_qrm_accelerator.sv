// tb_qrm_accelerator -- end-to-end test of the whole accelerator with every
// parameter at its default (50 x 50 array, four iterations).
//
// Each job sends a random array (filling probability about 50 %) as 1024-bit
// packets, collects the output stream and checks:
//   * stream format: move beats (tuser = 1) then the array beats, tlast last;
//   * every move record, replayed in order on the initial array with a
//     reference atom-move model, fills an empty site (is legal), and the
//     replayed array equals the final array the accelerator sends;
//   * that final array equals a reference run of the algorithm (quadrant
//     split and flip, four row-wise + column-wise passes, site by site);
//   * n_moves equals the records received; no record is empty;
//   * records of blocked stages never appear when s_en is restricted;
//   * the cycles counter equals the cycles observed from start to done.
// Mechanisms that must each happen at least once (counted, a failure if
// never): multi-packet input, all four iterations (loop-back), records
// merged from two quadrants, empty shifts removed, a stage blocked by s_en,
// a stalled output stream, a partly filled (flushed) move beat, input
// refused while busy.  The filled fraction of the central 30 x 30 target is
// reported.
module tb_qrm_accelerator;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 50, QW = W/2, NI = 4, TW = 2;
  localparam int RW = rec_w(W, NI), XW = idx_w(W), RPB = PKT_W / RW;
  localparam int NPKT = (W*W + PKT_W - 1) / PKT_W;
  localparam int NJOBS = 8;
  localparam int TGT = 30;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [QW-1:0] s_en_row, s_en_col;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [PKT_W-1:0] s_axis_tdata, m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast, m_axis_tuser;
  logic busy, done;
  logic [15:0] n_moves, n_dropped, cycles;

  qrm_accelerator dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // mechanism counters
  int m_multipkt = 0, m_iter_last = 0, m_merged = 0, m_dropped = 0, m_blocked = 0;
  int m_stall = 0, m_partial = 0, m_refused = 0;

  logic [PKT_W-1:0] beats [$];
  bit users [$], lasts [$];
  bit stall_en = 0;
  int start_cyc, done_cyc;
  bit in_job = 0;
  always @(posedge clk) if (rst_n) begin
    if (m_axis_tvalid && m_axis_tready) begin
      beats.push_back(m_axis_tdata); users.push_back(m_axis_tuser); lasts.push_back(m_axis_tlast);
    end
    if (m_axis_tvalid && !m_axis_tready) m_stall++;
    if (done) done_cyc = cyc;
  end
  always @(negedge clk) m_axis_tready = stall_en ? ($urandom_range(0, 2) != 0) : 1'b1;

  initial begin
    mat_t a, b, fin_ref, fin_dut, qm;
    vec_t er, ec;
    real fill_sum;
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0; s_en_row = '1; s_en_col = '1;
    fill_sum = 0.0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int job = 0; job < NJOBS; job++) begin
      logic [NPKT*PKT_W-1:0] flat;
      // job 0..4 all stages enabled; 5..6 shifting blocked beyond some site;
      // jobs 3.. stall the output stream
      er = '1; ec = '1;
      if (job >= 5 && job < 7) begin
        er = '0; ec = '0;
        er[QW-1:0] = (QW)'((1 << $urandom_range(QW/2, QW-2)) - 1);
        ec[QW-1:0] = (QW)'((1 << $urandom_range(QW/2, QW-2)) - 1);
      end
      s_en_row = er[QW-1:0]; s_en_col = ec[QW-1:0];
      stall_en = (job >= 3);
      flat = '0;
      for (int r = 0; r < 128; r++) a[r] = '0;
      for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) begin
        a[r][c] = ($urandom_range(0, 99) < 50);
        flat[r*W + c] = a[r][c];
      end
      beats.delete(); users.delete(); lasts.delete();
      for (int p = 0; p < NPKT; p++) begin
        @(negedge clk);
        check(s_axis_tready, "input accepted when idle");
        s_axis_tvalid = 1; s_axis_tdata = flat[p*PKT_W +: PKT_W]; s_axis_tlast = (p == NPKT - 1);
        @(negedge clk);
        s_axis_tvalid = 0; s_axis_tlast = 0;
      end
      if (NPKT > 1) m_multipkt++;
      start_cyc = cyc;
      // offer the next array early: it must be refused while busy
      @(negedge clk);
      if (!s_axis_tready && busy) m_refused++;
      wait (done);
      @(negedge clk);
      @(negedge clk);

      // reference final array
      for (int r = 0; r < 128; r++) fin_ref[r] = '0;
      for (int q = 0; q < 4; q++) begin
        mat_t f;
        qm = quad_get(a, W, q);
        f = ref_quadrant(qm, QW, NI, er, ec);
        for (int i = 0; i < QW; i++) for (int j = 0; j < QW; j++)
          fin_ref[orig_row(W, q, i)][orig_col(W, q, j)] = f[i][j];
      end

      // decode the stream
      begin
        automatic int nb = 0, nrec = 0, illegal = 0;
        automatic bit tags_seen [4] = '{default: 0};
        b = a;
        while (nb < beats.size() && users[nb]) nb++;
        check(beats.size() == nb + NPKT, $sformatf("job %0d: %0d beats, %0d move beats", job, beats.size(), nb));
        for (int i = 0; i < beats.size(); i++) check(lasts[i] == (i == beats.size() - 1), "tlast position");
        for (int i = 0; i < nb; i++) begin
          for (int s = 0; s < RPB; s++) begin
            automatic logic [RW-1:0] rec = beats[i][s*RW +: RW];
            automatic logic [W-1:0] sel = rec[W-1:0];
            automatic int line = int'(rec[W +: XW]);
            automatic bit axis = rec[W + XW + 1], side = rec[W + XW];
            automatic int tag = int'(rec[RW-1 -: TW]);
            automatic int k = (axis ? (side ? line - QW : QW - 1 - line) : (side ? line - QW : QW - 1 - line));
            if (rec == '0) begin
              if (i == nb - 1) m_partial++;
              continue;
            end
            nrec++;
            tags_seen[tag] = 1;
            if (sel[QW-1:0] != '0 && sel[W-1:QW] != '0) m_merged++;
            check(axis ? ec[k] : er[k], $sformatf("job %0d: move at blocked site %0d", job, k));
            if (!apply_move(b, W, axis, side, line, vec_t'(sel))) illegal++;
          end
        end
        check(illegal == 0, $sformatf("job %0d: %0d moves onto occupied sites", job, illegal));
        check(nrec == int'(n_moves), $sformatf("job %0d: %0d records, n_moves %0d", job, nrec, n_moves));
        if (tags_seen[NI-1]) m_iter_last++;
        if (n_dropped != 0) m_dropped++;
        if (er != '1) m_blocked++;
        // final array from the stream
        for (int r = 0; r < 128; r++) fin_dut[r] = '0;
        for (int x = 0; x < W*W; x++) fin_dut[x / W][x % W] = beats[nb + x / PKT_W][x % PKT_W];
        for (int r = 0; r < W; r++) begin
          check(fin_dut[r] == fin_ref[r], $sformatf("job %0d: final row %0d differs from reference", job, r));
          check(b[r] == fin_dut[r], $sformatf("job %0d: replayed row %0d differs from final", job, r));
        end
        check(int'(cycles) == done_cyc - start_cyc + 1 || int'(cycles) == done_cyc - start_cyc,
              $sformatf("cycles %0d observed %0d", cycles, done_cyc - start_cyc));
        begin
          automatic int filled = 0;
          for (int r = QW - TGT/2; r < QW + TGT/2; r++)
            for (int c = QW - TGT/2; c < QW + TGT/2; c++) filled += fin_dut[r][c];
          fill_sum += real'(filled) / real'(TGT*TGT);
          $display("job %0d: %0d moves, %0d empty removed, %0d cycles (%.2f us at 250 MHz), target %0d/%0d filled",
                   job, n_moves, n_dropped, cycles, real'(cycles) / 250.0, filled, TGT*TGT);
        end
      end
    end
    $display("mechanisms: multi-packet %0d, last iteration %0d, merged %0d, empty removed %0d, blocked %0d, stalls %0d, partial beat %0d, refused %0d",
             m_multipkt, m_iter_last, m_merged, m_dropped, m_blocked, m_stall, m_partial, m_refused);
    check(m_multipkt > 0, "multi-packet input");
    check(m_iter_last > 0, "iteration loop-back");
    check(m_merged > 0, "merged quadrant records");
    check(m_dropped > 0, "empty shifts removed");
    check(m_blocked > 0, "s_en blocking");
    check(m_stall > 0, "output stall");
    check(m_partial > 0, "flushed partial move beat");
    check(m_refused > 0, "input refused while busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
