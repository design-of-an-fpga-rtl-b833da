// tb_quadrant_processing -- checks one quadrant pipeline (NW, W = 10, four
// iterations).  Random quadrants are fed as rows; the reference runs four
// row-wise + column-wise passes site by site.  Checked: the final rows; the
// moved-line selection of every horizontal and vertical record of every
// iteration (mapped back to quadrant lines); the record order (iteration by
// iteration, horizontal before vertical, steps in order); the loop-back
// (all four iteration tags seen); and the latency: final row k appears
// 2*N_ITER*(QW+1)+k cycles after the first input row.  Half of the jobs use
// random stage enables.
module tb_quadrant_processing;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 10, QW = W/2, NI = 4;
  localparam int RW = rec_w(W, NI), XW = idx_w(W);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [QW-1:0] s_en_row, s_en_col, in_vec, fin_vec;
  logic in_valid, in_last, fin_valid, fin_last;
  logic [$clog2(QW)-1:0] fin_idx;
  logic h_rec_valid, v_rec_valid;
  logic [RW-1:0] h_rec, v_rec;

  quadrant_processing #(.W(W), .N_ITER(NI), .QUAD(QUAD_NW)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [RW-1:0] recs [$];
  int            rec_cyc [$];
  logic [QW-1:0] fins [$];
  int            fin_cyc [$];
  int            t0;
  always @(posedge clk) if (rst_n) begin
    if (h_rec_valid) begin recs.push_back(h_rec); rec_cyc.push_back(cyc); end
    if (v_rec_valid) begin recs.push_back(v_rec); rec_cyc.push_back(cyc); end
    if (fin_valid) begin
      fins.push_back(fin_vec); fin_cyc.push_back(cyc);
      check(int'(fin_idx) == fins.size() - 1 && fin_last == (fins.size() == QW), "final side band");
    end
  end

  // NW: local line r <-> original row/column QW-1-r
  function automatic logic [QW-1:0] local_sel(logic [RW-1:0] rec);
    for (int r = 0; r < QW; r++) local_sel[r] = rec[QW-1-r];
  endfunction

  initial begin
    mat_t m, c1, c2, cmd, mov1, mov2, exp_fin;
    vec_t er, ec;
    s_en_row = '1; s_en_col = '1; in_valid = 0; in_last = 0; in_vec = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 30; job++) begin
      for (int r = 0; r < 128; r++) m[r] = '0;
      for (int r = 0; r < QW; r++) for (int c = 0; c < QW; c++) m[r][c] = ($urandom_range(0, 99) < 50);
      er = (job < 15) ? '1 : vec_t'($urandom); ec = (job < 15) ? '1 : vec_t'($urandom);
      s_en_row = er[QW-1:0]; s_en_col = ec[QW-1:0];
      recs.delete(); rec_cyc.delete(); fins.delete(); fin_cyc.delete();
      for (int r = 0; r < QW; r++) begin
        @(negedge clk);
        in_valid = 1; in_vec = m[r][QW-1:0]; in_last = (r == QW-1);
        if (r == 0) t0 = cyc;
      end
      @(negedge clk); in_valid = 0;
      repeat (2*NI*(QW+1) + 2*QW) @(negedge clk);
      // reference, iteration by iteration
      check(recs.size() == 2*NI*QW, $sformatf("record count %0d", recs.size()));
      check(fins.size() == QW, "final row count");
      for (int it = 0; it < NI; it++) begin
        ref_pass(m, QW, er, c1, cmd, mov1);
        ref_pass(c1, QW, ec, c2, cmd, mov2);
        m = c2;
        for (int k = 0; k < QW && recs.size() == 2*NI*QW; k++) begin
          automatic logic [RW-1:0] hr = recs[it*2*QW + k], vr = recs[it*2*QW + QW + k];
          check(int'(hr[RW-1 -: 2]) == it && hr[RW-3] == AXIS_H && int'(hr[W +: XW]) == QW-1-k,
                $sformatf("job %0d it %0d H header k=%0d", job, it, k));
          check(local_sel(hr) == mov1[k][QW-1:0], $sformatf("job %0d it %0d H moved k=%0d", job, it, k));
          check(int'(vr[RW-1 -: 2]) == it && vr[RW-3] == AXIS_V && int'(vr[W +: XW]) == QW-1-k,
                $sformatf("job %0d it %0d V header k=%0d", job, it, k));
          check(local_sel(vr) == mov2[k][QW-1:0], $sformatf("job %0d it %0d V moved k=%0d", job, it, k));
        end
      end
      // The column-wise pass outputs site k of every column, i.e. row k:
      // m[k] is final row k as a vector over the columns.
      for (int k = 0; k < QW && fins.size() == QW; k++) begin
        check(fins[k] == m[k][QW-1:0], $sformatf("job %0d final row %0d: %b exp %b", job, k, fins[k], m[k][QW-1:0]));
        check(fin_cyc[k] - t0 == 2*NI*(QW+1) + k, $sformatf("final row %0d latency %0d", k, fin_cyc[k] - t0));
      end
    end
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
