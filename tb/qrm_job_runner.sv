// qrm_job_runner -- testbench helper: builds the accelerator for one array
// size W and runs NJOBS random jobs through it (filling probability 50 %,
// all stages enabled).  For each job it checks that the move records replay
// legally on the initial array to the final array sent, and that this final
// array equals the reference algorithm.  It reports its check and failure
// counts, the rearrangement cycles of the last job and the filled sites of a
// central TGT x TGT target, and raises finished when done.
module qrm_job_runner
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
#(
  parameter int W     = 10,
  parameter int TGT   = 6,
  parameter int NJOBS = 2
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output int   last_cycles,
  output int   last_filled,
  output bit   finished
);
  localparam int QW = W/2, NI = 4, TW = 2;
  localparam int RW = rec_w(W, NI), XW = idx_w(W), RPB = PKT_W / RW;
  localparam int NPKT = (W*W + PKT_W - 1) / PKT_W;

  logic [QW-1:0] s_en_row, s_en_col;
  logic s_axis_tvalid, s_axis_tready, s_axis_tlast;
  logic [PKT_W-1:0] s_axis_tdata, m_axis_tdata;
  logic m_axis_tvalid, m_axis_tready, m_axis_tlast, m_axis_tuser;
  logic busy, done;
  logic [15:0] n_moves, n_dropped, cycles;

  qrm_accelerator #(.W(W)) dut (.*);

  assign m_axis_tready = 1'b1;
  assign s_en_row = '1;
  assign s_en_col = '1;

  logic [PKT_W-1:0] beats [$];
  bit users [$];
  always @(posedge clk)
    if (rst_n && m_axis_tvalid && m_axis_tready) begin beats.push_back(m_axis_tdata); users.push_back(m_axis_tuser); end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL W=%0d: %s", W, what); end
  endtask

  initial begin
    mat_t a, b, fin_ref, fin_dut, qm, f;
    vec_t all;
    all = '1;
    checks = 0; failures = 0; finished = 0; last_cycles = 0; last_filled = 0;
    s_axis_tvalid = 0; s_axis_tlast = 0; s_axis_tdata = '0;
    wait (rst_n);
    for (int job = 0; job < NJOBS; job++) begin
      logic [NPKT*PKT_W-1:0] flat;
      flat = '0;
      for (int r = 0; r < 128; r++) a[r] = '0;
      for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) begin
        a[r][c] = ($urandom_range(0, 99) < 50);
        flat[r*W + c] = a[r][c];
      end
      beats.delete(); users.delete();
      for (int p = 0; p < NPKT; p++) begin
        @(negedge clk);
        s_axis_tvalid = 1; s_axis_tdata = flat[p*PKT_W +: PKT_W]; s_axis_tlast = (p == NPKT - 1);
        @(negedge clk);
        s_axis_tvalid = 0; s_axis_tlast = 0;
      end
      wait (done);
      @(negedge clk);
      @(negedge clk);
      for (int r = 0; r < 128; r++) fin_ref[r] = '0;
      for (int q = 0; q < 4; q++) begin
        qm = quad_get(a, W, q);
        f = ref_quadrant(qm, QW, NI, all, all);
        for (int i = 0; i < QW; i++) for (int j = 0; j < QW; j++)
          fin_ref[orig_row(W, q, i)][orig_col(W, q, j)] = f[i][j];
      end
      begin
        automatic int nb = 0, nrec = 0, illegal = 0, filled = 0;
        b = a;
        while (nb < beats.size() && users[nb]) nb++;
        check(beats.size() == nb + NPKT, "beat count");
        for (int i = 0; i < nb; i++)
          for (int s = 0; s < RPB; s++) begin
            automatic logic [RW-1:0] rec = beats[i][s*RW +: RW];
            if (rec == '0) continue;
            nrec++;
            if (!apply_move(b, W, rec[W + XW + 1], rec[W + XW], int'(rec[W +: XW]), vec_t'(rec[W-1:0])))
              illegal++;
          end
        check(illegal == 0, "legal moves");
        check(nrec == int'(n_moves), "record count");
        for (int r = 0; r < 128; r++) fin_dut[r] = '0;
        for (int x = 0; x < W*W; x++) fin_dut[x / W][x % W] = beats[nb + x / PKT_W][x % PKT_W];
        for (int r = 0; r < W; r++) begin
          check(fin_dut[r] == fin_ref[r], $sformatf("final row %0d vs reference", r));
          check(b[r] == fin_dut[r], $sformatf("replayed row %0d", r));
        end
        for (int r = QW - TGT/2; r < QW + TGT/2; r++)
          for (int c = QW - TGT/2; c < QW + TGT/2; c++) filled += fin_dut[r][c];
        last_cycles = int'(cycles);
        last_filled = filled;
      end
    end
    finished = 1;
  end
endmodule
