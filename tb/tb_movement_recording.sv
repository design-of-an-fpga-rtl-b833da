// tb_movement_recording -- checks the recording units of all four quadrants
// (W = 10).  Random "moved" vectors are applied; each record must carry the
// iteration, axis, side and the original index of the line being filled,
// and select exactly the original rows / columns whose quadrant-local lines
// moved.  The expected record is checked by its meaning: applying it to an
// array in original coordinates with a reference move model must move the
// same atoms as moving the quadrant-local lines.
module tb_movement_recording;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 10, QW = W/2, NI = 4;
  localparam int RW = rec_w(W, NI), XW = idx_w(W);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic h_valid, v_valid;
  logic [QW-1:0] h_mov, v_mov;
  logic [$clog2(QW)-1:0] h_idx, v_idx;
  logic [1:0] h_tag, v_tag;
  logic h_rec_valid [4], v_rec_valid [4];
  logic [RW-1:0] h_rec [4], v_rec [4];

  for (genvar q = 0; q < 4; q++) begin : g
    movement_recording #(.W(W), .N_ITER(NI), .QUAD(quad_e'(q))) dut (
      .clk, .rst_n, .h_valid, .h_mov, .h_idx, .h_tag, .v_valid, .v_mov, .v_idx, .v_tag,
      .h_rec_valid(h_rec_valid[q]), .h_rec(h_rec[q]), .v_rec_valid(v_rec_valid[q]), .v_rec(v_rec[q]));
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // A record is right when, applied to a full array, it slides exactly the
  // selected quadrant lines by one site beyond site k toward the centre.
  task automatic check_rec(input int q, input bit vert, input logic [RW-1:0] rec,
                           input int k, input logic [QW-1:0] mov, input int tag);
    mat_t a, b, qa, qb;
    bit ok;
    int  line;
    logic [W-1:0] sel;
    // fields
    check(int'(rec[RW-1 -: 2]) == tag, "tag");
    check(rec[RW-3] == vert, "axis");
    check(rec[RW-4] == (vert ? (q >= 2) : (q % 2 == 1)), "side");
    line = int'(rec[W +: XW]);
    sel  = rec[W-1:0];
    // build an array with site k of every quadrant line empty, apply the record
    for (int r = 0; r < 128; r++) a[r] = '0;
    for (int r = 0; r < W; r++) for (int c = 0; c < W; c++) a[r][c] = 1'($urandom_range(0, 1));
    qa = quad_get(a, W, q);
    for (int i = 0; i < QW; i++) begin
      if (vert) begin a[orig_row(W, q, k)][orig_col(W, q, i)] = 0; end
      else      begin a[orig_row(W, q, i)][orig_col(W, q, k)] = 0; end
    end
    qa = quad_get(a, W, q);
    b = a;
    ok = apply_move(b, W, vert, rec[RW-4], line, vec_t'(sel));
    check(ok, $sformatf("q%0d move onto an empty line", q));
    qb = quad_get(b, W, q);
    // expected: quadrant lines with mov set slide by one beyond site k
    for (int i = 0; i < QW; i++) begin
      for (int s = 0; s < QW; s++) begin
        bit v_bef, v_aft, exp;
        v_bef = vert ? qa[s][i] : qa[i][s];
        v_aft  = vert ? qb[s][i] : qb[i][s];
        if (!mov[i] || s < k) exp = v_bef;
        else if (s == QW-1) exp = 0;
        else exp = vert ? qa[s+1][i] : qa[i][s+1];
        check(v_aft == exp, $sformatf("q%0d %s line %0d site %0d", q, vert ? "V" : "H", i, s));
      end
    end
  endtask

  initial begin
    h_valid = 0; v_valid = 0; h_mov = '0; v_mov = '0; h_idx = '0; v_idx = '0; h_tag = '0; v_tag = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      automatic int hk = $urandom_range(0, QW-1), vk = $urandom_range(0, QW-1);
      automatic logic [QW-1:0] hm = QW'($urandom), vm = QW'($urandom);
      automatic int ht = $urandom_range(0, 3), vt = $urandom_range(0, 3);
      @(negedge clk);
      h_valid = 1; h_mov = hm; h_idx = hk[$clog2(QW)-1:0]; h_tag = 2'(ht);
      v_valid = (t % 2 == 0); v_mov = vm; v_idx = vk[$clog2(QW)-1:0]; v_tag = 2'(vt);
      @(negedge clk);
      h_valid = 0; v_valid = 0;
      for (int q = 0; q < 4; q++) begin
        check(h_rec_valid[q] && v_rec_valid[q] == (t % 2 == 0), "valid");
        check_rec(q, 0, h_rec[q], hk, hm, ht);
        if (t % 2 == 0) check_rec(q, 1, v_rec[q], vk, vm, vt);
      end
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
