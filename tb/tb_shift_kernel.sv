// tb_shift_kernel -- self-checking test of the shift pipeline.
//
// 1. The five lines of the 10 x 10 worked example (quadrant width 5) are
//    pushed through; the column and shift-command vectors of positions 0 and
//    1 are compared with the values of that example (column 0 = 11101,
//    commands 10110; column 1 = 11110, commands 10111, bit r = line r).
// 2. Random groups, back to back and with random stage enables, are compared
//    with a reference that simulates the atoms of a line site by site
//    (fill site k from site k+1, slide everything beyond it) rather than
//    by bit shifts.
// 3. The latency from a group's first line to its first output (QW+1
//    cycles) and the one-line-per-cycle output rate are checked.
module tb_shift_kernel;
  localparam int QW = 5;
  localparam int NG = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [QW-1:0] s_en;
  logic          in_valid, in_last;
  logic [QW-1:0] in_vec;
  logic [1:0]    in_tag;
  logic          out_valid, out_last;
  logic [QW-1:0] out_vec, out_cmd, out_mov;
  logic [$clog2(QW)-1:0] out_idx;
  logic [1:0]    out_tag;

  shift_kernel #(.QW(QW), .TAG_W(2)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // output log
  logic [QW-1:0] log_vec [$], log_cmd [$], log_mov [$];
  int            log_idx [$], log_cyc [$], log_tag [$], log_last [$];
  int            in_cyc0 [$];
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      log_vec.push_back(out_vec); log_cmd.push_back(out_cmd); log_mov.push_back(out_mov);
      log_idx.push_back(int'(out_idx)); log_cyc.push_back(cyc); log_tag.push_back(int'(out_tag));
      log_last.push_back(int'(out_last));
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference: one pass over QW lines, site-by-site atom model
  typedef logic [QW-1:0] line_t;
  task automatic ref_pass(input line_t lines [QW], input line_t en,
                          output line_t col [QW], output line_t cmd [QW], output line_t mov [QW]);
    bit a [QW];
    for (int k = 0; k < QW; k++) begin col[k] = '0; cmd[k] = '0; mov[k] = '0; end
    for (int r = 0; r < QW; r++) begin
      for (int s = 0; s < QW; s++) a[s] = lines[r][s];
      for (int k = 0; k < QW; k++) begin
        if (en[k] && !a[k]) begin
          bit any = 0;
          for (int s = k + 1; s < QW; s++) any |= a[s];
          cmd[k][r] = 1'b1;
          mov[k][r] = any;
          for (int s = k; s < QW - 1; s++) a[s] = a[s+1];
          a[QW-1] = 1'b0;
        end
        col[k][r] = a[k];
      end
    end
  endtask

  line_t groups [NG][QW];
  line_t gen    [NG];

  initial begin
    s_en = '1; in_valid = 0; in_last = 0; in_vec = '0; in_tag = '0;
    // worked example, lines in pipeline order: purple, green, blue, orange, red
    groups[0][0] = 5'b11001; groups[0][1] = 5'b01000; groups[0][2] = 5'b01010;
    groups[0][3] = 5'b11011; groups[0][4] = 5'b01010;
    gen[0] = '1;
    for (int g = 1; g < NG; g++) begin
      gen[g] = (g < NG/2) ? '1 : line_t'($urandom);
      for (int r = 0; r < QW; r++) groups[g][r] = line_t'($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // groups 0..NG/2-1 back to back with all stages enabled; then groups
    // with random enables, each followed by a pause so s_en can change.
    for (int g = 0; g < NG; g++) begin
      if (g >= NG/2) begin
        @(negedge clk); in_valid = 0;
        repeat (2*QW + 2) @(negedge clk);
        s_en = gen[g];
      end
      for (int r = 0; r < QW; r++) begin
        @(negedge clk);
        in_valid = 1; in_vec = groups[g][r]; in_last = (r == QW - 1); in_tag = 2'(g);
        if (r == 0) in_cyc0.push_back(cyc);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (3*QW) @(posedge clk);

    check(log_vec.size() == NG*QW, $sformatf("output count %0d", log_vec.size()));
    for (int g = 0; g < NG && (g+1)*QW <= log_vec.size(); g++) begin
      line_t col [QW], cmd [QW], mov [QW];
      ref_pass(groups[g], gen[g], col, cmd, mov);
      for (int k = 0; k < QW; k++) begin
        automatic int n = g*QW + k;
        check(log_idx[n] == k && log_tag[n] == (g % 4) && log_last[n] == int'(k == QW-1),
              $sformatf("g%0d k%0d side band", g, k));
        check(log_vec[n] == col[k], $sformatf("g%0d column %0d: %b exp %b", g, k, log_vec[n], col[k]));
        check(log_cmd[n] == cmd[k], $sformatf("g%0d commands %0d: %b exp %b", g, k, log_cmd[n], cmd[k]));
        check(log_mov[n] == mov[k], $sformatf("g%0d moved %0d: %b exp %b", g, k, log_mov[n], mov[k]));
        check(log_cyc[n] - in_cyc0[g] == QW + 1 + k,
              $sformatf("g%0d k%0d latency %0d", g, k, log_cyc[n] - in_cyc0[g]));
      end
    end
    // values printed in the worked example
    if (log_vec.size() >= 2) begin
      check(log_vec[0] == 5'b11101, "example column 0");
      check(log_cmd[0] == 5'b10110, "example shift commands 0");
      check(log_vec[1] == 5'b11110, "example column 1");
      check(log_cmd[1] == 5'b10111, "example shift commands 1");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
