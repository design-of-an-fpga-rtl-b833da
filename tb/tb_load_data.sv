// tb_load_data -- checks the load-data stage at the default array size.
// Random arrays are sent as PKT_W-bit packets with random idle cycles; after
// the last packet the stage must stop accepting input, stream the four
// mirrored quadrants (one row each per cycle, W/2 consecutive cycles,
// starting two cycles after the last packet), hold until released, and then
// accept the next array.
module tb_load_data;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 50, QW = W/2;
  localparam int NPKT = (W*W + PKT_W - 1) / PKT_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic s_tvalid, s_tready, s_tlast, release_i, busy, start_pulse, q_valid, q_last;
  logic [PKT_W-1:0] s_tdata;
  logic [QW-1:0] q_vec [4];

  load_data #(.W(W)) dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  mat_t a, qm [4];
  logic [NPKT*PKT_W-1:0] flat;
  int rows_seen, last_pkt_cyc, first_row_cyc;

  always @(posedge clk) if (rst_n) begin
    if (q_valid) begin
      if (rows_seen == 0) first_row_cyc = cyc;
      for (int q = 0; q < 4; q++)
        check(q_vec[q] == qm[q][rows_seen][QW-1:0], $sformatf("q%0d row %0d", q, rows_seen));
      check(q_last == (rows_seen == QW-1), "q_last");
      rows_seen++;
    end
  end

  initial begin
    s_tvalid = 0; s_tlast = 0; s_tdata = '0; release_i = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 4; t++) begin
      flat = '0;
      for (int r = 0; r < W; r++) begin
        a[r] = '0;
        for (int c = 0; c < W; c++) begin
          a[r][c] = 1'($urandom_range(0, 1));
          flat[r*W + c] = a[r][c];
        end
      end
      for (int q = 0; q < 4; q++) qm[q] = quad_get(a, W, q);
      rows_seen = 0;
      @(negedge clk);
      check(s_tready && !busy, "ready before a job");
      for (int p = 0; p < NPKT; p++) begin
        repeat ($urandom_range(0, 2)) @(negedge clk);
        s_tvalid = 1; s_tdata = flat[p*PKT_W +: PKT_W]; s_tlast = (p == NPKT-1);
        check(s_tready, "ready while receiving");
        @(negedge clk);
        s_tvalid = 0; s_tlast = 0;
        if (p == NPKT-1) last_pkt_cyc = cyc - 1;
      end
      repeat (QW + 5) @(negedge clk);
      check(rows_seen == QW, $sformatf("rows streamed %0d", rows_seen));
      check(first_row_cyc - last_pkt_cyc == 2, $sformatf("first row %0d cycles after last packet", first_row_cyc - last_pkt_cyc));
      check(!s_tready && busy, "input refused until release");
      release_i = 1; @(negedge clk); release_i = 0;
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
