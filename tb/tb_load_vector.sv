// tb_load_vector -- checks the four Load Vector units at the default array
// size: for random arrays, every quadrant row must equal the quadrant view
// built by the reference (index 0 next to the centre), one cycle after the
// request, with the last flag on the last row.
module tb_load_vector;
  import qrm_pkg::*;
  import qrm_ref_pkg::*;
  localparam int W = 50, QW = W/2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [W*W-1:0] array_bits;
  logic row_valid, row_last;
  logic [$clog2(QW)-1:0] row_idx;
  logic vec_valid [4], vec_last [4];
  logic [QW-1:0] vec [4];

  for (genvar q = 0; q < 4; q++) begin : g
    load_vector #(.W(W), .QUAD(quad_e'(q))) dut (
      .clk, .rst_n, .array_bits, .row_valid, .row_idx, .row_last,
      .vec_valid(vec_valid[q]), .vec(vec[q]), .vec_last(vec_last[q]));
  end

  int checks = 0, failures = 0;
  mat_t a, qm [4];

  initial begin
    row_valid = 0; row_last = 0; row_idx = '0; array_bits = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5; t++) begin
      for (int r = 0; r < W; r++) begin
        a[r] = '0;
        for (int c = 0; c < W; c++) begin
          a[r][c] = 1'($urandom_range(0, 1));
          array_bits[r*W + c] = a[r][c];
        end
      end
      for (int q = 0; q < 4; q++) qm[q] = quad_get(a, W, q);
      for (int i = 0; i < QW; i++) begin
        @(negedge clk);
        row_valid = 1; row_idx = i[$clog2(QW)-1:0]; row_last = (i == QW-1);
        @(negedge clk);
        row_valid = 0;
        for (int q = 0; q < 4; q++) begin
          checks++;
          if (!vec_valid[q] || vec[q] != qm[q][i][QW-1:0] || vec_last[q] != (i == QW-1)) begin
            failures++;
            $display("FAIL: quadrant %0d row %0d: %b exp %b", q, i, vec[q], qm[q][i][QW-1:0]);
          end
        end
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
