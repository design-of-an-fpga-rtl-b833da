// tb_qrm_workloads -- runs the accelerator at the array sizes used in the
// evaluation of the algorithm: 10, 20, 30, 50 and 90 sites square, each
// built with its own W, two random jobs each.  Every job is checked (legal
// replay, final array against the reference); the rearrangement time in
// cycles and microseconds at 250 MHz and the fill of a central target of
// 60 % of the array width (30 x 30 for 50 x 50) are printed per size.
module tb_qrm_workloads;
  localparam int NS = 5;
  localparam int SIZES [NS] = '{10, 20, 30, 50, 90};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int ck [NS], fl [NS], cy [NS], fi [NS];
  bit fin [NS];

  for (genvar i = 0; i < NS; i++) begin : g
    localparam int WI = SIZES[i];
    localparam int TI = ((WI * 3 / 5) / 2) * 2;
    qrm_job_runner #(.W(WI), .TGT(TI), .NJOBS(2)) u_run (
      .clk, .rst_n, .checks(ck[i]), .failures(fl[i]), .last_cycles(cy[i]),
      .last_filled(fi[i]), .finished(fin[i]));
  end

  int checks, failures;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4]);
    checks = 0; failures = 0;
    for (int i = 0; i < NS; i++) begin
      automatic int t = ((SIZES[i] * 3 / 5) / 2) * 2;
      $display("W=%0d: %0d cycles = %.2f us at 250 MHz, %0dx%0d target: %0d of %0d sites filled",
               SIZES[i], cy[i], real'(cy[i]) / 250.0, t, t, fi[i], t*t);
      checks += ck[i]; failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
