// tb_moves_packer -- checks the move packer at the default array size
// (60-bit records, 17 per 1024-bit beat).  Random records arrive on random
// lanes, up to four per cycle; every beat must hold the next records in
// arrival and lane order at [n*REC_W +: REC_W], zeros after the last one,
// and report their number.  Jobs end with a flush, which must emit the
// partly filled beat (or nothing if the last beat was full).  Records are
// never lost: the sum of beat counts equals the records sent.
module tb_moves_packer;
  import qrm_pkg::*;
  localparam int W = 50, NI = 4;
  localparam int RW = rec_w(W, NI), RPB = PKT_W / RW;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid [4];
  logic [RW-1:0] in_rec [4];
  logic flush, beat_valid;
  logic [PKT_W-1:0] beat_data;
  logic [$clog2(RPB+1)-1:0] beat_count;

  moves_packer #(.W(W), .N_ITER(NI)) dut (.*);

  int checks = 0, failures = 0, sent = 0, got = 0, partial = 0, full = 0;
  logic [RW-1:0] q [$];
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (beat_valid) begin
      if (int'(beat_count) == RPB) full++; else partial++;
      check(beat_count != 0 && int'(beat_count) <= q.size(), "beat count");
      for (int n = 0; n < RPB; n++) begin
        if (n < int'(beat_count) && q.size() > 0) begin
          check(beat_data[n*RW +: RW] == q.pop_front(), $sformatf("slot %0d", n));
          got++;
        end else
          check(beat_data[n*RW +: RW] == '0, $sformatf("empty slot %0d", n));
      end
    end
  end

  initial begin
    for (int l = 0; l < 4; l++) begin in_valid[l] = 0; in_rec[l] = '0; end
    flush = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 20; job++) begin
      automatic int cycles = $urandom_range(1, 60);
      for (int c = 0; c < cycles; c++) begin
        @(negedge clk);
        for (int l = 0; l < 4; l++) begin
          in_valid[l] = ($urandom_range(0, 2) != 0);
          in_rec[l] = RW'({$urandom, $urandom});
          in_rec[l][0] = 1'b1;               // real records are never zero
          if (in_valid[l]) q.push_back(in_rec[l]);
          sent += in_valid[l];
        end
      end
      @(negedge clk);
      for (int l = 0; l < 4; l++) in_valid[l] = 0;
      @(negedge clk);
      flush = 1;
      @(negedge clk);
      flush = 0;
      repeat (2) @(negedge clk);
      check(q.size() == 0, $sformatf("job %0d: %0d records left after flush", job, q.size()));
      q.delete();
    end
    check(got == sent, $sformatf("records out %0d of %0d", got, sent));
    check(full > 0 && partial > 0, "full and flushed beats both occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
