// moves_packer -- the "Moves" part of the output stage.
//
// Collects the merged move records (up to four per cycle) in arrival order
// and packs RPB = floor(PKT_W / REC_W) of them into one PKT_W-bit beat,
// record n of a beat at bits [n*REC_W +: REC_W], unused bits zero.  A beat is
// emitted as soon as it is full; `flush` emits a partly filled one at the end
// of a job (beat_count says how many records a beat holds).  Records within a
// cycle are taken in lane order.
//
// That the moves leave the accelerator through the same 1024-bit stream as
// the final array follows the design this RTL is based on; the packing is
// this design's own.
//
// Timing: beats are registered, one cycle after the record that fills them
// (or after flush).  flush must not coincide with incoming records.
module moves_packer
  import qrm_pkg::*;
#(
  parameter int W      = 50,
  parameter int N_ITER = 4
) (
  input  logic                                      clk,
  input  logic                                      rst_n,
  input  logic                                      in_valid [4],
  input  logic [rec_w(W, N_ITER)-1:0]               in_rec   [4],
  input  logic                                      flush,
  output logic                                      beat_valid,
  output logic [PKT_W-1:0]                          beat_data,
  output logic [$clog2(PKT_W/rec_w(W, N_ITER)+1)-1:0] beat_count
);

  localparam int RW  = rec_w(W, N_ITER);
  localparam int RPB = PKT_W / RW;
  localparam int CW  = $clog2(RPB + 1);

  logic [RW-1:0] acc   [RPB];
  logic [RW-1:0] n_acc [RPB];
  logic [RW-1:0] snap  [RPB];
  logic [CW-1:0] cnt, n_cnt, emit_cnt;
  logic          emit;

  always_comb begin
    n_acc    = acc;
    n_cnt    = cnt;
    emit     = 1'b0;
    emit_cnt = '0;
    snap     = acc;
    for (int l = 0; l < 4; l++) begin
      if (in_valid[l]) begin
        n_acc[n_cnt] = in_rec[l];
        n_cnt        = n_cnt + 1'b1;
        if (int'(n_cnt) == RPB) begin
          emit     = 1'b1;
          emit_cnt = n_cnt;
          snap     = n_acc;
          n_cnt    = '0;
        end
      end
    end
    if (flush && !emit && n_cnt != '0) begin
      emit     = 1'b1;
      emit_cnt = n_cnt;
      snap     = n_acc;
      n_cnt    = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      beat_valid <= 1'b0;
      beat_data  <= '0;
      beat_count <= '0;
    end else begin
      cnt        <= n_cnt;
      beat_valid <= emit;
      if (emit) begin
        beat_count <= emit_cnt;
        beat_data  <= '0;
        for (int n = 0; n < RPB; n++)
          if (n < int'(emit_cnt)) beat_data[n*RW +: RW] <= snap[n];
      end
    end
  end

  always_ff @(posedge clk) acc <= n_acc;

  initial assert (RPB >= 4) else $fatal(1, "a beat must hold at least four records");

  a_flush_alone: assert property (@(posedge clk) disable iff (!rst_n)
    flush |-> !(in_valid[0] || in_valid[1] || in_valid[2] || in_valid[3]));

endmodule
