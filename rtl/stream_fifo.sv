// stream_fifo -- synchronous first-in first-out buffer with a valid/ready
// read side.
//
// Storage is a DEPTH-entry register array (a block RAM on an FPGA) with
// separate read and write pointers and an occupancy counter.  The write side
// has no back-pressure: the writer must size DEPTH so that the buffer cannot
// overflow, which an assertion checks.  Reads follow the valid/ready rule: a
// word leaves on a cycle with out_valid and out_ready both high.
// A generic helper of this design, not taken from the design it follows.
//
// Timing: a word written in cycle t can be read from cycle t+1.
module stream_fifo #(
  parameter int WIDTH = 8,
  parameter int DEPTH = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_rd;

  assign out_valid = (level != '0);
  assign out_data  = mem[rp];
  assign do_rd     = out_valid && out_ready;

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (int'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      level <= '0;
    end else begin
      if (in_valid) wp <= inc(wp);
      if (do_rd)    rp <= inc(rp);
      level <= level + {{($bits(level)-1){1'b0}}, in_valid} - {{($bits(level)-1){1'b0}}, do_rd};
    end
  end

  always_ff @(posedge clk)
    if (in_valid) mem[wp] <= in_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (int'(level) < DEPTH || do_rd));

endmodule
