// shift_kernel -- one pass of the pipelined shift unit ("row stream to column
// stream").
//
// A line (a quadrant row, or a column handled as a row) is a QW-bit vector
// whose bit 0 is the site nearest the array centre.  Lines enter one per
// cycle.  Stage k looks at bit 0 of what is left of the line, which is site k:
//   * site occupied, or s_en[k] = 0: the bit goes to column buffer k, no
//     shift command, and the line moves on shifted right by one;
//   * site empty and s_en[k] = 1: a shift command is issued -- every atom
//     beyond site k moves one site toward the centre -- so site k now holds
//     the next bit, which goes to column buffer k; the line moves on shifted
//     right by two with a 0 entering at the top.
// Besides the command bit (the empty-site test itself) the stage produces a
// "moved" bit, set when the command actually moves at least one atom; the
// movement recording uses it to keep empty shifts out of the schedule.
//
// Column buffer k is a QW-bit shift register that collects bit k of every
// line.  When the last line of a group of QW has left stage k, buffer k is
// complete: it is bit k of all QW lines after the pass, i.e. the transposed
// line k.  Buffers complete one per cycle, k = 0 first, so the output is again
// a stream of QW lines, now orthogonal to the input ("column stream"), which
// can be fed straight into a second kernel.
//
// The stage rule, the column and shift-command buffers, the zero fed into the
// shifter and the per-stage enable s_en follow the design this RTL is based
// on; the "moved" flag, the tag side band and the exact output timing are this
// design's choices.
//
// Timing: input line r of a group at cycle t0+r; output line k at cycle
// t0+QW+1+k.  A new group may follow the previous one without a gap.
// in_last must mark every QW-th line.
module shift_kernel #(
  parameter int QW    = 25,
  parameter int TAG_W = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [QW-1:0]            s_en,
  input  logic                     in_valid,
  input  logic [QW-1:0]            in_vec,
  input  logic                     in_last,
  input  logic [TAG_W-1:0]         in_tag,
  output logic                     out_valid,
  output logic [QW-1:0]            out_vec,
  output logic [QW-1:0]            out_cmd,
  output logic [QW-1:0]            out_mov,
  output logic [$clog2(QW)-1:0]    out_idx,
  output logic                     out_last,
  output logic [TAG_W-1:0]         out_tag
);

  localparam int IW = $clog2(QW);

  // pipeline stage registers
  logic             st_valid [QW];
  logic             st_last  [QW];
  logic [TAG_W-1:0] st_tag   [QW];
  logic [QW-1:0]    st_vec   [QW];

  // per-stage results
  logic             sh   [QW];
  logic             col  [QW];
  logic             mov  [QW];
  logic [QW-1:0]    nxt  [QW];

  // column / shift-command / moved buffers
  logic [QW-1:0]    colbuf [QW];
  logic [QW-1:0]    cmdbuf [QW];
  logic [QW-1:0]    movbuf [QW];

  always_comb begin
    for (int k = 0; k < QW; k++) begin
      sh[k]  = s_en[k] & ~st_vec[k][0];
      col[k] = sh[k] ? st_vec[k][1] : st_vec[k][0];
      mov[k] = sh[k] & (|(st_vec[k] >> 1));
      nxt[k] = sh[k] ? (st_vec[k] >> 2) : (st_vec[k] >> 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < QW; k++) begin
        st_valid[k] <= 1'b0;
        st_last[k]  <= 1'b0;
      end
      out_valid <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      st_valid[0] <= in_valid;
      st_last[0]  <= in_valid & in_last;
      for (int k = 1; k < QW; k++) begin
        st_valid[k] <= st_valid[k-1];
        st_last[k]  <= st_valid[k-1] & st_last[k-1];
      end
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      for (int k = 0; k < QW; k++) begin
        if (st_valid[k] && st_last[k]) begin
          out_valid <= 1'b1;
          out_last  <= (k == QW - 1);
        end
      end
    end
  end

  // Data path: no reset needed, every value is qualified by a valid bit and
  // each column buffer is completely refilled by a group of QW lines.
  always_ff @(posedge clk) begin
    st_vec[0] <= in_vec;
    st_tag[0] <= in_tag;
    for (int k = 1; k < QW; k++) begin
      st_vec[k] <= nxt[k-1];
      st_tag[k] <= st_tag[k-1];
    end
    for (int k = 0; k < QW; k++) begin
      if (st_valid[k]) begin
        colbuf[k] <= {col[k], colbuf[k][QW-1:1]};
        cmdbuf[k] <= {sh[k],  cmdbuf[k][QW-1:1]};
        movbuf[k] <= {mov[k], movbuf[k][QW-1:1]};
      end
      if (st_valid[k] && st_last[k]) begin
        out_vec <= {col[k], colbuf[k][QW-1:1]};
        out_cmd <= {sh[k],  cmdbuf[k][QW-1:1]};
        out_mov <= {mov[k], movbuf[k][QW-1:1]};
        out_idx <= IW'(k);
        out_tag <= st_tag[k];
      end
    end
  end

  // Lines come in groups of exactly QW: a group's last line reaches stage 0
  // only QW lines after the previous group's last line.
  logic [IW:0] grp_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) grp_cnt <= '0;
    else if (in_valid) grp_cnt <= in_last ? '0 : grp_cnt + 1'b1;
  end
  a_group: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (in_last == (int'(grp_cnt) == QW - 1)));

endmodule
