// tse: two-stage sparsity encoder, sixteen slices and two dense-pointer readers.
//
// Filling (first pipeline stage): lane i of in_valid/in_data is the stream of
// B-spline unit i (pipeline mode) or input-buffer lane i (parallel mode); each
// lane goes to its own tse_slice, which keeps the non-zero, pattern-allowed
// elements together with their offsets. byp_* writes one unfiltered value per
// slice (the silu(x) of that lane) at offset byp_off.
//
// Draining (second pipeline stage): as in the design description, slices 0-7
// form group 0 and slices 8-15 group 1. Each group has a dense pointer
// (DpCnt0, DpCnt1) that, after rd_start, walks the dense entries of its eight
// slices in order, one entry per clock, skipping empty slices. Every clock
// group g presents grp_valid[g], the value grp_data[g], its offset grp_off[g]
// and the slice grp_slice[g] (0-7 within the group) on the input share bus.
// The two groups run side by side; a group that finishes early sends nothing
// more. rd_busy is high while either group is still walking.
//
// Timing: in_* and byp_* are written on the clock edge; grp_* are
// combinational from the pointer state. The stage takes max(dense entries of
// group 0, dense entries of group 1) clocks.
module tse
  import vikin_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic [3:0]       mask,
  input  logic             mask_en,
  input  logic             in_valid  [NLANE],
  input  fp16_t            in_data   [NLANE],
  input  logic             byp_valid,
  input  fp16_t            byp_data  [NLANE],
  input  logic [OFF_W-1:0] byp_off,
  input  logic             rd_start,
  output logic             rd_busy,
  output logic             grp_valid [2],
  output fp16_t            grp_data  [2],
  output logic [OFF_W-1:0] grp_off   [2],
  output logic [2:0]       grp_slice [2],
  output logic             overflow
);

  localparam int GS = NLANE / 2;  // slices per group

  logic [3:0]       rd_addr  [NLANE];
  fp16_t            rd_data  [NLANE];
  logic [OFF_W-1:0] rd_off   [NLANE];
  logic [4:0]       count    [NLANE];
  logic [NLANE-1:0] ovf;

  for (genvar i = 0; i < NLANE; i++) begin : g_slice
    tse_slice u_slice (
      .clk, .rst_n, .clr, .mask, .mask_en,
      .in_valid (in_valid[i]),
      .in_data  (in_data[i]),
      .byp_valid,
      .byp_data (byp_data[i]),
      .byp_off,
      .rd_addr  (rd_addr[i]),
      .rd_data  (rd_data[i]),
      .rd_off   (rd_off[i]),
      .count    (count[i]),
      .overflow (ovf[i])
    );
  end

  assign overflow = |ovf;

  // Dense pointers, one per group.
  logic       active [2];
  logic [2:0] sl     [2];
  logic [3:0] ent    [2];
  logic [3:0] nx_first [2];  // {found, slice} of the first non-empty slice
  logic [3:0] nx_after [2];  // same, after the current slice

  // First slice at or after 'from' in group g that holds an entry.
  function automatic logic [3:0] next_nonempty(input logic [4:0] cnt [NLANE],
                                               input int g, input int from);
    for (int s = 0; s < GS; s++)
      if (s >= from && cnt[g*GS+s] != 5'd0) return {1'b1, 3'(s)};
    return 4'd0;
  endfunction

  // Read addresses depend only on the pointer state, kept apart from the read
  // data so that no combinational path runs through the slices.
  always_comb begin
    for (int i = 0; i < NLANE; i++) rd_addr[i] = '0;
    for (int g = 0; g < 2; g++) rd_addr[g*GS + int'(sl[g])] = ent[g];
  end

  always_comb begin
    for (int g = 0; g < 2; g++) begin
      grp_valid[g] = active[g];
      grp_data[g]  = rd_data[g*GS + int'(sl[g])];
      grp_off[g]   = rd_off[g*GS + int'(sl[g])];
      grp_slice[g] = sl[g];
    end
    rd_busy = active[0] || active[1];
    for (int g = 0; g < 2; g++) begin
      nx_first[g] = next_nonempty(count, g, 0);
      nx_after[g] = next_nonempty(count, g, int'(sl[g]) + 1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 2; g++) begin
        active[g] <= 1'b0;
        sl[g]     <= '0;
        ent[g]    <= '0;
      end
    end else begin
      for (int g = 0; g < 2; g++) begin
        if (rd_start) begin
          active[g] <= nx_first[g][3];
          sl[g]     <= nx_first[g][2:0];
          ent[g]    <= '0;
        end else if (active[g]) begin
          if (5'(ent[g]) + 5'd1 == count[g*GS + int'(sl[g])]) begin
            active[g] <= nx_after[g][3];
            sl[g]     <= nx_after[g][2:0];
            ent[g]    <= '0;
          end else begin
            ent[g] <= ent[g] + 1'b1;
          end
        end
      end
    end
  end

  // Slices are not refilled while they are being drained.
  assert property (@(posedge clk) disable iff (!rst_n) rd_busy |-> !clr);

endmodule
