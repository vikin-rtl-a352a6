// tse_slice: one slice of the two-stage sparsity encoder (TSE).
//
// A slice turns the sparse stream of one B-spline unit (pipeline mode) or one
// input-buffer lane (parallel mode) into zero-free form: a dense data
// scratchpad (16 x 16 bit) and a matching offset scratchpad (16 x 5 bit)
// holding each kept value's position in the stream.
//
// Every stream element advances the 5-bit input counter InCnt. The element is
// written at the 4-bit dense counter DnCnt, with InCnt as its offset, when
//   stage 1: it is non-zero, and
//   stage 2: the pattern mask is off, or mask bit InCnt[1:0] is set.
// Mask bit i keeps element i of every group of four, so the pattern printed
// as "1 0 1 0" (keep elements 2'b00 and 2'b10) is mask = 4'b0101. Both stages,
// the counter widths and the scratchpad sizes follow the design description.
//
// A second write port (byp_*) stores a value with an explicit offset and no
// filtering; the controller uses it for the dense silu(x) value of the KAN
// base branch. count = number of dense entries (0..16); writes beyond 16 are
// dropped and raise overflow. clr empties the slice for the next batch.
// The scratchpads are read asynchronously (rd_addr -> rd_data, rd_off).
module tse_slice
  import vikin_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic [3:0]       mask,
  input  logic             mask_en,
  input  logic             in_valid,
  input  fp16_t            in_data,
  input  logic             byp_valid,
  input  fp16_t            byp_data,
  input  logic [OFF_W-1:0] byp_off,
  input  logic [3:0]       rd_addr,
  output fp16_t            rd_data,
  output logic [OFF_W-1:0] rd_off,
  output logic [4:0]       count,
  output logic             overflow
);

  fp16_t            data_spad [SPAD_DEPTH];
  logic [OFF_W-1:0] off_spad  [SPAD_DEPTH];
  logic [OFF_W-1:0] in_cnt;
  logic [3:0]       dn_cnt;
  logic             full;
  logic             nonzero, pattern_ok, keep, wl_en;
  fp16_t            wr_data;
  logic [OFF_W-1:0] wr_off;

  always_comb begin
    nonzero    = !fp16_is_zero(in_data);
    pattern_ok = !mask_en || mask[in_cnt[1:0]];
    keep       = in_valid && nonzero && pattern_ok;
    wl_en      = (keep || byp_valid) && !full;
    wr_data    = byp_valid ? byp_data : in_data;
    wr_off     = byp_valid ? byp_off : in_cnt;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cnt   <= '0;
      dn_cnt   <= '0;
      full     <= 1'b0;
      overflow <= 1'b0;
    end else if (clr) begin
      in_cnt   <= '0;
      dn_cnt   <= '0;
      full     <= 1'b0;
      overflow <= 1'b0;
    end else begin
      if (in_valid) in_cnt <= in_cnt + 1'b1;
      if ((keep || byp_valid) && full) overflow <= 1'b1;
      if (wl_en) begin
        dn_cnt <= dn_cnt + 1'b1;
        if (dn_cnt == 4'hf) full <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wl_en && !clr) begin
      data_spad[dn_cnt] <= wr_data;
      off_spad[dn_cnt]  <= wr_off;
    end
  end

  assign rd_data = data_spad[rd_addr];
  assign rd_off  = off_spad[rd_addr];
  assign count   = {full, dn_cnt};

  // A stream element and a bypass write never arrive together.
  assert property (@(posedge clk) disable iff (!rst_n) !(in_valid && byp_valid));

endmodule
