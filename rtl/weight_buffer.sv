// weight_buffer: 32 KB weight buffer in four banks, with its memory controller.
//
// Each bank is BANK_WORDS words of sixteen FP16 weights (one per PE or SPU
// lane): 4 banks x 256 words x 32 bytes = 32 KB. The memory controller turns
// the offsets that the sparsity encoder sends along with each dense value into
// word addresses, and steers the banks according to the mode, as the design
// describes ("Dynamic Access"):
//
//   pipeline mode (KAN): banks 0+1 are stacked into one 512-word space for
//     group 0, banks 2+3 for group 1. Address = base + slice * pitch + offset,
//     where pitch = G + K + 1 words per input (G + K spline coefficients
//     t_i at offsets 0..G+K-1, then w_b at offset G+K). Bit 8 picks the bank
//     of the pair. Outputs pe_w0 (group 0) and pe_w1 (group 1).
//   parallel mode (MLP): all four banks are read at once, at address
//     base + offset * 8 + slice, i.e. word n of a bank holds input row
//     (n/8)*16 + n%8 + 8g of group g. Bank 0 -> pe_w0, bank 1 -> pe_w1,
//     bank 2 -> spu_w0, bank 3 -> spu_w1.
//
// The address formulas and the word layout are this design's own. A group
// with no valid request reads nothing and its weight outputs are zero.
// Timing: one clock from rd_valid/offset to the weight outputs. The host
// loads whole words through h_we/h_bank/h_addr/h_wdata.
module weight_buffer
  import vikin_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 256
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  mode_e                         mode,
  input  logic [4:0]                    pitch,
  input  logic [$clog2(BANK_WORDS):0]   base,
  input  logic                          rd_valid [2],
  input  logic [OFF_W-1:0]              rd_off   [2],
  input  logic [2:0]                    rd_slice [2],
  input  logic                          h_we,
  input  logic [1:0]                    h_bank,
  input  logic [$clog2(BANK_WORDS)-1:0] h_addr,
  input  fp16_t                         h_wdata [NLANE],
  output fp16_t                         pe_w0  [NLANE],
  output fp16_t                         pe_w1  [NLANE],
  output fp16_t                         spu_w0 [NLANE],
  output fp16_t                         spu_w1 [NLANE]
);

  localparam int BA = $clog2(BANK_WORDS);

  logic [BA:0]   gaddr  [2];
  logic          b_en   [4];
  logic [BA-1:0] b_addr [4];
  fp16_t         b_q    [4][NLANE];
  logic          sel_hi_q [2];
  logic          val_q    [2];
  mode_e         mode_q;

  always_comb begin
    for (int g = 0; g < 2; g++) begin
      if (mode == MODE_PIPELINE)
        gaddr[g] = base + (BA+1)'(rd_slice[g]) * (BA+1)'(pitch) + (BA+1)'(rd_off[g]);
      else
        gaddr[g] = base + ((BA+1)'(rd_off[g]) << 3) + (BA+1)'(rd_slice[g]);
    end
    for (int b = 0; b < 4; b++) begin
      b_en[b]   = 1'b0;
      b_addr[b] = '0;
    end
    if (mode == MODE_PIPELINE) begin
      for (int g = 0; g < 2; g++) begin
        b_en[2*g + int'(gaddr[g][BA])]   = rd_valid[g];
        b_addr[2*g + int'(gaddr[g][BA])] = gaddr[g][BA-1:0];
      end
    end else begin
      for (int g = 0; g < 2; g++) begin
        b_en[g]     = rd_valid[g];
        b_addr[g]   = gaddr[g][BA-1:0];
        b_en[g+2]   = rd_valid[g];
        b_addr[g+2] = gaddr[g][BA-1:0];
      end
    end
  end

  for (genvar b = 0; b < 4; b++) begin : g_bank
    fp16_t mem [BANK_WORDS][NLANE];
    always_ff @(posedge clk) begin
      if (h_we && h_bank == 2'(b))
        for (int i = 0; i < NLANE; i++) mem[h_addr][i] <= h_wdata[i];
      for (int i = 0; i < NLANE; i++)
        b_q[b][i] <= b_en[b] ? mem[b_addr[b]][i] : FP16_ZERO;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode_q <= MODE_PIPELINE;
      for (int g = 0; g < 2; g++) begin
        sel_hi_q[g] <= 1'b0;
        val_q[g]    <= 1'b0;
      end
    end else begin
      mode_q <= mode;
      for (int g = 0; g < 2; g++) begin
        sel_hi_q[g] <= gaddr[g][BA];
        val_q[g]    <= rd_valid[g];
      end
    end
  end

  always_comb begin
    for (int i = 0; i < NLANE; i++) begin
      if (mode_q == MODE_PIPELINE) begin
        pe_w0[i]  = val_q[0] ? b_q[sel_hi_q[0] ? 1 : 0][i] : FP16_ZERO;
        pe_w1[i]  = val_q[1] ? b_q[sel_hi_q[1] ? 3 : 2][i] : FP16_ZERO;
        spu_w0[i] = FP16_ZERO;
        spu_w1[i] = FP16_ZERO;
      end else begin
        pe_w0[i]  = b_q[0][i];
        pe_w1[i]  = b_q[1][i];
        spu_w0[i] = b_q[2][i];
        spu_w1[i] = b_q[3][i];
      end
    end
  end

endmodule
