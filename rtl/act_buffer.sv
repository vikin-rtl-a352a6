// act_buffer: activation buffer (the 2 KB input buffer and the 2 KB output buffer).
//
// The buffer holds DEPTH words of sixteen FP16 values, one value per lane, so
// that a whole batch of sixteen activations moves in one clock: the sixteen
// inputs of a KAN batch to the SIMD core and SPUs, a row of an MLP input to
// the sparsity encoder, or sixteen PE or SPU results on write-back.
// 2 KB = 64 words x 16 lanes x 2 bytes; the size is the design's, the word
// organisation this design's own.
//
// Ports: a host write port (h_we/h_addr/h_wdata, whole word) for loading and
// a core write port (c_we/c_addr/c_wdata with a per-lane enable) for results;
// when both write the same clock the core port wins. One read port with one
// clock of latency (rd_en/rd_addr -> rd_data on the next clock).
module act_buffer
  import vikin_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              h_we,
  input  logic [AW-1:0]     h_addr,
  input  fp16_t             h_wdata [NLANE],
  input  logic              c_we,
  input  logic [NLANE-1:0]  c_lane_en,
  input  logic [AW-1:0]     c_addr,
  input  fp16_t             c_wdata [NLANE],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output fp16_t             rd_data [NLANE]
);

  fp16_t mem [DEPTH][NLANE];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NLANE; i++) begin
      if (c_we && c_lane_en[i]) mem[c_addr][i] <= c_wdata[i];
      else if (h_we && !(c_we && c_addr == h_addr)) mem[h_addr][i] <= h_wdata[i];
    end
    if (rd_en)
      for (int i = 0; i < NLANE; i++) rd_data[i] <= mem[rd_addr][i];
  end

endmodule
