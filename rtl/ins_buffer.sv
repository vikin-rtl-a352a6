// ins_buffer: instruction buffer between the host and the main controller.
//
// A first-in first-out queue of DEPTH instructions (instr_t). The host pushes
// with wr_valid while wr_ready is high; the controller sees the oldest
// instruction on rd_data while rd_valid is high and removes it with rd_pop.
// A push and a pop may happen in the same clock. The queue and its depth are
// this design's own reading of the "Ins. Buffer" block, which the design only
// names.
module ins_buffer
  import vikin_pkg::*;
#(
  parameter int unsigned DEPTH = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   wr_valid,
  input  instr_t wr_data,
  output logic   wr_ready,
  output logic   rd_valid,
  output instr_t rd_data,
  input  logic   rd_pop
);

  localparam int AW = $clog2(DEPTH);

  instr_t      mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          push, pop;

  assign wr_ready = cnt != (AW+1)'(DEPTH);
  assign rd_valid = cnt != '0;
  assign rd_data  = mem[rp];
  assign push     = wr_valid && wr_ready;
  assign pop      = rd_pop && rd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  always_ff @(posedge clk)
    if (push) mem[wp] <= wr_data;

  assert property (@(posedge clk) disable iff (!rst_n) rd_pop |-> rd_valid);

endmodule
