// tb_weight_buffer: loads the four banks with random words through the host
// port, then issues random offset/slice requests in both modes and checks the
// four weight outputs one clock later against a software copy:
//   pipeline: group g word = bank (2g + a[8]) at a[7:0], a = base + slice*pitch + off
//   parallel: a = base + off*8 + slice; banks 0,1 -> PE, banks 2,3 -> SPU
// Groups without a request must yield zero weights in pipeline mode.
module tb_weight_buffer;
  import vikin_pkg::*;

  logic             clk = 0, rst_n = 0;
  mode_e            mode = MODE_PIPELINE;
  logic [4:0]       pitch = 8;
  logic [8:0]       base = 0;
  logic             rd_valid [2];
  logic [OFF_W-1:0] rd_off   [2];
  logic [2:0]       rd_slice [2];
  logic             h_we = 0;
  logic [1:0]       h_bank = 0;
  logic [7:0]       h_addr = 0;
  fp16_t            h_wdata [NLANE];
  fp16_t            pe_w0 [NLANE], pe_w1 [NLANE], spu_w0 [NLANE], spu_w1 [NLANE];
  int               checks = 0, failures = 0;

  weight_buffer dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  fp16_t model [4][256][NLANE];

  task automatic cmp(input string what, input fp16_t got [NLANE], input int bank, input int addr, input bit zero);
    for (int i = 0; i < NLANE; i++) begin
      checks++;
      if (got[i] !== (zero ? FP16_ZERO : model[bank][addr][i])) begin
        failures++;
        if (failures < 10) $display("FAIL %s lane %0d bank %0d addr %0d", what, i, bank, addr);
      end
    end
  endtask

  initial begin
    int a [2], bk [2];
    bit v [2];
    for (int g = 0; g < 2; g++) begin rd_valid[g] = 0; rd_off[g] = 0; rd_slice[g] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 4; b++)
      for (int w = 0; w < 256; w++) begin
        @(negedge clk);
        h_we = 1; h_bank = 2'(b); h_addr = 8'(w);
        for (int i = 0; i < NLANE; i++) begin h_wdata[i] = 16'($urandom); model[b][w][i] = h_wdata[i]; end
      end
    @(negedge clk);
    h_we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      mode  = mode_e'(n >= 1500);
      pitch = 5'($urandom_range(18, 3));
      base  = (mode == MODE_PIPELINE) ? 9'($urandom_range(300)) : 9'($urandom_range(120));
      for (int g = 0; g < 2; g++) begin
        v[g] = ($urandom_range(4) != 0);
        rd_valid[g] = v[g];
        rd_slice[g] = 3'($urandom);
        rd_off[g]   = (mode == MODE_PIPELINE) ? 5'($urandom_range(20)) : 5'($urandom_range(15));
        if (mode == MODE_PIPELINE) begin
          a[g]  = int'(base) + int'(rd_slice[g]) * int'(pitch) + int'(rd_off[g]);
          bk[g] = 2 * g + (a[g] / 256);
          a[g]  = a[g] % 256;
        end else begin
          a[g] = int'(base) + int'(rd_off[g]) * 8 + int'(rd_slice[g]);
        end
      end
      @(negedge clk);
      for (int g = 0; g < 2; g++) rd_valid[g] = 0;
      if (mode == MODE_PIPELINE) begin
        cmp("pe_w0", pe_w0, bk[0], a[0], !v[0]);
        cmp("pe_w1", pe_w1, bk[1], a[1], !v[1]);
      end else begin
        cmp("pe_w0", pe_w0, 0, a[0], !v[0]);
        cmp("pe_w1", pe_w1, 1, a[1], !v[1]);
        cmp("spu_w0", spu_w0, 2, a[0], !v[0]);
        cmp("spu_w1", spu_w1, 3, a[1], !v[1]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
