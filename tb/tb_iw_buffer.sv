// tb_iw_buffer: fills both banks of the IFM and weight pairs through the DMA
// port, then reads bank b from the array side while the DMA rewrites bank !b,
// and checks every read (one cycle latency) against a reference copy.
module tb_iw_buffer;
  import bb_pkg::*;
  localparam int WD = 1024, ID = 256;

  logic        clk = 0, rst_n = 0;
  logic        dma_we, dma_sel_w, dma_bank;
  logic [9:0]  dma_addr;
  logic [15:0] dma_wdata;
  logic        ifm_re, ifm_bank, w_re, w_bank;
  logic [7:0]  ifm_addr;
  logic [9:0]  w_addr;
  logic [15:0] ifm_rdata, w_rdata;
  logic [15:0] ref_i [2][ID];
  logic [15:0] ref_w [2][WD];
  int checks = 0, failures = 0;

  iw_buffer #(.W_DEPTH(WD), .I_DEPTH(ID)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dma_we = 0; dma_sel_w = 0; dma_bank = 0; dma_addr = 0; dma_wdata = 0;
    ifm_re = 0; ifm_bank = 0; w_re = 0; w_bank = 0; ifm_addr = 0; w_addr = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++) begin
      for (int a = 0; a < ID; a++) begin
        @(negedge clk);
        dma_we = 1; dma_sel_w = 0; dma_bank = b[0]; dma_addr = 10'(a); dma_wdata = 16'($urandom);
        ref_i[b][a] = dma_wdata;
      end
      for (int a = 0; a < WD; a++) begin
        @(negedge clk);
        dma_we = 1; dma_sel_w = 1; dma_bank = b[0]; dma_addr = 10'(a); dma_wdata = 16'($urandom);
        ref_w[b][a] = dma_wdata;
      end
    end
    for (int i = 0; i < 4000; i++) begin
      logic [15:0] ei, ew;
      logic        rb;
      @(negedge clk);
      rb = i[9];                        // array bank changes every 512 cycles
      ifm_re = 1; ifm_bank = rb; ifm_addr = 8'($urandom);
      w_re = 1; w_bank = rb; w_addr = 10'($urandom);
      ei = ref_i[rb][ifm_addr];
      ew = ref_w[rb][w_addr];
      // DMA rewrites the other bank at the same time
      dma_we = 1; dma_sel_w = $urandom_range(0, 1); dma_bank = !rb;
      dma_addr = 10'($urandom); dma_wdata = 16'($urandom);
      if (dma_sel_w) ref_w[!rb][dma_addr] = dma_wdata;
      else ref_i[!rb][dma_addr[7:0]] = dma_wdata;
      @(posedge clk);
      #1;
      checks += 2;
      if (ifm_rdata !== ei) failures++;
      if (w_rdata !== ew) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
