// tb_nn_database: fills the image, weight and both feature-map regions with
// random data through their write ports, then reads back through the
// shared read port in random order, checking region select, data and the
// one-clock read latency, and that the banks do not alias.
`timescale 1ns/1ps
module tb_nn_database;
  import lwdd_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic              img_we = 0, wgt_we = 0, fm_we = 0, fm_bank = 0;
  logic [9:0]        img_waddr = 0;
  logic [7:0]        img_wdata = 0;
  logic [WDB_AW-1:0] wgt_waddr = 0, rd_addr = 0;
  data_t             wgt_wdata = 0, fm_wdata = 0, rdata;
  logic [1:0]        rd_sel = 0;
  logic [FM_AW-1:0]  fm_waddr = 0;
  int checks = 0, failures = 0;
  int m_img [IMG_PIX], m_wgt [N_WEIGHTS], m_fm [2][FM_WORDS];
  nn_database dut (.*);

  initial begin #10ms; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int i = 0; i < N_WEIGHTS; i++) begin
      @(negedge clk);
      img_we = (i < IMG_PIX); img_waddr = 10'(i % IMG_PIX); img_wdata = 8'($urandom);
      if (i < IMG_PIX) m_img[i] = int'(img_wdata);
      wgt_we = 1; wgt_waddr = WDB_AW'(i); wgt_wdata = data_t'($urandom); m_wgt[i] = int'(wgt_wdata);
      fm_we = (i < 2 * FM_WORDS); fm_bank = i[0]; fm_waddr = FM_AW'(i / 2);
      fm_wdata = data_t'($urandom);
      if (i < 2 * FM_WORDS) m_fm[i % 2][i / 2] = int'(fm_wdata);
    end
    for (int i = N_WEIGHTS; i < 2 * FM_WORDS; i++) begin
      @(negedge clk);
      img_we = 0; wgt_we = 0;
      fm_we = 1; fm_bank = i[0]; fm_waddr = FM_AW'(i / 2); fm_wdata = data_t'($urandom);
      m_fm[i % 2][i / 2] = int'(fm_wdata);
    end
    @(negedge clk); fm_we = 0;
    for (int t = 0; t < 4000; t++) begin
      automatic int s = $urandom_range(3, 0), a, e;
      case (s)
        0: begin a = $urandom_range(IMG_PIX - 1, 0); e = m_img[a]; end
        1: begin a = $urandom_range(N_WEIGHTS - 1, 0); e = m_wgt[a]; end
        default: begin a = $urandom_range(FM_WORDS - 1, 0); e = m_fm[s - 2][a]; end
      endcase
      rd_sel = 2'(s); rd_addr = WDB_AW'(a);
      @(negedge clk);
      checks++;
      if (int'(rdata) != e) begin failures++; $display("sel %0d addr %0d: %0d exp %0d", s, a, rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
