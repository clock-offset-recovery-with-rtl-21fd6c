// det_buffer_tb: writes random words to random addresses of the detection
// memory, keeps a shadow copy, and reads every written address back, checking
// the one-cycle read latency and that rd_data holds while rd_en is low.
`timescale 1ns/1ps
module det_buffer_tb;
  import iqsync_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [ADDR_W-1:0] wr_addr = 0, rd_addr = 0;
  tstamp_t wr_data = 0, rd_data;
  tstamp_t shadow [DET_DEPTH];
  bit      written [DET_DEPTH];
  int checks = 0, failures = 0;

  det_buffer dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    tstamp_t held;
    @(negedge clk);
    for (int i = 0; i < 3000; i++) begin
      wr_en = 1;
      wr_addr = ADDR_W'($urandom);
      wr_data = {$urandom, $urandom};
      shadow[wr_addr] = wr_data;
      written[wr_addr] = 1;
      @(negedge clk);
    end
    for (int i = 0; i < DET_DEPTH; i++) begin
      wr_en = 1; wr_addr = ADDR_W'(i); wr_data = tstamp_t'(i) * 7;
      if (i % 4 == 0) begin shadow[i] = wr_data; written[i] = 1; end else wr_en = 0;
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < DET_DEPTH; i++) begin
      if (written[i]) begin
        rd_en = 1; rd_addr = ADDR_W'(i);
        @(negedge clk);
        rd_en = 0;
        check(rd_data == shadow[i], $sformatf("addr %0d", i));
      end
    end
    held = rd_data;
    rd_addr = 0;
    repeat (3) @(negedge clk);
    check(rd_data == held, "hold without rd_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
