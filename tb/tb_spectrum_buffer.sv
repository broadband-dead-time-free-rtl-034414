// tb_spectrum_buffer: self-checking test of the two-clock data buffer.
// Random words are written to random addresses on one clock and read back on
// an unrelated clock; the 1-clock read latency and the rule that the read
// register holds while rd_en is low are checked.
`timescale 1ns/1ps
module tb_spectrum_buffer;
  localparam int AW = 5, DW = 96;
  logic wclk = 0, rclk = 0;
  always #2.0 wclk = ~wclk;
  always #5.0 rclk = ~rclk;
  int checks = 0, failures = 0;

  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [DW-1:0] wr_data = 0, rd_data;
  spectrum_buffer #(.AW(AW), .DW(DW)) dut (.wr_clk(wclk), .wr_en, .wr_addr, .wr_data,
    .rd_clk(rclk), .rd_en, .rd_addr, .rd_data);

  logic [DW-1:0] model [1 << AW];

  initial begin
    for (int round = 0; round < 4; round++) begin
      for (int a = 0; a < (1 << AW); a++) begin
        @(negedge wclk);
        wr_en = 1; wr_addr = AW'(a); wr_data = {$urandom, $urandom, $urandom};
        model[a] = wr_data;
      end
      repeat (20) begin   // some rewrites at random addresses
        @(negedge wclk);
        wr_en = 1; wr_addr = AW'($urandom); wr_data = {$urandom, $urandom, $urandom};
        model[wr_addr] = wr_data;
      end
      @(negedge wclk); wr_en = 0;
      for (int i = 0; i < 3 * (1 << AW); i++) begin
        logic [DW-1:0] hold;
        @(negedge rclk);
        rd_en = 1; rd_addr = AW'($urandom);
        @(negedge rclk);
        rd_en = 0;
        checks++;
        if (rd_data != model[rd_addr]) begin
          failures++;
          if (failures < 10) $display("addr %0d: got %h want %h", rd_addr, rd_data, model[rd_addr]);
        end
        hold = rd_data;
        rd_addr = ~rd_addr;
        @(negedge rclk);
        checks++;
        if (rd_data != hold) begin failures++; $display("read register changed without rd_en"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
