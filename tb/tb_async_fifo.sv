// tb_async_fifo -- writer at 10 ns and reader at 33 ns (then the other way round) with
// random enables; checks that 600 words arrive complete and in order, that `full`
// and `empty` are both seen, and that nothing is accepted while full.
module tb_async_fifo;
  localparam int W = 16, AW = 3;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [W-1:0] din, dout;
  int checks = 0, failures = 0, fulls = 0, empties = 0;
  int wp = 0, rp = 0;
  int wper = 5, rper = 16;

  async_fifo #(.WIDTH(W), .AW(AW)) dut (.wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(wr_en), .din(din), .full(full),
                                        .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(rd_en), .dout(dout), .empty(empty));
  always begin #(wper) wclk = ~wclk; end
  always begin #(rper) rclk = ~rclk; end
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // Each side decides at the falling edge, from the flags of that moment, whether
  // to act at the next rising edge; a decided write/read always takes place.
  always @(negedge wclk) if (wrst_n) begin
    if (full) fulls++;
    wr_en = !full && (wp < 600) && ($urandom_range(3) != 0);
    if (wr_en) begin din = W'(wp * 37 + 5); wp++; end
  end

  always @(negedge rclk) if (rrst_n) begin
    if (empty) empties++;
    rd_en = !empty && ($urandom_range(3) != 0);
    if (rd_en) begin
      checks++;
      if (dout !== W'(rp * 37 + 5)) begin failures++; if (failures < 5) $display("word %0d = %0d", rp, dout); end
      rp++;
    end
  end

  initial begin
    #100 wrst_n = 1; rrst_n = 1;
    wait (rp == 300);
    wper = 17; rper = 4;
    wait (rp == 600);
    repeat (10) @(posedge rclk);
    checks++; if (rp != 600 || wp != 600) failures++;
    checks++; if (fulls == 0 || empties == 0) begin failures++; $display("full %0d empty %0d", fulls, empties); end
    checks++; if (!empty) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
