// tb_async_fifo: self-checking test of the dual-clock FIFO.
//
// Write and read clocks run at unrelated periods (7 ns and 5 ns). A first
// phase fills the FIFO with reads stopped and checks that it reports full
// after exactly DEPTH words and drops further pushes; then random pushes
// and pops run in both domains, and every popped word is compared with a
// queue model in write order. The run ends by draining to empty.
module tb_async_fifo;
  localparam int DEPTH = 16;
  logic wclk = 0, rclk = 0;
  always #7 wclk = ~wclk;
  always #5 rclk = ~rclk;

  int checks = 0, failures = 0;
  logic wrst_n, rrst_n, wr_en, rd_en, full, empty;
  logic [15:0] wdata, rdata;
  logic [15:0] model [$];
  int pushes = 0, pops = 0;
  bit  reading = 0;

  async_fifo #(.DW(16), .DEPTH(DEPTH)) dut (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(wr_en), .wr_data(wdata), .wr_full(full),
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(rd_en), .rd_data(rdata), .rd_empty(empty));

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // read side: pops when allowed, compares with the model
  always @(posedge rclk) begin
    if (rrst_n && rd_en && !empty) begin
      checks++;
      if (model.size() == 0) begin failures++; $display("pop from empty model"); end
      else begin
        logic [15:0] e;
        e = model.pop_front();
        if (rdata !== e) begin failures++; if (failures < 10) $display("data %h exp %h", rdata, e); end
      end
      pops++;
    end
  end
  always @(negedge rclk) rd_en <= reading && ($urandom_range(0, 2) != 0);

  initial begin
    wrst_n = 0; rrst_n = 0; wr_en = 0; wdata = 0; rd_en = 0;
    #30; wrst_n = 1; rrst_n = 1;
    // phase 1: fill with no reads
    for (int i = 0; i < DEPTH + 4; i++) begin
      @(negedge wclk);
      wr_en = 1; wdata = 16'($urandom);
      if (i == DEPTH) begin checks++; if (!full) begin failures++; $display("not full after DEPTH writes"); end end
      if (i < DEPTH) begin checks++; if (full) begin failures++; $display("full too early at %0d", i); end end
      @(posedge wclk); #1;
      if (i < DEPTH) model.push_back(wdata);
    end
    @(negedge wclk); wr_en = 0;
    checks++;
    if (!full) begin failures++; $display("full lost"); end
    // phase 2: random traffic
    reading = 1;
    for (int i = 0; i < 600; i++) begin
      @(negedge wclk);
      wr_en = ($urandom_range(0, 1) == 1); wdata = 16'($urandom);
      #1;
      if (wr_en && !full) model.push_back(wdata);
      @(posedge wclk);
    end
    @(negedge wclk); wr_en = 0;
    // drain
    repeat (400) @(posedge rclk);
    checks++;
    if (!empty || model.size() != 0) begin failures++; $display("not drained: empty=%0d left=%0d", empty, model.size()); end
    checks++;
    if (pops < DEPTH + 100) begin failures++; $display("too few pops %0d", pops); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
