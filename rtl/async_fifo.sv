// async_fifo: dual-clock FIFO between the AD converter and the core.
//
// The design's FIFO moves the sampled vibration signal from the converter's
// clock into the 100 MHz processing clock and buffers it while the network
// is busy. The published design gives only that function; the structure
// here is the customary one: a DEPTH-word memory written in the wr_clk
// domain and read in the rd_clk domain, binary pointers one bit wider than
// the address, and Gray-coded copies of each pointer passed through two
// flip-flops into the other domain to form full and empty.
//
// Interface: a push (wr_en) while wr_full is high is dropped. The read side
// is first-word fall-through: rd_data shows the oldest word whenever
// rd_empty is low, and rd_en removes it. DEPTH must be a power of two; the
// default 2048 holds one whole FFT frame (an assumed size).
// Timing: a word written at a wr_clk edge becomes visible on the read side
// two to three rd_clk edges later; full and empty are conservative (they
// may stay set a few cycles longer than necessary, never shorter).
module async_fifo #(
  parameter int DW    = 16,
  parameter int DEPTH = 2048
) (
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          wr_full,

  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          rd_empty
);
  localparam int AW = $clog2(DEPTH);

  logic [DW-1:0] mem [DEPTH];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer synchronised to wr_clk
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer synchronised to rd_clk
  logic [AW:0] wbin_next, rbin_next;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  assign wr_full   = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
  assign wbin_next = wbin + (AW+1)'(wr_en && !wr_full);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end

  // ---------------- read domain ----------------
  assign rd_empty  = (rgray == wgray_r2);
  assign rbin_next = rbin + (AW+1)'(rd_en && !rd_empty);
  assign rd_data   = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
    end
  end
endmodule
