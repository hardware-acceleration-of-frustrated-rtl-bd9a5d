// async_fifo -- dual-clock first-in first-out buffer for the host/core clock crossing.
//
// The host bus and the sampler run on unrelated clocks; one such FIFO carries the
// host's command words into the core clock domain and another carries the visible
// samples back. Classic Gray-code design: each side keeps a binary and a Gray
// pointer one bit wider than the address, the Gray pointer is passed to the other
// side through two flip-flops, and full/empty are computed from the local pointer
// and the synchronised remote one, so they are conservative (full may stay high and
// empty may stay high a few clocks longer than needed, never the reverse).
//
// Write side: `wr_en` with `din` stores a word when `full` is low (a write while
// full is dropped and flagged by an assertion). Read side: show-ahead, `dout` holds
// the oldest word whenever `empty` is low and `rd_en` removes it.
// Depth is 2^AW. Each side has its own active-low asynchronous reset; both must be
// applied together.
//
// The published design only says that a FIFO handles the clock domain crossing; the
// structure, depth and show-ahead read are this design's choices.
module async_fifo #(
  parameter int WIDTH = 32,
  parameter int AW    = 4
) (
  input  logic             wr_clk,
  input  logic             wr_rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] din,
  output logic             full,
  input  logic             rd_clk,
  input  logic             rd_rst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] dout,
  output logic             empty
);

  logic [WIDTH-1:0] mem [2**AW];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  logic [AW:0] wbin_nxt, wgray_nxt;
  logic        wr_do;
  assign wr_do     = wr_en && !full;
  assign wbin_nxt  = wbin + (AW+1)'(wr_do);
  assign wgray_nxt = bin2gray(wbin_nxt);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      full     <= 1'b0;
    end else begin
      wbin     <= wbin_nxt;
      wgray    <= wgray_nxt;
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      full     <= (wgray_nxt == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});
    end
  end

  always_ff @(posedge wr_clk) begin
    if (wr_do) mem[wbin[AW-1:0]] <= din;
  end

  // ---------------- read domain ----------------
  logic [AW:0] rbin_nxt, rgray_nxt;
  logic        rd_do;
  assign rd_do     = rd_en && !empty;
  assign rbin_nxt  = rbin + (AW+1)'(rd_do);
  assign rgray_nxt = bin2gray(rbin_nxt);

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
      empty    <= 1'b1;
    end else begin
      rbin     <= rbin_nxt;
      rgray    <= rgray_nxt;
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      empty    <= (rgray_nxt == wgray_r2);
    end
  end

  assign dout = mem[rbin[AW-1:0]];

  // A write while full would overwrite unread data; the sources must not do it.
  always_ff @(posedge wr_clk) begin
    if (wr_rst_n) a_no_overflow: assert (!(wr_en && full)) else $error("async_fifo: write while full");
  end

endmodule
