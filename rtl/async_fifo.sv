// async_fifo: dual-clock FIFO between the 250 MHz processing clock and the
// PCI Express core's 250 MHz user clock.
//
// The corrected 64-bit words are written in the processing clock domain and
// read by the PCIe side, whose clock comes from a different source. The
// classic structure is used: a 2^AW-entry memory, binary and Gray-coded
// pointers in each domain, and two-flip-flop synchronizers carrying each Gray
// pointer to the other domain. A write while full is dropped and sets the
// sticky overflow flag (cleared by wrst). The paper only says the data are
// buffered in a FIFO with 64-bit output; depth, overflow handling and the
// dual-clock structure are this design's.
//
// Interface: write side wclk/wrst/wr_en/wdata/full/overflow; read side
// rclk/rrst/rd_en/rdata/empty. rdata is registered: it holds the word read by
// rd_en from the next rclk cycle on. full and empty are conservative: each
// side sees the other side's pointer two to three of its cycles late.
module async_fifo #(
  parameter int unsigned W  = 64,
  parameter int unsigned AW = 10
) (
  input  logic         wclk,
  input  logic         wrst,
  input  logic         wr_en,
  input  logic [W-1:0] wdata,
  output logic         full,
  output logic         overflow,
  input  logic         rclk,
  input  logic         rrst,
  input  logic         rd_en,
  output logic [W-1:0] rdata,
  output logic         empty
);

  logic [W-1:0] mem [2**AW];

  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w1, rgray_w2;   // read pointer in the write domain
  logic [AW:0] wgray_r1, wgray_r2;   // write pointer in the read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write domain ----------------
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin     <= '0;
      wgray    <= '0;
      rgray_w1 <= '0;
      rgray_w2 <= '0;
      overflow <= 1'b0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (wr_en && !full) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
      if (wr_en && full) overflow <= 1'b1;
    end
  end

  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end

  // ---------------- read domain ----------------
  assign empty = (rgray == wgray_r2);

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin     <= '0;
      rgray    <= '0;
      wgray_r1 <= '0;
      wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (rd_en && !empty) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end

  always_ff @(posedge rclk) begin
    if (rd_en && !empty) rdata <= mem[rbin[AW-1:0]];
  end

endmodule
