// tb_async_fifo: checks the dual-clock output FIFO.
//
// The write clock runs at 250 MHz and the read clock at a slightly different
// rate and phase, as the PCI Express user clock would. Random 64-bit words
// are written with random gaps and read with random gaps; a reference queue
// keeps every word accepted (wr_en while not full) and each word read must be
// the oldest one in it. A phase with reads stopped fills the FIFO, so that
// full is reached and a dropped write must set the sticky overflow flag; the
// FIFO is then drained until empty.
`timescale 1ps/1ps
module tb_async_fifo;
  localparam int W = 64, AW = 10;
  logic wclk = 1'b0, rclk = 1'b0, wrst = 1'b1, rrst = 1'b1;
  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [W-1:0] wdata = '0, rdata;
  logic full, overflow, empty;
  int checks = 0, failures = 0;
  int full_seen = 0, empty_seen = 0, drops = 0;
  logic [W-1:0] q [$];
  bit read_pending = 1'b0;
  bit stop_reads = 1'b0;
  int write_pct = 90, read_pct = 95;

  initial begin #10000; forever begin wclk = 1'b1; #2000; wclk = 1'b0; #2000; end end
  initial begin #10777; forever begin rclk = 1'b1; #1990; rclk = 1'b0; #1990; end end

  async_fifo dut (.*);

  initial begin : watchdog
    #(4000 * 200000);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // write side
  always @(posedge wclk) begin
    if (!wrst) begin
      if (wr_en && !full) q.push_back(wdata);
      if (wr_en && full) drops++;
      if (full) full_seen++;
    end
    #1;
    wr_en <= ($urandom % 100) < write_pct;
    wdata <= {$urandom, $urandom};
  end

  // read side
  always @(posedge rclk) begin
    if (!rrst) begin
      if (read_pending) begin
        checks++;
        if (q.size() == 0) begin failures++; $display("FAIL read from empty reference"); end
        else begin
          logic [W-1:0] e;
          e = q.pop_front();
          if (rdata !== e) begin
            failures++;
            if (failures < 10) $display("FAIL data %h exp %h", rdata, e);
          end
        end
      end
      read_pending = rd_en && !empty;
      if (empty) empty_seen++;
    end
    #1;
    rd_en <= !stop_reads && (($urandom % 100) < read_pct);
  end

  initial begin
    repeat (5) @(posedge wclk);
    wrst = 1'b0;
    rrst = 1'b0;
    repeat (5000) @(posedge wclk);
    // fill: stop reading
    stop_reads = 1'b1;
    write_pct = 100;
    repeat (1500) @(posedge wclk);
    checks++;
    if (!full || !overflow) begin failures++; $display("FAIL full=%0b overflow=%0b after filling", full, overflow); end
    // drain
    write_pct = 0;
    stop_reads = 1'b0;
    read_pct = 100;
    repeat (1500) @(posedge rclk);
    checks++;
    if (!empty || q.size() != 0) begin failures++; $display("FAIL not drained: %0d left", q.size()); end
    checks++;
    if (full_seen == 0 || empty_seen == 0 || drops == 0) begin failures++; $display("FAIL full/empty/drop not exercised"); end
    $display("full cycles %0d, empty cycles %0d, dropped writes %0d", full_seen, empty_seen, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
