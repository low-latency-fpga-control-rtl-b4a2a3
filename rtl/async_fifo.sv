// async_fifo -- dual-clock FIFO that carries camera pixels from the Cameralink pixel clock into
// the 250 MHz AXI-Stream clock.
//
// Classic Gray-code pointer FIFO: DEPTH (a power of two) entries of W bits in a register array,
// binary write/read pointers with one extra wrap bit, their Gray-coded copies passed through
// two-flop synchronisers into the opposite clock domain.  full is computed in the write domain,
// empty in the read domain, both from registered pointers, so they are conservative.
// Show-ahead read: rd_data is valid whenever empty is low; rd_en pops it.
// Timing: a word written at a write-clock edge is visible at the read side 2-3 read-clock
// cycles later (synchroniser delay).  Writes while full and reads while empty are ignored.
// This FIFO is the design's choice for the paper's "double-buffered FIFO"; the paper does not
// give its structure or depth.
module async_fifo #(
  parameter int W     = 18,
  parameter int DEPTH = 16,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_en,
  input  logic [W-1:0] wr_data,
  output logic         full,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  input  logic         rd_en,
  output logic [W-1:0] rd_data,
  output logic         empty
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  rgray_w1, rgray_w2;  // read pointer in write domain
  logic [AW:0]  wgray_r1, wgray_r2;  // write pointer in read domain

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write domain
  wire do_wr = wr_en && !full;
  always_ff @(posedge wr_clk) if (do_wr) mem[wbin[AW-1:0]] <= wr_data;

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray;
      rgray_w2 <= rgray_w1;
      if (do_wr) begin
        wbin  <= wbin + 1'b1;
        wgray <= bin2gray(wbin + 1'b1);
      end
    end
  end
  assign full = (wgray == {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  // read domain
  wire do_rd = rd_en && !empty;
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray;
      wgray_r2 <= wgray_r1;
      if (do_rd) begin
        rbin  <= rbin + 1'b1;
        rgray <= bin2gray(rbin + 1'b1);
      end
    end
  end
  assign empty   = (rgray == wgray_r2);
  assign rd_data = mem[rbin[AW-1:0]];

  initial assert (DEPTH >= 4 && (1 << AW) == DEPTH) else $error("async_fifo: DEPTH must be a power of two >= 4");

endmodule
