// sram_periph_if: on-chip SRAM and the port to the peripheral bus.
//
// The SRAM slave holds SRAM_BYTES of RAM as an array of 32-bit words with byte-lane
// write enables (byte, halfword and word transfers). Each access takes two cycles: the
// array is read or written on the first clock edge after the request appears and ready
// is given in the following cycle with the read data, which keeps the array a plain
// synchronous memory. Addresses beyond SRAM_BYTES in the SRAM region answer with err.
// The peripheral side forwards the bus matrix's peripheral request to the outside of
// the subsystem and returns the outside's response; errors from the outside are kept.
//
// Only the block's name ("SRAM peripheral I/F") comes from the paper; the SRAM size,
// its timing and the error rule are this design's choices.
module sram_periph_if
  import cm3_pkg::*;
#(
  parameter int unsigned SRAM_BYTES = 65536
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t sram_req,
  output bus_rsp_t sram_rsp,
  input  bus_req_t periph_req,
  output bus_rsp_t periph_rsp,
  output bus_req_t ext_periph_req,
  input  bus_rsp_t ext_periph_rsp
);

  localparam int unsigned WORDS = SRAM_BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0] mem [WORDS];
  logic        pend_q;
  logic [31:0] rdata_q;
  logic        err_q;
  logic [AW-1:0] widx;
  logic [3:0]  be;
  logic        in_range;

  assign widx     = sram_req.addr[AW+1:2];
  assign be       = byte_enables(sram_req.size, sram_req.addr[1:0]);
  assign in_range = (sram_req.addr[28:0] < 29'(SRAM_BYTES));

  always_ff @(posedge clk) begin
    if (sram_req.valid && !pend_q && in_range) begin
      if (sram_req.write) begin
        for (int b = 0; b < 4; b++)
          if (be[b]) mem[widx][8*b +: 8] <= sram_req.wdata[8*b +: 8];
      end
      rdata_q <= mem[widx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= 1'b0;
      err_q  <= 1'b0;
    end else begin
      if (sram_req.valid && !pend_q) begin
        pend_q <= 1'b1;
        err_q  <= !in_range;
      end else begin
        pend_q <= 1'b0;
      end
    end
  end

  always_comb begin
    sram_rsp.ready = pend_q;
    sram_rsp.rdata = rdata_q;
    sram_rsp.err   = err_q;
  end

  assign ext_periph_req = periph_req;
  assign periph_rsp     = ext_periph_rsp;

endmodule
