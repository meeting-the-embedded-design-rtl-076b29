// tb_flash_model: behavioural model of the embedded flash array for testbenches.
//
// Not synthesizable logic of this design: it stands in for the flash macro. A read of
// line flash_addr is answered with flash_ready and flash_rdata after the request has been
// held for WAIT cycles (ready in cycle WAIT+1). Word w of the flash holds
// word_at(w) = w * 0x9E3779B1 ^ 0x12345678, so any reader can compute expected data.
module tb_flash_model #(
  parameter int unsigned LINE_BITS = 64,
  parameter int unsigned WAIT      = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  flash_req,
  input  logic [31-$clog2(LINE_BITS/8):0] flash_addr,
  output logic                  flash_ready,
  output logic [LINE_BITS-1:0]  flash_rdata
);
  localparam int unsigned WPL = LINE_BITS / 32;
  int unsigned cnt;
  int unsigned n_reads;

  function automatic logic [31:0] word_at(input logic [31:0] w);
    return (w * 32'h9E37_79B1) ^ 32'h1234_5678;
  endfunction

  always_comb begin
    flash_ready = flash_req && cnt == WAIT;
    for (int i = 0; i < WPL; i++)
      flash_rdata[32*i +: 32] = word_at(32'(flash_addr) * WPL + i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0;
      n_reads <= 0;
    end else if (flash_ready) begin
      cnt <= 0;
      n_reads <= n_reads + 1;
    end else if (flash_req) begin
      cnt <= cnt + 1;
    end
  end
endmodule
