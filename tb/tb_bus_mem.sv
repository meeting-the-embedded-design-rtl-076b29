// tb_bus_mem: behavioural memory slave for testbenches.
//
// Answers cm3_pkg valid/ready requests after LATENCY wait cycles (ready in cycle
// LATENCY+1 of a request) from a sparse byte-addressed store; unwritten bytes read as
// their address's low byte xor 0x5A so that reads of fresh memory are still predictable.
// Byte, halfword and word writes update the addressed byte lanes. It counts the
// transfers it served and how many cycles it saw lock raised.
module tb_bus_mem
  import cm3_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t req,
  output bus_rsp_t rsp
);
  logic [7:0] mem [logic [31:0]];
  int unsigned wait_cnt;
  int unsigned n_xfers;
  int unsigned n_lock_cycles;

  function automatic logic [7:0] rd(input logic [31:0] a);
    return mem.exists(a) ? mem[a] : (a[7:0] ^ 8'h5A);
  endfunction

  function automatic void wr(input logic [31:0] a, input logic [7:0] d);
    mem[a] = d;
  endfunction

  logic [31:0] wa;
  logic [3:0]  be;
  always_comb begin
    wa = {req.addr[31:2], 2'b00};
    be = byte_enables(req.size, req.addr[1:0]);
    rsp = BUS_RSP_IDLE;
    rsp.ready = req.valid && wait_cnt == LATENCY;
    rsp.rdata = {rd(wa + 3), rd(wa + 2), rd(wa + 1), rd(wa)};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_cnt      <= 0;
      n_xfers       <= 0;
      n_lock_cycles <= 0;
    end else begin
      if (req.valid && req.lock) n_lock_cycles <= n_lock_cycles + 1;
      if (rsp.ready) begin
        wait_cnt <= 0;
        n_xfers  <= n_xfers + 1;
        if (req.write)
          for (int b = 0; b < 4; b++)
            if (be[b]) mem[wa + b] = req.wdata[8*b +: 8];
      end else if (req.valid) begin
        wait_cnt <= wait_cnt + 1;
      end
    end
  end
endmodule
