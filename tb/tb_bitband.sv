// tb_bitband: self-checking test of the bit-band alias unit.
//
// The unit sits between a test driver and a memory model with one wait cycle. The test
// checks plain pass-through accesses, alias reads and writes in the SRAM and Peripheral
// windows against a byte-level reference model kept by the testbench, that neighbouring
// bits are untouched, that the read of an alias write is locked, and that an alias write
// costs exactly two downstream transfers.
module tb_bitband;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t up_req, dn_req;
  bus_rsp_t up_rsp, dn_rsp;
  int checks = 0, failures = 0;

  bitband dut (.clk, .rst_n, .up_req, .up_rsp, .dn_req, .dn_rsp);
  tb_bus_mem #(.LATENCY(1)) u_mem (.clk, .rst_n, .req(dn_req), .rsp(dn_rsp));

  logic [7:0] ref_mem [logic [31:0]];
  function automatic logic [7:0] ref_rd(input logic [31:0] a);
    return ref_mem.exists(a) ? ref_mem[a] : (a[7:0] ^ 8'h5A);
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(input logic [31:0] a, input logic wr, input size_e sz, input logic [31:0] wd,
                      output logic [31:0] rdata, output int cyc);
    up_req = '{valid: 1'b1, addr: a, write: wr, size: sz, wdata: wd, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!up_rsp.ready);
    rdata = up_rsp.rdata;
    #1 up_req = BUS_REQ_IDLE;
  endtask

  // alias address of bit b of the byte at region address ra
  function automatic logic [31:0] alias_of(input logic [31:0] ra, input int b);
    return {ra[31:20], 20'h0} + BB_ALIAS_OFFSET + {ra[19:0], 3'b000} + b;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, a, ra;
    int cyc, n0, b, v;
    up_req = BUS_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // pass-through word write and read
    xfer(32'h2000_0010, 1, SZ_WORD, 32'hCAFE_F00D, rd, cyc);
    ref_mem[32'h2000_0010] = 8'h0D; ref_mem[32'h2000_0011] = 8'hF0;
    ref_mem[32'h2000_0012] = 8'hFE; ref_mem[32'h2000_0013] = 8'hCA;
    xfer(32'h2000_0010, 0, SZ_WORD, 0, rd, cyc);
    check(rd == 32'hCAFE_F00D, "pass-through read");
    check(cyc == 2, "pass-through read takes the slave's two cycles");
    // alias write of bit 5 of byte 0x2000_0011 (0xF0): clear bit 5 -> 0xD0
    n0 = u_mem.n_xfers;
    xfer(alias_of(32'h2000_0011, 5), 1, SZ_BYTE, 32'h0, rd, cyc);
    check(u_mem.n_xfers - n0 == 2, "alias write is a read plus a write");
    check(u_mem.rd(32'h2000_0011) == 8'hD0, "alias clear of bit 5");
    check(u_mem.rd(32'h2000_0010) == 8'h0D && u_mem.rd(32'h2000_0012) == 8'hFE, "neighbours kept");
    check(u_mem.n_lock_cycles >= 1, "read of an alias write is locked");
    ref_mem[32'h2000_0011] = 8'hD0;
    // alias set of bit 0 of byte 0x2000_0012 (0xFE) -> 0xFF, data in lane of the alias address
    a = alias_of(32'h2000_0012, 0);
    xfer(a, 1, SZ_BYTE, 32'h1 << (8 * a[1:0]), rd, cyc);
    check(u_mem.rd(32'h2000_0012) == 8'hFF, "alias set of bit 0");
    ref_mem[32'h2000_0012] = 8'hFF;
    // alias read
    xfer(alias_of(32'h2000_0011, 5), 0, SZ_BYTE, 0, rd, cyc);
    check(rd == 32'h0, "alias read of a cleared bit");
    xfer(alias_of(32'h2000_0011, 4), 0, SZ_BYTE, 0, rd, cyc);
    check(rd == 32'h0101_0101, "alias read of a set bit");
    // peripheral window
    xfer(alias_of(32'h400F_FFFF, 7), 1, SZ_BYTE, 32'h0, rd, cyc);
    check(u_mem.rd(32'h400F_FFFF) == ((8'hFF ^ 8'h5A) & 8'h7F), "peripheral alias clear of bit 7");
    ref_mem[32'h400F_FFFF] = (8'hFF ^ 8'h5A) & 8'h7F;
    // random alias traffic against the reference model
    for (int i = 0; i < 300; i++) begin
      ra = ($urandom_range(0, 1) ? SRAM_BASE : PERIPH_BASE) + ($urandom_range(0, 63));
      b  = $urandom_range(0, 7);
      a  = alias_of(ra, b);
      if ($urandom_range(0, 1)) begin
        v = $urandom_range(0, 1);
        xfer(a, 1, SZ_BYTE, v << (8 * a[1:0]), rd, cyc);
        begin
          logic [7:0] t;
          t = ref_rd(ra); t[b] = v[0]; ref_mem[ra] = t;
        end
        check(u_mem.rd(ra) == ref_rd(ra), "random alias write");
        check(cyc == 4, "alias write takes four cycles with a one-wait slave");
      end else begin
        xfer(a, 0, SZ_BYTE, 0, rd, cyc);
        check(rd[0] == ref_rd(ra)[b] && rd[8] == rd[0], "random alias read");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
