// tb_sram_periph_if: self-checking test of the SRAM and peripheral port.
//
// Drives byte, halfword and word writes and reads into the SRAM and compares with a
// reference array, checks the two-cycle access time, the error answer beyond the SRAM
// size, and that peripheral requests reach the outside port and its answers come back.
module tb_sram_periph_if;
  import cm3_pkg::*;
  localparam int unsigned BYTES = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t sram_req, periph_req, ext_req;
  bus_rsp_t sram_rsp, periph_rsp, ext_rsp;
  int checks = 0, failures = 0;

  sram_periph_if #(.SRAM_BYTES(BYTES)) dut (.clk, .rst_n, .sram_req, .sram_rsp, .periph_req,
                                            .periph_rsp, .ext_periph_req(ext_req),
                                            .ext_periph_rsp(ext_rsp));
  tb_bus_mem #(.LATENCY(3)) u_ext (.clk, .rst_n, .req(ext_req), .rsp(ext_rsp));

  logic [7:0] ref_mem [BYTES];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(input logic [31:0] a, input logic wr, input size_e sz, input logic [31:0] wd,
                      output logic [31:0] rdata, output logic err, output int cyc);
    sram_req = '{valid: 1'b1, addr: a, write: wr, size: sz, wdata: wd, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!sram_rsp.ready);
    rdata = sram_rsp.rdata; err = sram_rsp.err;
    #1 sram_req = BUS_REQ_IDLE;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd, a, wd;
    logic err;
    int cyc;
    size_e sz;
    sram_req = BUS_REQ_IDLE; periph_req = BUS_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // fill with words
    for (int w = 0; w < BYTES / 4; w++) begin
      wd = $urandom;
      xfer(SRAM_BASE + 4 * w, 1, SZ_WORD, wd, rd, err, cyc);
      for (int b = 0; b < 4; b++) ref_mem[4 * w + b] = wd[8 * b +: 8];
    end
    check(cyc == 2, "write takes two cycles");
    // random mixed accesses
    for (int i = 0; i < 2000; i++) begin
      a  = $urandom_range(0, BYTES - 1);
      sz = size_e'($urandom_range(0, 2));
      if (sz == SZ_HALF) a[0] = 0;
      if (sz == SZ_WORD) a[1:0] = 0;
      if ($urandom_range(0, 1)) begin
        wd = $urandom;
        xfer(SRAM_BASE + a, 1, sz, wd, rd, err, cyc);
        for (int b = 0; b < 4; b++)
          if (byte_enables(sz, a[1:0])[b]) ref_mem[{a[31:2], 2'b00} + b] = wd[8 * b +: 8];
      end else begin
        xfer(SRAM_BASE + a, 0, sz, 0, rd, err, cyc);
        for (int b = 0; b < 4; b++)
          if (byte_enables(sz, a[1:0])[b])
            check(rd[8 * b +: 8] == ref_mem[{a[31:2], 2'b00} + b], $sformatf("read byte %0d of %h", b, a));
        check(cyc == 2 && !err, "read takes two cycles, no error");
      end
    end
    // beyond the SRAM
    xfer(SRAM_BASE + BYTES, 0, SZ_WORD, 0, rd, err, cyc);
    check(err, "access beyond the SRAM answers err");
    // peripheral port
    periph_req = '{valid: 1'b1, addr: 32'h4000_1000, write: 1'b1, size: SZ_WORD, wdata: 32'h1234_5678, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!periph_rsp.ready);
    #1 periph_req = BUS_REQ_IDLE;
    check(cyc == 4, "peripheral answer after the outside's wait cycles");
    check(u_ext.rd(32'h4000_1000) == 8'h78 && u_ext.rd(32'h4000_1003) == 8'h12, "peripheral write arrived");
    periph_req = '{valid: 1'b1, addr: 32'h4000_1000, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
    do @(posedge clk); while (!periph_rsp.ready);
    check(periph_rsp.rdata == 32'h1234_5678, "peripheral read back");
    #1 periph_req = BUS_REQ_IDLE;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
