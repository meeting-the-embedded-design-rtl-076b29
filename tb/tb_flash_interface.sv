// tb_flash_interface: self-checking test of the prefetching flash interface.
//
// A flash model with three wait states backs the interface. The test checks read data
// against the model's formula, that a buffered read is answered in its own cycle, that a
// cold miss costs the flash latency plus two cycles, that the next sequential line is
// prefetched while the core is busy elsewhere so the next line hits, that a jump
// elsewhere in flash (a literal pool load) misses, that writes are refused, and that a
// sequential stream of reads needs fewer flash reads than it has lines touched twice.
module tb_flash_interface;
  import cm3_pkg::*;
  localparam int unsigned WAIT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t req;
  bus_rsp_t rsp;
  logic flash_req, flash_ready;
  logic [28:0] flash_addr;
  logic [63:0] flash_rdata;
  logic ev_hit, ev_miss, ev_prefetch;
  int checks = 0, failures = 0;
  int n_hit = 0, n_miss = 0, n_pref = 0;

  flash_interface dut (.clk, .rst_n, .req, .rsp, .flash_req, .flash_addr, .flash_ready,
                       .flash_rdata, .ev_hit, .ev_miss, .ev_prefetch);
  tb_flash_model #(.WAIT(WAIT)) u_flash (.clk, .rst_n, .flash_req, .flash_addr, .flash_ready,
                                         .flash_rdata);

  always @(posedge clk) begin
    n_hit  += int'(ev_hit);
    n_miss += int'(ev_miss);
    n_pref += int'(ev_prefetch);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(input logic [31:0] a, input logic wr, output logic [31:0] rdata,
                      output logic err, output int cyc);
    req = '{valid: 1'b1, addr: a, write: wr, size: SZ_WORD, wdata: 32'h0, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!rsp.ready);
    rdata = rsp.rdata;
    err   = rsp.err;
    #1 req = BUS_REQ_IDLE;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    logic err;
    int cyc, r0;
    req = BUS_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // let the start-up prefetch of line 1 finish
    repeat (10) @(posedge clk); #1;
    // cold miss far away
    xfer(32'h0000_1000, 0, rd, err, cyc);
    check(rd == u_flash.word_at(32'h400), "cold miss data");
    check(cyc == WAIT + 3, $sformatf("cold miss latency %0d", cyc));
    // the other word of the same line hits in its own cycle
    xfer(32'h0000_1004, 0, rd, err, cyc);
    check(rd == u_flash.word_at(32'h401) && cyc == 1, $sformatf("same-line hit cyc %0d rd %h exp %h", cyc, rd, u_flash.word_at(32'h401)));
    // give the prefetcher time, then the next line hits
    repeat (WAIT + 3) @(posedge clk); #1;
    r0 = u_flash.n_reads;
    xfer(32'h0000_1008, 0, rd, err, cyc);
    check(rd == u_flash.word_at(32'h402) && cyc == 1, "prefetched next line hits");
    check(u_flash.n_reads == r0, "prefetched line needed no new flash read");
    // literal pool load elsewhere misses
    xfer(32'h0000_3F00, 0, rd, err, cyc);
    check(rd == u_flash.word_at(32'hFC0), "literal load data");
    check(cyc > 1, "literal load breaks the stream and waits");
    // write refused
    xfer(32'h0000_0000, 1, rd, err, cyc);
    check(err && cyc == 1, "write refused with err");
    // sequential stream: two reads per line with one idle cycle, as a core running
    // 16-bit instructions would do
    r0 = u_flash.n_reads;
    for (int w = 0; w < 128; w++) begin
      xfer(32'h0000_8000 + 4 * w, 0, rd, err, cyc);
      check(rd == u_flash.word_at(32'h2000 + w) && !err, "stream data");
      @(posedge clk); #1;
    end
    check(u_flash.n_reads - r0 <= 66, $sformatf("stream reads each line about once: %0d", u_flash.n_reads - r0));
    // random reads
    for (int i = 0; i < 200; i++) begin
      int unsigned w;
      w = $urandom_range(0, 4095);
      xfer(4 * w, 0, rd, err, cyc);
      check(rd == u_flash.word_at(w), "random read data");
    end
    check(n_hit > 0 && n_miss > 0 && n_pref > 0, "hit, miss and prefetch events all seen");
    $display("hits %0d misses %0d prefetches %0d", n_hit, n_miss, n_pref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
