// tb_bus_matrix: self-checking test of the three-master, four-slave bus matrix.
//
// Each slave is a memory model with its own latency. The test checks address decoding
// (each master's write lands in the right slave), that two masters reach two different
// slaves in the same cycles (parallel vector fetch and stacking), that on a shared slave
// data beats fetch beats debug, that a locked transfer keeps the slave for its master's
// next request, and random traffic from all three masters at once against a reference.
module tb_bus_matrix;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t m_req [3];
  bus_rsp_t m_rsp [3];
  bus_req_t s_req [4];
  bus_rsp_t s_rsp [4];
  int checks = 0, failures = 0;

  bus_matrix dut (.clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp);
  tb_bus_mem #(.LATENCY(2)) u_s0 (.clk, .rst_n, .req(s_req[0]), .rsp(s_rsp[0]));
  tb_bus_mem #(.LATENCY(1)) u_s1 (.clk, .rst_n, .req(s_req[1]), .rsp(s_rsp[1]));
  tb_bus_mem #(.LATENCY(3)) u_s2 (.clk, .rst_n, .req(s_req[2]), .rsp(s_rsp[2]));
  tb_bus_mem #(.LATENCY(0)) u_s3 (.clk, .rst_n, .req(s_req[3]), .rsp(s_rsp[3]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int done_at [3];
  task automatic xfer(input int m, input logic [31:0] a, input logic wr, input logic [31:0] wd,
                      input logic lk, output logic [31:0] rdata);
    m_req[m] = '{valid: 1'b1, addr: a, write: wr, size: SZ_WORD, wdata: wd, lock: lk};
    do @(posedge clk); while (!m_rsp[m].ready);
    rdata = m_rsp[m].rdata;
    done_at[m] = $time;
    #1 m_req[m] = BUS_REQ_IDLE;
  endtask

  function automatic logic [31:0] slave_word(input int s, input logic [31:0] a);
    case (s)
      0: return {u_s0.rd(a + 3), u_s0.rd(a + 2), u_s0.rd(a + 1), u_s0.rd(a)};
      1: return {u_s1.rd(a + 3), u_s1.rd(a + 2), u_s1.rd(a + 1), u_s1.rd(a)};
      2: return {u_s2.rd(a + 3), u_s2.rd(a + 2), u_s2.rd(a + 1), u_s2.rd(a)};
      default: return {u_s3.rd(a + 3), u_s3.rd(a + 2), u_s3.rd(a + 1), u_s3.rd(a)};
    endcase
  endfunction

  logic [31:0] base_of [4] = '{32'h0000_0000, 32'h2000_0000, 32'h4000_0000, 32'hE000_0000};

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] r0, r1, r2;
    int t0;
    foreach (m_req[m]) m_req[m] = BUS_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // decoding: every master writes into every slave
    for (int m = 0; m < 3; m++)
      for (int s = 0; s < 4; s++) begin
        xfer(m, base_of[s] + 32'h100 + 4 * m, 1, 32'hD0D0_0000 + 16 * m + s, 0, r0);
        check(slave_word(s, base_of[s] + 32'h100 + 4 * m) == 32'hD0D0_0000 + 16 * m + s,
              $sformatf("master %0d write reached slave %0d", m, s));
      end
    check(u_s2.rd(32'hA000_0000) == 8'h5A && u_s2.n_xfers == 3, "external space decodes to slave 2");
    // parallel: fetch to code while data goes to SRAM, both started in one cycle
    t0 = $time;
    fork
      xfer(0, 32'h0000_0200, 0, 0, 0, r0);
      xfer(1, 32'h2000_0200, 1, 32'h1111_2222, 0, r1);
    join
    check(done_at[0] - t0 < 40 && done_at[1] - t0 < 40, "different slaves served in parallel");
    // contention on SRAM: data first, then fetch, then debug
    fork
      xfer(0, 32'h2000_0300, 0, 0, 0, r0);
      xfer(1, 32'h2000_0304, 0, 0, 0, r1);
      xfer(2, 32'h2000_0308, 0, 0, 0, r2);
    join
    check(done_at[1] < done_at[0] && done_at[0] < done_at[2], "priority data > fetch > debug");
    check(r0 == slave_word(1, 32'h2000_0300) && r1 == slave_word(1, 32'h2000_0304) &&
          r2 == slave_word(1, 32'h2000_0308), "contended reads return the right data");
    // lock: data does a locked read then a write; debug waiting on SRAM must come after both
    fork
      begin
        xfer(1, 32'h2000_0400, 0, 0, 1, r1);
        xfer(1, 32'h2000_0400, 1, 32'h0BAD_F00D, 0, r1);
      end
      begin
        #2 xfer(2, 32'h2000_0400, 0, 0, 0, r2);
      end
    join
    check(r2 == 32'h0BAD_F00D, "locked pair not split by another master");
    // random traffic from all masters
    for (int k = 0; k < 200; k++) begin
      logic [31:0] a [3], w [3];
      logic [31:0] rr [3];
      for (int m = 0; m < 3; m++) begin
        a[m] = base_of[$urandom_range(0, 3)] + 32'h1000 * m + 4 * $urandom_range(0, 15);
        w[m] = $urandom;
      end
      fork
        xfer(0, a[0], 1, w[0], 0, rr[0]);
        xfer(1, a[1], 1, w[1], 0, rr[1]);
        xfer(2, a[2], 1, w[2], 0, rr[2]);
      join
      for (int m = 0; m < 3; m++)
        check(slave_word(int'(decode_slave(a[m])), a[m]) == w[m], "random write landed");
      fork
        xfer(0, a[0], 0, 0, 0, rr[0]);
        xfer(1, a[1], 0, 0, 0, rr[1]);
        xfer(2, a[2], 0, 0, 0, rr[2]);
      join
      for (int m = 0; m < 3; m++) check(rr[m] == w[m], "random read back");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
