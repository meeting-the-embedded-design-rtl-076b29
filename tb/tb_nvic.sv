// tb_nvic: self-checking test of the interrupt controller and its exception sequencer.
//
// A small core model in the testbench runs each handler for a set number of cycles after
// handler_start and then pulses exc_return. A monitor measures every stretch of
// core_stall and labels it by the event that began it. The test checks the sequence of
// the paper's interrupt timing figure (two interrupts raised together: 16-cycle entry,
// first handler, 6-cycle tail-chain, second handler, 12-cycle exit), that the more urgent
// line is served first, nesting by a more urgent interrupt and the return into the
// preempted handler, that an equally urgent interrupt waits for the running one and is
// then tail-chained, that disabled lines stay pending, the register port, and random
// bursts of up to eight lines with random priorities against a sorted reference order.
module tb_nvic;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] irq;
  logic exc_return, core_stall, handler_start, handler_mode;
  logic [4:0] exc_num;
  logic ev_push, ev_tail, ev_pop, ev_preempt;
  bus_req_t reg_req;
  bus_rsp_t reg_rsp;
  int checks = 0, failures = 0;

  nvic dut (.clk, .rst_n, .irq, .exc_return, .core_stall, .handler_start, .exc_num,
            .handler_mode, .ev_push, .ev_tail, .ev_pop, .ev_preempt, .reg_req, .reg_rsp);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // stall monitor: "P16" = push of 16 cycles, "T6", "O12" (pop)
  string log_q [$];
  string kind;
  int run;
  logic stall_d;
  always @(posedge clk) begin
    if (ev_push) kind = "P";
    if (ev_tail) kind = "T";
    if (ev_pop)  kind = "O";
    if (core_stall) run++;
    else if (stall_d) begin
      log_q.push_back($sformatf("%s%0d", kind, run));
      run = 0;
    end
    stall_d <= core_stall;
  end

  // core model: handler of line n runs hlen[n] cycles
  int hlen [32];
  int started [$];
  int cur_stack [$];
  int remaining [$];
  initial begin
    exc_return = 0;
    forever begin
      @(posedge clk); #1;
      exc_return = 0;
      if (handler_start) begin
        started.push_back(int'(exc_num));
        remaining.push_back(hlen[exc_num]);
        cur_stack.push_back(int'(exc_num));
      end else if (!core_stall && handler_mode && remaining.size() > 0) begin
        if (remaining[$] == 0) begin
          exc_return = 1;
          void'(remaining.pop_back());
          void'(cur_stack.pop_back());
        end else remaining[$]--;
      end
    end
  end

  task automatic reg_wr(input logic [11:0] off, input logic [31:0] d);
    reg_req = '{valid: 1'b1, addr: NVIC_BASE + off, write: 1'b1, size: SZ_WORD, wdata: d, lock: 1'b0};
    @(posedge clk); #1 reg_req = BUS_REQ_IDLE;
  endtask

  task automatic reg_rd(input logic [11:0] off, output logic [31:0] d);
    reg_req = '{valid: 1'b1, addr: NVIC_BASE + off, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
    #1 d = reg_rsp.rdata;
    @(posedge clk); #1 reg_req = BUS_REQ_IDLE;
  endtask

  task automatic set_prio(input int n, input int p);
    logic [31:0] d;
    reg_rd(12'(12'h400 + 4 * (n / 4)), d);
    d[8 * (n % 4) + 5 +: 3] = 3'(p);
    reg_wr(12'(12'h400 + 4 * (n / 4)), d);
  endtask

  task automatic wait_thread();
    int guard = 0;
    while (!handler_mode && guard < 100) begin @(posedge clk); guard++; end
    guard = 0;
    do begin @(posedge clk); guard++; end while ((handler_mode || core_stall) && guard < 2000);
    repeat (3) @(posedge clk);
    #1;
  endtask

  function automatic string joinq(input string q [$]);
    string s = "";
    foreach (q[i]) s = {s, q[i], " "};
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    irq = 0; reg_req = BUS_REQ_IDLE; run = 0; kind = "-"; stall_d = 0;
    foreach (hlen[i]) hlen[i] = 20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // registers
    reg_wr(12'h100, 32'h0000_00FF);
    reg_rd(12'h100, d);
    check(d == 32'h0000_00FF, "enable set reads back");
    reg_wr(12'h180, 32'h0000_00F0);
    reg_rd(12'h100, d);
    check(d == 32'h0000_000F, "enable clear");
    set_prio(1, 1);
    set_prio(2, 3);
    set_prio(3, 0);
    set_prio(0, 3);
    reg_rd(12'h400, d);
    check(d == {3'd0, 5'd0, 3'd3, 5'd0, 3'd1, 5'd0, 3'd3, 5'd0}, "priority register");

    // figure sequence: IRQ1 (more urgent) and IRQ2 together
    log_q.delete(); started.delete();
    irq[1] = 1; irq[2] = 1;
    @(posedge clk); #1 irq = 0;
    wait_thread();
    check(joinq(log_q) == "P16 T6 O12 ", {"entry/tail-chain/exit timing: ", joinq(log_q)});
    check(started.size() == 2 && started[0] == 1 && started[1] == 2, "IRQ1 served before IRQ2");

    // single interrupt: push then pop, no tail-chain
    log_q.delete(); started.delete();
    irq[2] = 1; @(posedge clk); #1 irq = 0;
    wait_thread();
    check(joinq(log_q) == "P16 O12 ", {"single interrupt: ", joinq(log_q)});

    // nesting: IRQ2 running, IRQ3 (priority 0) preempts, then return into IRQ2
    log_q.delete(); started.delete();
    hlen[2] = 60;
    irq[2] = 1; @(posedge clk); #1 irq = 0;
    repeat (30) @(posedge clk); #1;
    check(handler_mode && exc_num == 2 && !core_stall, "IRQ2 handler running");
    irq[3] = 1; @(posedge clk); #1 irq = 0;
    wait_thread();
    check(joinq(log_q) == "P16 P16 O12 O12 ", {"nested: ", joinq(log_q)});
    check(started.size() == 2 && started[0] == 2 && started[1] == 3, "IRQ3 preempted IRQ2");
    hlen[2] = 20;

    // equal priority does not preempt: IRQ0 (prio 3) raised during IRQ2 (prio 3) -> tail-chain
    log_q.delete(); started.delete();
    irq[2] = 1; @(posedge clk); #1 irq = 0;
    repeat (22) @(posedge clk); #1;
    irq[0] = 1; @(posedge clk); #1 irq = 0;
    wait_thread();
    check(joinq(log_q) == "P16 T6 O12 ", {"equal priority chained: ", joinq(log_q)});
    check(started.size() == 2 && started[1] == 0, "IRQ0 after IRQ2");

    // disabled line stays pending, then is taken when enabled
    log_q.delete(); started.delete();
    irq[9] = 1; @(posedge clk); #1 irq = 0;
    repeat (30) @(posedge clk); #1;
    check(!handler_mode && log_q.size() == 0, "disabled line not taken");
    reg_rd(12'h200, d);
    check(d[9], "disabled line pending");
    reg_wr(12'h100, 32'h0000_0200);
    wait_thread();
    check(started.size() == 1 && started[0] == 9, "line taken once enabled");
    reg_rd(12'h200, d);
    check(!d[9], "pending cleared on entry");

    // software-set pending and three chained handlers
    log_q.delete(); started.delete();
    reg_wr(12'h200, 32'h0000_0206);
    wait_thread();
    check(joinq(log_q) == "P16 T6 T6 O12 ", {"three chained: ", joinq(log_q)});
    // random bursts: lines 0-7 with random priorities raised together; the handlers must
    // run once each, most urgent first (ties by line number), all chained after one entry
    reg_wr(12'h100, 32'h0000_00FF);
    for (int round = 0; round < 40; round++) begin
      int pr [8];
      int order [$];
      logic [7:0] burst;
      string exp_log;
      order.delete();
      for (int n = 0; n < 8; n++) begin
        pr[n] = $urandom_range(0, 7);
        set_prio(n, pr[n]);
      end
      burst = 8'($urandom_range(1, 255));
      for (int p = 0; p < 8; p++)
        for (int n = 0; n < 8; n++)
          if (burst[n] && pr[n] == p) order.push_back(n);
      exp_log = "P16 ";
      for (int k = 1; k < order.size(); k++) exp_log = {exp_log, "T6 "};
      exp_log = {exp_log, "O12 "};
      log_q.delete(); started.delete();
      irq[7:0] = burst; @(posedge clk); #1 irq = 0;
      wait_thread();
      check(started.size() == order.size(), $sformatf("burst %h: every raised line served once", burst));
      for (int k = 0; k < order.size() && k < started.size(); k++)
        check(started[k] == order[k], $sformatf("burst %h: handler %0d is line %0d", burst, k, order[k]));
      check(joinq(log_q) == exp_log, {"burst timing: ", joinq(log_q), " expected ", exp_log});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
