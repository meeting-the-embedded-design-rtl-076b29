// tb_cm3_top: end-to-end test of the whole subsystem at its default parameters.
//
// A core model issues fetches and data transfers and reacts to the interrupt controller;
// a debug-port model writes registers; a flash model with three wait states and a
// peripheral memory model sit outside. One run goes through:
//   1. debug download of two flash patch words and a code stream fetched through the
//      prefetching flash interface, with a literal-pool load breaking the stream;
//   2. bit-band writes and reads in SRAM and in the peripheral space;
//   3. protection regions set up by privileged code and exercised by unprivileged code;
//   4. two interrupts raised together (16-cycle entry, during which the core model
//      stacks eight words into SRAM while fetching the vector from flash, 6-cycle
//      tail-chain, 12-cycle exit), then a nested preemption;
//   5. debug and data masters contending for SRAM, and an unmapped register address.
// Every result is compared with values the testbench computes itself. Each mechanism
// is counted, and one that never happened is a failure.
module tb_cm3_top;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t fetch_req, data_req, dbg_req, ext_req;
  bus_rsp_t fetch_rsp, data_rsp, dbg_rsp, ext_rsp;
  logic fetch_priv, data_priv;
  logic [31:0] irq;
  logic exc_return, core_stall, handler_start, handler_mode, f_fault, d_fault;
  logic [4:0] exc_num;
  logic flash_req, flash_ready;
  logic [28:0] flash_addr;
  logic [63:0] flash_rdata;
  logic [7:0] events;
  int checks = 0, failures = 0;

  cm3_top dut (
    .clk, .rst_n,
    .core_fetch_req(fetch_req), .core_fetch_priv(fetch_priv), .core_fetch_rsp(fetch_rsp),
    .core_data_req(data_req),   .core_data_priv(data_priv),   .core_data_rsp(data_rsp),
    .irq, .exc_return, .core_stall, .handler_start, .exc_num, .handler_mode,
    .mpu_fetch_fault(f_fault), .mpu_data_fault(d_fault),
    .dbg_req, .dbg_rsp,
    .flash_req, .flash_addr, .flash_ready, .flash_rdata,
    .ext_periph_req(ext_req), .ext_periph_rsp(ext_rsp),
    .events
  );
  tb_flash_model #(.WAIT(3)) u_flash (.clk, .rst_n, .flash_req, .flash_addr, .flash_ready,
                                      .flash_rdata);
  tb_bus_mem #(.LATENCY(2)) u_ext (.clk, .rst_n, .req(ext_req), .rsp(ext_rsp));

  // mechanism counters
  int n_ev [8];
  int n_fault = 0, n_bb_write = 0, n_parallel = 0, n_contend = 0, n_ppb_err = 0;
  always @(posedge clk) begin
    for (int i = 0; i < 8; i++) n_ev[i] += int'(events[i]);
    n_fault += int'(f_fault || d_fault);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fetch(input logic [31:0] a, output logic [31:0] d, output logic err, output int cyc);
    fetch_req = '{valid: 1'b1, addr: a, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!fetch_rsp.ready);
    d = fetch_rsp.rdata; err = fetch_rsp.err;
    #1 fetch_req = BUS_REQ_IDLE;
  endtask

  task automatic data(input logic [31:0] a, input logic wr, input size_e sz, input logic [31:0] wd,
                      output logic [31:0] d, output logic err, output int cyc);
    data_req = '{valid: 1'b1, addr: a, write: wr, size: sz, wdata: wd, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!data_rsp.ready);
    d = data_rsp.rdata; err = data_rsp.err;
    #1 data_req = BUS_REQ_IDLE;
  endtask

  task automatic dbg(input logic [31:0] a, input logic wr, input logic [31:0] wd,
                     output logic [31:0] d, output logic err, output int cyc);
    dbg_req = '{valid: 1'b1, addr: a, write: wr, size: SZ_WORD, wdata: wd, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!dbg_rsp.ready);
    d = dbg_rsp.rdata; err = dbg_rsp.err;
    #1 dbg_req = BUS_REQ_IDLE;
  endtask

  // privileged data write/read helpers
  logic [31:0] t_d; logic t_e; int t_c;
  task automatic pw(input logic [31:0] a, input logic [31:0] wd);
    data_priv = 1;
    data(a, 1, SZ_WORD, wd, t_d, t_e, t_c);
    check(!t_e, $sformatf("privileged write to %h", a));
  endtask

  // core model reaction to exception entry: stack eight words to SRAM and fetch the vector,
  // both during the entry stall
  logic [31:0] sp = 32'h2000_8000;
  int handler_cycles = 30;
  int entry_order [$];
  logic auto_core = 0;
  initial begin
    exc_return = 0;
    forever begin
      @(posedge clk); #1;
      if (auto_core && events[0]) begin : entry
        logic [31:0] vec, d; logic e; int c, t0, tf, ts;
        t0 = $time;
        @(posedge clk); #1;              // exc_num names the line once entry has begun
        fork
          begin
            fetch(32'h40 + 4 * 32'(exc_num), vec, e, c);
            tf = $time;
            check(vec == u_flash.word_at(16 + 32'(exc_num)) && !e, "vector fetched from flash");
          end
          begin
            for (int r = 0; r < 8; r++) begin
              sp -= 4;
              data(sp, 1, SZ_WORD, 32'hC0DE_0000 + r, d, e, c);
            end
            ts = $time;
          end
        join
        // the vector arrives while the stack is still being written, and both are done by
        // the end of the 16-cycle entry (eight two-cycle SRAM writes fill it exactly)
        if (tf < ts) n_parallel++;
        check(tf < ts && ts - t0 <= 170, $sformatf("stacking (%0d) and vector fetch (%0d) overlap within the entry",
              (ts - t0) / 10, (tf - t0) / 10));
      end
    end
  end

  always @(posedge clk) begin
    if (auto_core && events[2]) sp += 32;     // exit restores one frame
    if (auto_core && handler_start) entry_order.push_back(int'(exc_num));
  end

  // handler runner: returns after handler_cycles when not preempted
  int remaining [$];
  initial begin
    forever begin
      @(posedge clk); #1;
      exc_return = 0;
      if (auto_core) begin
        if (handler_start) remaining.push_back(handler_cycles);
        else if (!core_stall && handler_mode && remaining.size() > 0) begin
          if (remaining[$] == 0) begin
            exc_return = 1;
            void'(remaining.pop_back());
          end else remaining[$]--;
        end
      end
    end
  end

  // stall-length monitor
  string stalls [$];
  string kind = "-";
  int run = 0;
  logic stall_d = 0;
  always @(posedge clk) begin
    if (events[0]) kind = "P";
    if (events[1]) kind = "T";
    if (events[2]) kind = "O";
    if (core_stall) run++;
    else if (stall_d) begin stalls.push_back($sformatf("%s%0d", kind, run)); run = 0; end
    stall_d <= core_stall;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, d2, a;
    logic e, e2;
    int c, c2, misses0;
    string seq;
    fetch_req = BUS_REQ_IDLE; data_req = BUS_REQ_IDLE; dbg_req = BUS_REQ_IDLE;
    fetch_priv = 1; data_priv = 1; irq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (10) @(posedge clk); #1;

    // ---- 1. flash patch download by the debugger, then a code stream ----
    dbg(FPB_BASE + 8'h40, 1, 32'hBE00_BE00, d, e, c);      // patch word 0
    dbg(FPB_BASE + 8'h08, 1, 32'h0000_0108 | 1, d, e, c);  // replaces flash word 0x108
    dbg(FPB_BASE + 8'h44, 1, 32'h1234_ABCD, d, e, c);      // patch word 1: a constant
    dbg(FPB_BASE + 8'h0C, 1, 32'h0000_0800 | 1, d, e, c);
    dbg(FPB_BASE + 8'h00, 1, 32'h1, d, e, c);
    dbg(FPB_BASE + 8'h08, 0, 0, d, e, c);
    check(d == 32'h0000_0109 && !e, "debugger reads the comparator back");
    for (int w = 0; w < 64; w++) begin
      a = 32'h100 + 4 * w;
      fetch(a, d, e, c);
      if (a == 32'h108) check(d == 32'hBE00_BE00, "patched instruction word fetched");
      else check(d == u_flash.word_at(a >> 2) && !e, $sformatf("code word %h", a));
      if (w == 30) begin
        misses0 = n_ev[6];
        data(32'h0000_0800, 0, SZ_WORD, 0, d, e, c);           // patched constant
        check(d == 32'h1234_ABCD && c == 1, "patched constant read by the core");
        data(32'h0000_3000, 0, SZ_WORD, 0, d, e, c);           // literal pool load
        check(d == u_flash.word_at(32'hC00), "literal pool load from flash");
        check(n_ev[6] > misses0, "literal pool load missed the line buffers");
      end
    end

    // ---- 2. bit banding ----
    pw(32'h2000_0100, 32'h0000_00F0);
    data(32'h2080_0800 + 3, 1, SZ_BYTE, 32'h0100_0000, d, e, c);   // set bit 3 of byte 0x2000_0100
    n_bb_write++;
    data(32'h2080_0800 + 7, 1, SZ_BYTE, 32'h0, d, e, c);           // clear bit 7
    n_bb_write++;
    data(32'h2000_0100, 0, SZ_WORD, 0, d, e, c);
    check(d == 32'h0000_0078, $sformatf("bit-band writes in SRAM gave %h", d));
    data(32'h2080_0800 + 3, 0, SZ_BYTE, 0, d, e, c);
    check(d[0] && d[24], "alias read of a set bit");
    data(32'h2080_0800 + 2, 0, SZ_BYTE, 0, d, e, c);
    check(d == 0, "alias read of a clear bit");
    data(32'h4080_0000 + 8 * 5 + 2, 1, SZ_BYTE, 32'h0001_0000, d, e, c);   // peripheral byte 5 bit 2
    n_bb_write++;
    check(u_ext.rd(32'h4000_0005) == ((8'h05 ^ 8'h5A) | 8'h04), "bit-band write in peripheral space");

    // ---- 3. memory protection ----
    // region 0: task code 0x100-0x1FF (user, execute); region 1: whole SRAM, privileged
    // only; region 2 (wins over 1): task data 0x2000_0200-0x2000_021F (user, read/write)
    pw(MPU_BASE + 8'h10, 32'h0000_0100);
    pw(MPU_BASE + 8'h14, 32'h0000_01E0 | 5'b11011);
    pw(MPU_BASE + 8'h18, 32'h2000_0000);
    pw(MPU_BASE + 8'h1C, 32'h2000_FFE0 | 5'b00111);
    pw(MPU_BASE + 8'h20, 32'h2000_0200);
    pw(MPU_BASE + 8'h24, 32'h2000_0200 | 5'b10111);
    pw(MPU_BASE + 8'h00, 32'h1);
    data(MPU_BASE + 8'h24, 0, SZ_WORD, 0, d, e, c);
    check(d == 32'h2000_0217, "protection region reads back");
    data_priv = 0; fetch_priv = 0;
    data(32'h2000_0204, 1, SZ_WORD, 32'h5555_AAAA, d, e, c);
    check(!e, "task writes its own 32-byte data region");
    data(32'h2000_0220, 1, SZ_WORD, 32'h1, d, e, c);
    check(e && c == 1, "task write just past its region refused");
    data(32'h2000_0100, 0, SZ_WORD, 0, d, e, c);
    check(e, "task read of privileged SRAM refused");
    fetch(32'h0000_0180, d, e, c);
    check(!e && d == u_flash.word_at(32'h60), "task fetches its own code");
    fetch(32'h0000_0200, d, e, c);
    check(e, "task fetch outside its code refused");
    data(32'hE000_ED00, 1, SZ_WORD, 0, d, e, c);
    check(e, "task cannot reach the protection registers");
    data_priv = 1; fetch_priv = 1;
    data(32'h2000_0204, 0, SZ_WORD, 0, d, e, c);
    check(d == 32'h5555_AAAA && !e, "privileged read of task data");
    pw(MPU_BASE + 8'h00, 32'h0);

    // ---- 4. interrupts ----
    pw(NVIC_BASE + 12'h100, 32'h0000_001E);          // enable lines 1-4
    pw(NVIC_BASE + 12'h400, {3'd0, 5'd0, 3'd3, 5'd0, 3'd1, 5'd0, 3'd0, 5'd0});   // 1:1 2:3 3:0
    auto_core = 1;
    stalls.delete(); entry_order.delete();
    irq[1] = 1; irq[2] = 1;
    @(posedge clk); #1 irq = 0;
    repeat (200) @(posedge clk); #1;
    seq = "";
    foreach (stalls[i]) seq = {seq, stalls[i], " "};
    check(seq == "P16 T6 O12 ", {"entry, tail-chain, exit: ", seq});
    check(entry_order.size() == 2 && entry_order[0] == 1 && entry_order[1] == 2, "more urgent line first");
    check(sp == 32'h2000_8000, "stack pointer back where it started");
    data(32'h2000_7FE0, 0, SZ_WORD, 0, d, e, c);
    check(d == 32'hC0DE_0007, "stack frame written in SRAM during entry");
    // nesting: line 2 running, line 3 (priority 0) preempts
    stalls.delete(); entry_order.delete();
    handler_cycles = 60;
    irq[2] = 1; @(posedge clk); #1 irq = 0;
    repeat (40) @(posedge clk); #1;
    irq[3] = 1; @(posedge clk); #1 irq = 0;
    repeat (300) @(posedge clk); #1;
    seq = "";
    foreach (stalls[i]) seq = {seq, stalls[i], " "};
    check(seq == "P16 P16 O12 O12 ", {"nested entry and exits: ", seq});
    check(entry_order.size() == 2 && entry_order[1] == 3, "line 3 preempted line 2");
    auto_core = 0;

    // ---- 5. contention and unmapped registers ----
    fork
      data(32'h2000_0300, 1, SZ_WORD, 32'hAAAA_0001, d, e, c);
      dbg(32'h2000_0300, 0, 0, d2, e2, c2);
    join
    if (c2 > c) n_contend++;
    check(c2 > c && d2 == 32'hAAAA_0001, "debug waits for data on SRAM and sees its write");
    dbg(32'hE000_1000, 0, 0, d, e, c);
    if (e) n_ppb_err++;
    check(e, "unmapped private peripheral address answers err");

    // ---- mechanism coverage ----
    $display("push %0d tail %0d pop %0d preempt %0d patch %0d hit %0d miss %0d prefetch %0d",
             n_ev[0], n_ev[1], n_ev[2], n_ev[3], n_ev[4], n_ev[5], n_ev[6], n_ev[7]);
    $display("mpu faults %0d bit-band writes %0d parallel entries %0d contention %0d ppb err %0d",
             n_fault, n_bb_write, n_parallel, n_contend, n_ppb_err);
    for (int i = 0; i < 8; i++) check(n_ev[i] > 0, $sformatf("event %0d happened", i));
    check(n_fault > 0, "protection fault happened");
    check(n_bb_write > 0, "bit-band write happened");
    check(n_parallel > 0, "parallel stacking and vector fetch happened");
    check(n_contend > 0, "bus contention happened");
    check(n_ppb_err > 0, "unmapped register error happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
