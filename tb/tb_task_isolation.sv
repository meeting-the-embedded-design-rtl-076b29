// tb_task_isolation: the fine-grained protection layout of two tasks under an RTOS, run
// on the whole subsystem at its default parameters.
//
// The memory is laid out as twelve areas, as in a protection scheme with 32-byte
// granularity: vectors, RTOS code, task 1 code, task 2 code and a shared library in
// flash; RTOS data, task 1 stack, task 2 stack, task 1 data, task 2 data, global data and
// system data in SRAM. Every area is a multiple of 32 bytes and they sit back to back,
// with no guard gaps. For each task, privileged RTOS code programs five regions (own code,
// shared library, own data, own stack, global data) and then runs the task unprivileged.
// The test fetches and reads/writes the first and last word of every area and compares
// the answer (allowed or refused with err) with the expected table. It also checks that
// a task's writes to its own areas land, and that the other task's data is unchanged.
module tb_task_isolation;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t fetch_req, data_req, dbg_req, ext_req;
  bus_rsp_t fetch_rsp, data_rsp, dbg_rsp, ext_rsp;
  logic fetch_priv, data_priv, exc_return, core_stall, handler_start, handler_mode, f_fault, d_fault;
  logic [31:0] irq;
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

  typedef enum int {VEC, RTOS_CODE, T1_CODE, T2_CODE, SHLIB, RTOS_DATA, T1_STACK, T2_STACK,
                    T1_DATA, T2_DATA, GLOBAL, SYSDATA} area_e;
  logic [31:0] lo [12] = '{32'h0000_0000, 32'h0000_0100, 32'h0000_0300, 32'h0000_0360,
                           32'h0000_03E0, 32'h2000_0000, 32'h2000_0200, 32'h2000_0240,
                           32'h2000_02A0, 32'h2000_02C0, 32'h2000_0300, 32'h2000_0360};
  logic [31:0] hi [12] = '{32'h0000_00FF, 32'h0000_02FF, 32'h0000_035F, 32'h0000_03DF,
                           32'h0000_043F, 32'h2000_01FF, 32'h2000_023F, 32'h2000_029F,
                           32'h2000_02BF, 32'h2000_02FF, 32'h2000_035F, 32'h2000_03FF};

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic fetch(input logic [31:0] a, output logic err);
    fetch_req = '{valid: 1'b1, addr: a, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
    do @(posedge clk); while (!fetch_rsp.ready);
    err = fetch_rsp.err;
    #1 fetch_req = BUS_REQ_IDLE;
  endtask

  task automatic data(input logic [31:0] a, input logic wr, input logic [31:0] wd,
                      output logic [31:0] d, output logic err);
    data_req = '{valid: 1'b1, addr: a, write: wr, size: SZ_WORD, wdata: wd, lock: 1'b0};
    do @(posedge clk); while (!data_rsp.ready);
    d = data_rsp.rdata; err = data_rsp.err;
    #1 data_req = BUS_REQ_IDLE;
  endtask

  task automatic pw(input logic [31:0] a, input logic [31:0] wd);
    logic [31:0] d; logic e;
    data_priv = 1;
    data(a, 1, wd, d, e);
    check(!e, "privileged register write");
  endtask

  // RLAR attribute bits {user, x, w, r, en}
  task automatic region(input int n, input area_e ar, input logic [4:0] attr);
    pw(MPU_BASE + 8'(8'h10 + 8 * n), lo[ar]);
    pw(MPU_BASE + 8'(8'h14 + 8 * n), {hi[ar][31:5], attr});
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    logic e;
    area_e own_code, own_data, own_stack;
    fetch_req = BUS_REQ_IDLE; data_req = BUS_REQ_IDLE; dbg_req = BUS_REQ_IDLE;
    fetch_priv = 1; data_priv = 1; irq = '0; exc_return = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (5) @(posedge clk); #1;
    // every area is a whole number of 32-byte blocks, back to back
    for (int i = 0; i < 12; i++) check(lo[i][4:0] == 0 && hi[i][4:0] == 5'h1F, "32-byte aligned area");
    // RTOS fills each task's data with a marker
    pw(lo[T1_DATA], 32'h1111_1111);
    pw(lo[T2_DATA], 32'h2222_2222);
    for (int t = 1; t <= 2; t++) begin
      own_code  = (t == 1) ? T1_CODE  : T2_CODE;
      own_data  = (t == 1) ? T1_DATA  : T2_DATA;
      own_stack = (t == 1) ? T1_STACK : T2_STACK;
      // context switch: RTOS reprograms the five task regions
      pw(MPU_BASE, 32'h0);
      region(0, own_code,  5'b11011);
      region(1, SHLIB,     5'b11011);
      region(2, own_data,  5'b10111);
      region(3, own_stack, 5'b10111);
      region(4, GLOBAL,    5'b10111);
      pw(MPU_BASE, 32'h1);
      fetch_priv = 0; data_priv = 0;
      for (int ar = 0; ar < 12; ar++) begin
        bit may_exec, may_rw;
        may_exec = (ar == own_code) || (ar == SHLIB);
        may_rw   = (ar == own_data) || (ar == own_stack) || (ar == GLOBAL);
        foreach (lo[k]) if (k == ar) begin
          for (int edge_i = 0; edge_i < 2; edge_i++) begin
            logic [31:0] a;
            a = edge_i ? (hi[k] & ~32'h3) : lo[k];
            if (lo[k][31:29] == 3'b000) begin
              fetch(a, e);
              check(e == !may_exec, $sformatf("task %0d fetch %h (area %0d) expected %s", t, a, ar,
                                              may_exec ? "allowed" : "refused"));
              data(a, 0, 0, d, e);
              check(e == !may_exec, $sformatf("task %0d read of code %h", t, a));
            end else begin
              data(a, 0, 0, d, e);
              check(e == !may_rw, $sformatf("task %0d read %h (area %0d)", t, a, ar));
              if (!(ar == own_data && edge_i == 0)) begin
                data(a, 1, 32'hBAD0_0000 + t, d, e);
                check(e == !may_rw, $sformatf("task %0d write %h (area %0d)", t, a, ar));
              end
              fetch(a, e);
              check(e, $sformatf("task %0d cannot execute from SRAM %h", t, a));
            end
          end
        end
      end
      // own data marker still readable, then updated
      data(lo[own_data], 1, 32'hAAAA_0000 + t, d, e);
      check(!e, "task updates its own data");
      fetch_priv = 1; data_priv = 1;
    end
    // RTOS view: each task only changed its own data
    data(lo[T1_DATA], 0, 0, d, e);
    check(d == 32'hAAAA_0001, "task 1 data holds only task 1's write");
    data(lo[T2_DATA], 0, 0, d, e);
    check(d == 32'hAAAA_0002, "task 2 data holds only task 2's write");
    data(lo[RTOS_DATA], 0, 0, d, e);
    check(!e && d[31:16] != 16'hBAD0, "RTOS data untouched by tasks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
