// tb_mpu: self-checking test of the memory protection unit.
//
// The unit's fetch and data sides lead to memory models. The test programs regions of
// 32 bytes and larger through the register port, in the style of the paper's example of
// separating each task's code, data and stack, and checks every access against a
// reference decision computed in the testbench: region edges to the byte, read, write
// and execute permissions, unprivileged access, overlap (higher region wins), the
// privileged background map, the always-reachable private peripheral bus, and that a
// denied access is answered with err in its own cycle and never reaches memory.
module tb_mpu;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t f_up, f_dn, d_up, d_dn, reg_req;
  bus_rsp_t f_up_rsp, f_dn_rsp, d_up_rsp, d_dn_rsp, reg_rsp;
  logic f_priv, d_priv, f_fault, d_fault;
  int checks = 0, failures = 0;

  mpu dut (.clk, .rst_n,
           .fetch_up_req(f_up), .fetch_priv(f_priv), .fetch_up_rsp(f_up_rsp),
           .fetch_dn_req(f_dn), .fetch_dn_rsp(f_dn_rsp),
           .data_up_req(d_up), .data_priv(d_priv), .data_up_rsp(d_up_rsp),
           .data_dn_req(d_dn), .data_dn_rsp(d_dn_rsp),
           .reg_req, .reg_rsp, .fetch_fault(f_fault), .data_fault(d_fault));
  tb_bus_mem #(.LATENCY(0)) u_fmem (.clk, .rst_n, .req(f_dn), .rsp(f_dn_rsp));
  tb_bus_mem #(.LATENCY(0)) u_dmem (.clk, .rst_n, .req(d_dn), .rsp(d_dn_rsp));

  // reference copy of the regions
  typedef struct {logic [31:0] base, limit; bit en, r, w, x, u;} rgn_t;
  rgn_t rg [8];
  bit   mpu_on;

  function automatic bit ref_ok(input logic [31:0] a, input int acc, input bit priv);
    bit ok;
    ok = priv;
    for (int i = 0; i < 8; i++)
      if (rg[i].en && a >= rg[i].base && a <= (rg[i].limit | 32'h1F))
        ok = (priv || rg[i].u) && ((acc == 0 && rg[i].r) || (acc == 1 && rg[i].w) ||
                                   (acc == 2 && rg[i].x));
    if (!mpu_on) ok = 1;
    if (priv && a[31:29] == 3'b111) ok = 1;
    return ok;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic reg_wr(input logic [7:0] off, input logic [31:0] d);
    reg_req = '{valid: 1'b1, addr: off, write: 1'b1, size: SZ_WORD, wdata: d, lock: 1'b0};
    @(posedge clk); #1 reg_req = BUS_REQ_IDLE;
  endtask

  task automatic set_region(input int i, input logic [31:0] base, limit, input bit r, w, x, u, en);
    reg_wr(8'(8'h10 + 8 * i), base);
    reg_wr(8'(8'h14 + 8 * i), {limit[31:5], u, x, w, r, en});
    rg[i] = '{base: {base[31:5], 5'b0}, limit: {limit[31:5], 5'b0}, en: en, r: r, w: w, x: x, u: u};
  endtask

  // acc: 0 read, 1 write, 2 execute
  task automatic access(input logic [31:0] a, input int acc, input bit priv);
    bit exp_ok;
    int n0;
    exp_ok = ref_ok(a, acc, priv);
    if (acc == 2) begin
      n0 = u_fmem.n_xfers;
      f_priv = priv;
      f_up = '{valid: 1'b1, addr: a, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
      #1;
      check(f_up_rsp.ready && f_up_rsp.err == !exp_ok && f_fault == !exp_ok,
            $sformatf("fetch %h priv %0d expected ok=%0d", a, priv, exp_ok));
      @(posedge clk); #1 f_up = BUS_REQ_IDLE;
      check((u_fmem.n_xfers - n0) == int'(exp_ok), "fetch reaches memory only when allowed");
    end else begin
      n0 = u_dmem.n_xfers;
      d_priv = priv;
      d_up = '{valid: 1'b1, addr: a, write: acc == 1, size: SZ_WORD, wdata: 0, lock: 1'b0};
      #1;
      check(d_up_rsp.ready && d_up_rsp.err == !exp_ok && d_fault == !exp_ok,
            $sformatf("data %s %h priv %0d expected ok=%0d", acc ? "write" : "read", a, priv, exp_ok));
      @(posedge clk); #1 d_up = BUS_REQ_IDLE;
      check((u_dmem.n_xfers - n0) == int'(exp_ok), "data reaches memory only when allowed");
    end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    f_up = BUS_REQ_IDLE; d_up = BUS_REQ_IDLE; reg_req = BUS_REQ_IDLE;
    f_priv = 0; d_priv = 0; mpu_on = 0;
    foreach (rg[i]) rg[i] = '{base: 0, limit: 0, en: 0, r: 0, w: 0, x: 0, u: 0};
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // disabled: everything passes
    access(32'h2000_0000, 1, 0);
    access(32'h0000_0000, 2, 0);
    // task layout with 32-byte pieces: RTOS code, task 1 code, task 1 data, task 1 stack
    set_region(0, 32'h0000_0000, 32'h0000_00FF, 1, 0, 1, 0, 1);  // RTOS code, privileged
    set_region(1, 32'h0000_0100, 32'h0000_011F, 1, 0, 1, 1, 1);  // task 1 code, 32 bytes
    set_region(2, 32'h2000_0040, 32'h2000_005F, 1, 1, 0, 1, 1);  // task 1 data, 32 bytes
    set_region(3, 32'h2000_0060, 32'h2000_009F, 1, 1, 0, 1, 1);  // task 1 stack, 64 bytes
    set_region(4, 32'h2000_0000, 32'h2000_0FFF, 1, 0, 0, 0, 1);  // system data, read only
    set_region(5, 32'h2000_0050, 32'h2000_0057, 1, 0, 0, 1, 1);  // overlap, read only
    reg_wr(8'h00, 32'h1);
    mpu_on = 1;
    // edges and permissions
    access(32'h0000_0100, 2, 0);
    access(32'h0000_011C, 2, 0);
    access(32'h0000_0120, 2, 0);
    access(32'h0000_00FC, 2, 0);
    access(32'h0000_00FC, 2, 1);
    access(32'h2000_0040, 1, 0);
    access(32'h2000_0040, 2, 0);
    access(32'h2000_003C, 1, 0);
    access(32'h2000_0050, 1, 0);
    access(32'h2000_0050, 0, 0);
    access(32'h2000_0060, 1, 0);
    access(32'h2000_009C, 1, 0);
    access(32'h2000_00A0, 1, 0);
    access(32'h2000_00A0, 0, 1);
    access(32'h2000_00A0, 1, 1);
    access(32'h4000_0000, 0, 0);
    access(32'h4000_0000, 0, 1);
    access(32'hE000_E100, 1, 1);
    access(32'hE000_E100, 1, 0);
    // random accesses against the reference
    for (int i = 0; i < 600; i++) begin
      logic [31:0] a;
      a = ($urandom_range(0, 1) ? 32'h2000_0000 : 32'h0000_0000) + ($urandom_range(0, 1279) & ~3);
      access(a, $urandom_range(0, 2), $urandom_range(0, 1));
    end
    // random re-programming of region 6 at 32-byte granularity
    for (int k = 0; k < 20; k++) begin
      logic [31:0] b;
      b = 32'h2000_0000 + 32 * $urandom_range(0, 30);
      set_region(6, b, b + 32 * $urandom_range(0, 3), $urandom_range(0, 1), $urandom_range(0, 1),
                 $urandom_range(0, 1), $urandom_range(0, 1), 1);
      for (int i = 0; i < 30; i++)
        access(32'h2000_0000 + ($urandom_range(0, 1100) & ~3), $urandom_range(0, 2), $urandom_range(0, 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
