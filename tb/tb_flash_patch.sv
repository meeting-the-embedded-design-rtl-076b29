// tb_flash_patch: self-checking test of the flash patch unit.
//
// A memory model with two wait cycles stands in for the flash interface. The test loads
// patch words and comparators through the register port, checks that matching reads are
// answered in their own cycle with the patch word and never reach the flash side, that
// other reads and writes pass through, that disabling a comparator or the whole unit
// restores the flash contents, that the registers read back, and that all eight
// comparators work at once (patched words grouped together and scattered), and random
// rounds of comparator settings and reads against a reference model.
module tb_flash_patch;
  import cm3_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  bus_req_t code_req, flash_req, reg_req;
  bus_rsp_t code_rsp, flash_rsp, reg_rsp;
  logic ev_patch;
  int checks = 0, failures = 0;
  int n_patch = 0;
  always @(posedge clk) if (ev_patch) n_patch++;

  flash_patch dut (.clk, .rst_n, .code_req, .code_rsp, .flash_req, .flash_rsp, .reg_req,
                   .reg_rsp, .ev_patch);
  tb_bus_mem #(.LATENCY(2)) u_mem (.clk, .rst_n, .req(flash_req), .rsp(flash_rsp));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic rd(input logic [31:0] a, output logic [31:0] d, output int cyc);
    code_req = '{valid: 1'b1, addr: a, write: 1'b0, size: SZ_WORD, wdata: 32'h0, lock: 1'b0};
    cyc = 0;
    do begin @(posedge clk); cyc++; end while (!code_rsp.ready);
    d = code_rsp.rdata;
    #1 code_req = BUS_REQ_IDLE;
  endtask

  task automatic reg_wr(input logic [7:0] off, input logic [31:0] d);
    reg_req = '{valid: 1'b1, addr: FPB_BASE + off, write: 1'b1, size: SZ_WORD, wdata: d, lock: 1'b0};
    @(posedge clk); #1 reg_req = BUS_REQ_IDLE;
  endtask

  task automatic reg_rd(input logic [7:0] off, output logic [31:0] d);
    reg_req = '{valid: 1'b1, addr: FPB_BASE + off, write: 1'b0, size: SZ_WORD, wdata: 0, lock: 1'b0};
    #1 d = reg_rsp.rdata;
    @(posedge clk); #1 reg_req = BUS_REQ_IDLE;
  endtask

  function automatic logic [31:0] flash_word(input logic [31:0] a);
    return {a[7:0] ^ 8'h59, a[7:0] ^ 8'h58, a[7:0] ^ 8'h5B, a[7:0] ^ 8'h5A} ;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d, a [8];
    int cyc, n0;
    code_req = BUS_REQ_IDLE; reg_req = BUS_REQ_IDLE;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    rd(32'h0000_0100, d, cyc);
    check(d == flash_word(32'h100) && cyc == 3, "unpatched read passes through");
    // one patch word at 0x100
    reg_wr(8'h40, 32'hBEBE_0000);
    reg_wr(8'h08, 32'h0000_0100 | 1);
    reg_rd(8'h08, d);
    check(d == 32'h0000_0101, "comparator reads back");
    rd(32'h0000_0100, d, cyc);
    check(d == flash_word(32'h100) && cyc == 3, "comparator ignored while unit disabled");
    reg_wr(8'h00, 32'h1);
    n0 = u_mem.n_xfers;
    rd(32'h0000_0100, d, cyc);
    check(d == 32'hBEBE_0000 && cyc == 1, "patched read served in one cycle");
    check(u_mem.n_xfers == n0, "patched read never reaches the flash");
    rd(32'h0000_0102, d, cyc);
    check(d == 32'hBEBE_0000, "any byte of the patched word is patched");
    rd(32'h0000_0104, d, cyc);
    check(d == flash_word(32'h104) && cyc == 3, "next word not patched");
    // eight comparators: four grouped, four scattered
    for (int i = 0; i < 8; i++) begin
      a[i] = (i < 4) ? 32'h0000_2000 + 4 * i : 32'h0000_0400 * (i + 3) + 32'h40;
      reg_wr(8'(8'h40 + 4 * i), 32'hA5A5_0000 + i);
      reg_wr(8'(8'h08 + 4 * i), a[i] | 1);
    end
    for (int i = 0; i < 8; i++) begin
      rd(a[i], d, cyc);
      check(d == 32'hA5A5_0000 + i && cyc == 1, $sformatf("patch word %0d", i));
      reg_rd(8'(8'h40 + 4 * i), d);
      check(d == 32'hA5A5_0000 + i, "patch word reads back");
    end
    rd(32'h0000_0100, d, cyc);
    check(d == flash_word(32'h100), "re-programmed comparator 0 released 0x100");
    // disable comparator 5 only
    reg_wr(8'h08 + 4 * 5, a[5]);
    rd(a[5], d, cyc);
    check(d == flash_word(a[5]) && cyc == 3, "disabled comparator passes through");
    rd(a[6], d, cyc);
    check(d == 32'hA5A5_0006, "other comparators still active");
    // writes always go through
    code_req = '{valid: 1'b1, addr: a[6], write: 1'b1, size: SZ_WORD, wdata: 32'h1, lock: 1'b0};
    do @(posedge clk); while (!code_rsp.ready);
    #1 code_req = BUS_REQ_IDLE;
    check(u_mem.rd(a[6]) == 8'h01, "write passes through");
    // whole unit off
    reg_wr(8'h00, 32'h0);
    rd(a[6], d, cyc);
    check(d == 32'h0000_0001, "unit disabled: flash seen");
    // random rounds: distinct random word addresses, random enables and patch words; reads
    // drawn from those addresses and from elsewhere are checked against a reference model
    reg_wr(8'h00, 32'h1);
    for (int round = 0; round < 30; round++) begin
      logic [31:0] pw [8];
      logic [7:0] en;
      int n_exp;
      en = 8'($urandom);
      for (int i = 0; i < 8; i++) begin
        bit dup;
        do begin
          a[i] = {18'h0, 12'($urandom), 2'b00};
          dup = 0;
          for (int j = 0; j < i; j++) if (a[j] == a[i]) dup = 1;
        end while (dup);
        pw[i] = $urandom;
        reg_wr(8'(8'h40 + 4 * i), pw[i]);
        reg_wr(8'(8'h08 + 4 * i), a[i] | 32'(en[i]));
      end
      n_exp = 0;
      n0 = n_patch;
      for (int k = 0; k < 16; k++) begin
        logic [31:0] ra, exp_d;
        bit hit;
        ra = ($urandom_range(0, 1) == 1) ? a[$urandom_range(0, 7)] : {18'h0, 12'($urandom), 2'b00};
        ra[1:0] = 2'($urandom);
        hit = 0;
        exp_d = {u_mem.rd({ra[31:2], 2'd3}), u_mem.rd({ra[31:2], 2'd2}),
                 u_mem.rd({ra[31:2], 2'd1}), u_mem.rd({ra[31:2], 2'd0})};
        for (int i = 0; i < 8; i++)
          if (en[i] && a[i][31:2] == ra[31:2]) begin hit = 1; exp_d = pw[i]; end
        if (hit) n_exp++;
        rd(ra, d, cyc);
        check(d == exp_d && cyc == (hit ? 1 : 3),
              $sformatf("random read %h: %h in %0d cycles, expected %h", ra, d, cyc, exp_d));
      end
      check(n_patch - n0 == n_exp, "one patch event per patched read");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
