// mpu: fine-grained memory protection unit on the fetch and data paths of the core.
//
// NUM_REGIONS regions each have a base and a limit address at 32-byte granularity (an
// address is inside when base[31:5] <= addr[31:5] <= limit[31:5]) and four permission
// bits: read, write, execute, and unprivileged access allowed. While the unit is
// enabled, every fetch and data request is checked in the same cycle against the
// enabled regions; when regions overlap, the highest-numbered one decides. A request that
// no region covers is allowed only to privileged code (a background map). A denied request
// is not passed on: the unit answers it itself with err in the same cycle and pulses
// fetch_fault or data_fault. Privileged accesses to the private peripheral bus are never
// checked, so that the protection registers stay reachable. With the unit disabled (the
// reset state) everything passes.
//
// Register port (32-bit words, answered in the same cycle): +0x00 CTRL (bit 0 enable);
// +0x10+8n RBAR[n] (bits 31:5 base); +0x14+8n RLAR[n] (bits 31:5 limit, bit 0 enable,
// bit 1 read, bit 2 write, bit 3 execute, bit 4 unprivileged allowed).
//
// The 32-byte granularity, which lets each task's code, data and stack be separated,
// follows the paper; the number of regions, the base/limit form, the permission bits,
// the overlap rule, the background rule and the registers are this design's choices.
module mpu
  import cm3_pkg::*;
#(
  parameter int unsigned NUM_REGIONS = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t fetch_up_req,
  input  logic     fetch_priv,
  output bus_rsp_t fetch_up_rsp,
  output bus_req_t fetch_dn_req,
  input  bus_rsp_t fetch_dn_rsp,
  input  bus_req_t data_up_req,
  input  logic     data_priv,
  output bus_rsp_t data_up_rsp,
  output bus_req_t data_dn_req,
  input  bus_rsp_t data_dn_rsp,
  input  bus_req_t reg_req,
  output bus_rsp_t reg_rsp,
  output logic     fetch_fault,
  output logic     data_fault
);

  typedef struct packed {
    logic [26:0] base;
    logic [26:0] limit;
    logic        en;
    logic        rd;
    logic        wr;
    logic        ex;
    logic        user;
  } region_t;

  logic    en_q;
  region_t rgn_q [NUM_REGIONS];

  typedef enum logic [1:0] {ACC_READ, ACC_WRITE, ACC_EXEC} acc_e;

  function automatic logic allowed(input logic [31:0] a, input acc_e acc, input logic priv);
    logic ok;
    ok  = priv;                          // background: privileged only
    for (int i = 0; i < NUM_REGIONS; i++) begin
      if (rgn_q[i].en && a[31:5] >= rgn_q[i].base && a[31:5] <= rgn_q[i].limit) begin
        ok  = (priv || rgn_q[i].user) &&
              ((acc == ACC_READ  && rgn_q[i].rd) ||
               (acc == ACC_WRITE && rgn_q[i].wr) ||
               (acc == ACC_EXEC  && rgn_q[i].ex));
      end
    end
    if (!en_q) ok = 1'b1;
    if (priv && a[31:29] == 3'b111) ok = 1'b1;
    return ok;
  endfunction

  logic fetch_ok, data_ok;

  always_comb begin
    fetch_ok    = allowed(fetch_up_req.addr, ACC_EXEC, fetch_priv);
    data_ok     = allowed(data_up_req.addr, data_up_req.write ? ACC_WRITE : ACC_READ, data_priv);
    fetch_fault = fetch_up_req.valid && !fetch_ok;
    data_fault  = data_up_req.valid && !data_ok;
  end

  // requests passed on (checked ones only)
  always_comb begin
    fetch_dn_req = fetch_up_req;
    if (!fetch_ok) fetch_dn_req.valid = 1'b0;
    data_dn_req = data_up_req;
    if (!data_ok) data_dn_req.valid = 1'b0;
  end

  // responses: from downstream, or the unit's own error answer
  always_comb begin
    fetch_up_rsp = fetch_dn_rsp;
    if (!fetch_ok) fetch_up_rsp = '{ready: fetch_up_req.valid, rdata: 32'h0, err: 1'b1};
  end

  always_comb begin
    data_up_rsp = data_dn_rsp;
    if (!data_ok) data_up_rsp = '{ready: data_up_req.valid, rdata: 32'h0, err: 1'b1};
  end

  // register port
  logic [7:0] roff;
  assign roff = reg_req.addr[7:0];

  always_comb begin
    reg_rsp       = BUS_RSP_IDLE;
    reg_rsp.ready = reg_req.valid;
    if (roff == 8'h00) reg_rsp.rdata = {31'b0, en_q};
    for (int i = 0; i < NUM_REGIONS; i++) begin
      if (roff == 8'(8'h10 + 8*i)) reg_rsp.rdata = {rgn_q[i].base, 5'b0};
      if (roff == 8'(8'h14 + 8*i)) reg_rsp.rdata = {rgn_q[i].limit, rgn_q[i].user, rgn_q[i].ex,
                                                    rgn_q[i].wr, rgn_q[i].rd, rgn_q[i].en};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q  <= 1'b0;
      rgn_q <= '{default: '0};
    end else if (reg_req.valid && reg_req.write) begin
      if (roff == 8'h00) en_q <= reg_req.wdata[0];
      for (int i = 0; i < NUM_REGIONS; i++) begin
        if (roff == 8'(8'h10 + 8*i)) rgn_q[i].base <= reg_req.wdata[31:5];
        if (roff == 8'(8'h14 + 8*i)) begin
          rgn_q[i].limit <= reg_req.wdata[31:5];
          rgn_q[i].user  <= reg_req.wdata[4];
          rgn_q[i].ex    <= reg_req.wdata[3];
          rgn_q[i].wr    <= reg_req.wdata[2];
          rgn_q[i].rd    <= reg_req.wdata[1];
          rgn_q[i].en    <= reg_req.wdata[0];
        end
      end
    end
  end

endmodule
