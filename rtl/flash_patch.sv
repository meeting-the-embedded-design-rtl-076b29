// flash_patch: on-the-fly flash patch unit in front of the flash interface.
//
// NUM_PATCH comparators each hold a word address in the code region and an enable bit;
// each has a patch word held in a small RAM of its own. While the unit is enabled, a read
// from the code region whose word address matches an enabled comparator is answered in
// the same cycle with the patch word and never reaches the flash; every other transfer
// passes straight through to the flash interface. Loading comparators and patch words
// from the debugger thus replaces up to eight flash words at run time (for calibration
// constants, or a breakpoint instruction in place of code), with the patched words placed
// anywhere or grouped together.
//
// Register port (32-bit word accesses on the private peripheral bus, answered in the
// same cycle): +0x00 CTRL (bit 0 enable), +0x08+4n COMP[n] (bits 31:2 word address,
// bit 0 enable), +0x40+4n DATA[n] (the patch word). Reset clears all enables.
//
// The count of eight patchable words follows the paper; the register layout, the
// same-cycle answer and serving both fetches and data reads are this design's choices.
module flash_patch
  import cm3_pkg::*;
#(
  parameter int unsigned NUM_PATCH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t code_req,
  output bus_rsp_t code_rsp,
  output bus_req_t flash_req,
  input  bus_rsp_t flash_rsp,
  input  bus_req_t reg_req,
  output bus_rsp_t reg_rsp,
  output logic     ev_patch     // pulse: a read was served from a patch word
);

  logic                 en_q;
  logic [NUM_PATCH-1:0] comp_en_q;
  logic [29:0]          comp_addr_q [NUM_PATCH];
  logic [31:0]          patch_q     [NUM_PATCH];

  logic                         match_any;
  logic [$clog2(NUM_PATCH)-1:0] match_idx;

  always_comb begin
    match_any = 1'b0;
    match_idx = '0;
    for (int i = 0; i < NUM_PATCH; i++) begin
      if (en_q && comp_en_q[i] && comp_addr_q[i] == code_req.addr[31:2] && !match_any) begin
        match_any = 1'b1;
        match_idx = i[$clog2(NUM_PATCH)-1:0];
      end
    end
  end

  logic patch_hit;
  assign patch_hit = code_req.valid && !code_req.write && match_any;
  assign ev_patch  = patch_hit;

  always_comb begin
    flash_req = code_req;
    if (patch_hit) flash_req.valid = 1'b0;
  end

  always_comb begin
    code_rsp = flash_rsp;
    if (patch_hit) begin
      code_rsp.ready  = 1'b1;
      code_rsp.rdata  = patch_q[match_idx];
      code_rsp.err    = 1'b0;
    end
  end

  // register port
  logic [7:0] roff;
  assign roff = reg_req.addr[7:0];

  always_comb begin
    reg_rsp       = BUS_RSP_IDLE;
    reg_rsp.ready = reg_req.valid;
    if (roff == 8'h00) reg_rsp.rdata = {31'b0, en_q};
    for (int i = 0; i < NUM_PATCH; i++) begin
      if (roff == 8'(8 + 4*i))    reg_rsp.rdata = {comp_addr_q[i], 1'b0, comp_en_q[i]};
      if (roff == 8'(8'h40 + 4*i)) reg_rsp.rdata = patch_q[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q        <= 1'b0;
      comp_en_q   <= '0;
      comp_addr_q <= '{default: '0};
      patch_q     <= '{default: '0};
    end else if (reg_req.valid && reg_req.write) begin
      if (roff == 8'h00) en_q <= reg_req.wdata[0];
      for (int i = 0; i < NUM_PATCH; i++) begin
        if (roff == 8'(8 + 4*i)) begin
          comp_addr_q[i] <= reg_req.wdata[31:2];
          comp_en_q[i]   <= reg_req.wdata[0];
        end
        if (roff == 8'(8'h40 + 4*i)) patch_q[i] <= reg_req.wdata;
      end
    end
  end

endmodule
