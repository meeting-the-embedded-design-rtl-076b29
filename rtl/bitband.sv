// bitband: bit-band alias unit on the data path of the core.
//
// Two 1 MB bit-band regions (start of SRAM and start of Peripheral space) are each
// aliased to an 8 MB window starting 8 MB above the region, so that every byte address
// in the alias names one bit of the region: alias offset n selects bit n[2:0] of byte
// n[22:3] of the region. A read of an alias byte returns that bit (0 or 1, replicated in
// all four byte lanes). A write to an alias byte sets the bit if bit 0 of the written
// byte lane is 1 and clears it otherwise; the unit does this as a byte read followed by
// a byte write with lock held between them, so no other master can reach the slave in
// between and the update is atomic for software. Accesses outside the alias windows
// pass through combinationally and unchanged.
//
// Interface: up_* from the core (after the MPU), dn_* towards the bus matrix, using the
// valid/ready protocol of cm3_pkg. Timing: pass-through adds no cycle; an alias read
// costs one downstream read; an alias write costs a locked read plus a write.
//
// The 1 MB region, 8 MB alias, byte-per-bit mapping and the two windows in SRAM and
// Peripheral space follow the paper; the bit ordering inside a byte, the use of bit 0
// of the written data and the lock-based atomicity are this design's choices.
module bitband
  import cm3_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t up_req,
  output bus_rsp_t up_rsp,
  output bus_req_t dn_req,
  input  bus_rsp_t dn_rsp
);

  typedef enum logic [0:0] {ST_IDLE = 1'b0, ST_WRITE = 1'b1} state_e;
  state_e state_q, state_d;
  logic [7:0] byte_q, byte_d;

  logic        in_sram_alias, in_periph_alias, is_alias;
  logic [31:0] region_base, bit_byte_addr;
  logic [22:0] alias_off;
  logic [2:0]  bit_idx;
  logic        new_bit;
  logic [7:0]  rd_byte, mod_byte;

  assign rd_byte = dn_rsp.rdata[{bit_byte_addr[1:0], 3'b000} +: 8];

  always_comb begin
    in_sram_alias   = (up_req.addr >= SRAM_BASE + BB_ALIAS_OFFSET) &&
                      (up_req.addr <  SRAM_BASE + BB_ALIAS_OFFSET + BB_ALIAS_BYTES);
    in_periph_alias = (up_req.addr >= PERIPH_BASE + BB_ALIAS_OFFSET) &&
                      (up_req.addr <  PERIPH_BASE + BB_ALIAS_OFFSET + BB_ALIAS_BYTES);
    is_alias        = in_sram_alias || in_periph_alias;
    region_base     = in_sram_alias ? SRAM_BASE : PERIPH_BASE;
    alias_off       = up_req.addr[22:0];
    bit_idx         = alias_off[2:0];
    bit_byte_addr   = region_base + {12'h0, alias_off[22:3]};
    new_bit         = up_req.wdata[{up_req.addr[1:0], 3'b000}];
    mod_byte        = byte_q;
    mod_byte[bit_idx] = new_bit;
  end

  // request towards the bus matrix: depends on the state and the core's request only
  always_comb begin
    dn_req = up_req;
    if (state_q == ST_IDLE) begin
      if (up_req.valid && is_alias) begin
        // first phase: read the byte holding the bit (locked if a write follows)
        dn_req.addr  = bit_byte_addr;
        dn_req.write = 1'b0;
        dn_req.size  = SZ_BYTE;
        dn_req.wdata = '0;
        dn_req.lock  = up_req.write;
      end
    end else begin
      // second phase: write the modified byte back
      dn_req.valid = 1'b1;
      dn_req.addr  = bit_byte_addr;
      dn_req.write = 1'b1;
      dn_req.size  = SZ_BYTE;
      dn_req.wdata = {4{mod_byte}};
      dn_req.lock  = 1'b0;
    end
  end

  // response to the core and next state
  always_comb begin
    state_d = state_q;
    byte_d  = byte_q;
    up_rsp  = dn_rsp;
    if (state_q == ST_IDLE) begin
      if (up_req.valid && is_alias) begin
        up_rsp.rdata = {4{7'b0, rd_byte[bit_idx]}};
        if (up_req.write) begin
          up_rsp.ready = 1'b0;
          if (dn_rsp.ready && !dn_rsp.err) begin
            byte_d  = rd_byte;
            state_d = ST_WRITE;
          end else if (dn_rsp.ready) begin
            up_rsp.ready = 1'b1;           // error on the read: report, no write
          end
        end
      end
    end else begin
      up_rsp.rdata = '0;
      if (dn_rsp.ready) state_d = ST_IDLE;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= ST_IDLE;
      byte_q  <= '0;
    end else begin
      state_q <= state_d;
      byte_q  <= byte_d;
    end
  end

  // The core must hold its request while the unit is in its write phase
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
                           state_q == ST_WRITE |-> up_req.valid && up_req.write);

endmodule
