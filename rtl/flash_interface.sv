// flash_interface: prefetching read interface between the bus and slow embedded flash.
//
// Embedded flash runs much slower than the core, so this interface reads the flash one
// wide line (LINE_BITS, several 16-bit instructions) at a time and keeps two line
// buffers. A read that hits a buffer is answered in the same cycle. After every access
// the interface looks at the next sequential line and, if neither buffer holds it and the
// flash is idle, starts fetching it into the buffer not holding the current line, so a
// straight run of instructions streams without waiting. A read elsewhere in the flash (a
// literal pool load, a branch) misses, waits for any flash read in flight, and evicts the
// least recently used buffer, which breaks the stream; that is the cost the paper
// attributes to literal pools. Writes are refused with err.
//
// Interface: bus slave port (cm3_pkg valid/ready) and a flash macro port: flash_req and
// flash_addr (line index) are held until flash_ready, which comes with flash_rdata.
// Timing: hit 0 wait cycles; miss = any remaining in-flight flash read + one flash read.
//
// Fetching more than one 16-bit value per flash access follows the paper; the line
// width, the two buffers, the next-line prefetch rule and LRU replacement are this
// design's choices.
module flash_interface
  import cm3_pkg::*;
#(
  parameter int unsigned LINE_BITS = 64
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  bus_req_t              req,
  output bus_rsp_t              rsp,
  output logic                  flash_req,
  output logic [31-$clog2(LINE_BITS/8):0] flash_addr,
  input  logic                  flash_ready,
  input  logic [LINE_BITS-1:0]  flash_rdata,
  output logic                  ev_hit,      // pulse: a read was served from a buffer
  output logic                  ev_miss,     // pulse: a read had to wait for the flash
  output logic                  ev_prefetch  // pulse: a sequential prefetch was started
);

  localparam int unsigned OB = $clog2(LINE_BITS/8);   // byte offset bits in a line
  localparam int unsigned TW = 32 - OB;               // line tag width
  localparam int unsigned WPL = LINE_BITS / 32;       // words per line

  logic [1:0]          v_q;
  logic [TW-1:0]       tag_q [2];
  logic [LINE_BITS-1:0] data_q [2];
  logic                mru_q;          // slot used last
  logic [TW-1:0]       last_tag_q;     // line of the last served read
  logic                busy_q;
  logic [TW-1:0]       ftag_q;
  logic                fslot_q;

  logic [TW-1:0] rtag, next_tag;
  logic [1:0]    hit;
  logic          hit_any, hit_slot, cur_slot;
  logic          start_demand, start_pref, inflight_match;

  always_comb begin
    rtag     = req.addr[31:OB];
    hit[0]   = v_q[0] && tag_q[0] == rtag;
    hit[1]   = v_q[1] && tag_q[1] == rtag;
    hit_any  = |hit;
    hit_slot = hit[1];
    // the line in use: the one read this cycle, else the one read last
    cur_slot = hit_any && req.valid && !req.write ? hit_slot : mru_q;
    next_tag = (hit_any && req.valid && !req.write ? rtag : last_tag_q) + 1'b1;
    inflight_match = busy_q && ftag_q == rtag;
    start_demand = req.valid && !req.write && !hit_any && !busy_q;
    start_pref   = !busy_q && !start_demand && !(req.valid && !hit_any) &&
                   !(v_q[0] && tag_q[0] == next_tag) && !(v_q[1] && tag_q[1] == next_tag);
  end

  always_comb begin
    rsp = BUS_RSP_IDLE;
    if (req.valid && req.write) begin
      rsp.ready = 1'b1;
      rsp.err   = 1'b1;
    end else if (req.valid && hit_any) begin
      rsp.ready = 1'b1;
      if (WPL > 1) rsp.rdata = data_q[hit_slot][32*req.addr[OB-1:2] +: 32];
      else         rsp.rdata = data_q[hit_slot][31:0];
    end
    flash_req  = busy_q;
    flash_addr = ftag_q;
    ev_hit     = req.valid && !req.write && hit_any;
    ev_miss    = start_demand || (req.valid && !req.write && !hit_any && inflight_match && flash_ready);
    ev_prefetch = start_pref;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q        <= '0;
      mru_q      <= 1'b0;
      last_tag_q <= '0;
      busy_q     <= 1'b0;
      ftag_q     <= '0;
      fslot_q    <= 1'b0;
      tag_q      <= '{default: '0};
      data_q     <= '{default: '0};
    end else begin
      if (req.valid && !req.write && hit_any) begin
        mru_q      <= hit_slot;
        last_tag_q <= rtag;
      end
      if (busy_q && flash_ready) begin
        busy_q          <= 1'b0;
        v_q[fslot_q]    <= 1'b1;
        tag_q[fslot_q]  <= ftag_q;
        data_q[fslot_q] <= flash_rdata;
      end else if (start_demand) begin
        busy_q       <= 1'b1;
        ftag_q       <= rtag;
        fslot_q      <= ~mru_q;
        v_q[~mru_q]  <= 1'b0;
      end else if (start_pref) begin
        busy_q       <= 1'b1;
        ftag_q        <= next_tag;
        fslot_q       <= ~cur_slot;
        v_q[~cur_slot] <= 1'b0;
      end
    end
  end

endmodule
