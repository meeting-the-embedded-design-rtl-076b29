// bus_matrix: three-master, four-slave crossbar of the subsystem.
//
// Masters: 0 instruction fetch, 1 data (after the bit-band unit), 2 debug access port.
// Slaves (by address, see cm3_pkg::decode_slave): code/flash, SRAM, peripheral and
// external space, private peripheral bus. Each slave has its own arbiter, so different
// masters reach different slaves in the same cycle; this is what lets the exception
// entry fetch a vector from flash while the stack is written to SRAM. A slave that is
// idle serves the highest-priority master that addresses it (data, then fetch, then
// debug) in the same cycle. Once a transfer has started the slave stays with its master
// until ready, and a master that raised lock keeps the slave for its next request too
// (the bit-band read-modify-write), as long as it keeps addressing that slave.
//
// Interface: m_req/m_rsp per master and s_req/s_rsp per slave, cm3_pkg valid/ready.
// Timing: no added cycles; a master's request goes through combinationally.
//
// The paper names the bus matrix and its place between the core, debug and the flash
// and SRAM/peripheral interfaces, and states that vector fetch and stacking overlap;
// the master priorities, the per-slave arbitration and the lock rule are this design's.
module bus_matrix
  import cm3_pkg::*;
#(
  parameter int unsigned NM = 3,
  parameter int unsigned NS = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bus_req_t m_req [NM],
  output bus_rsp_t m_rsp [NM],
  output bus_req_t s_req [NS],
  input  bus_rsp_t s_rsp [NS]
);

  // priority order of masters: data (1), fetch (0), debug (2)
  localparam int unsigned PRIO [3] = '{1, 0, 2};

  logic [NS-1:0] own_v_q;
  logic [1:0]    own_q [NS];
  logic [NS-1:0] sel_v;
  logic [1:0]    sel   [NS];
  logic          to    [NM][NS];

  always_comb begin
    for (int m = 0; m < NM; m++)
      for (int s = 0; s < NS; s++)
        to[m][s] = m_req[m].valid && (int'(decode_slave(m_req[m].addr)) == s);

    for (int s = 0; s < NS; s++) begin
      sel_v[s] = 1'b0;
      sel[s]   = '0;
      if (own_v_q[s] && to[own_q[s]][s]) begin
        sel_v[s] = 1'b1;
        sel[s]   = own_q[s];
      end else begin
        for (int p = NM - 1; p >= 0; p--) begin
          if (PRIO[p] < NM && to[PRIO[p]][s]) begin
            sel_v[s] = 1'b1;
            sel[s]   = 2'(PRIO[p]);
          end
        end
      end
    end
  end

  always_comb begin
    for (int s = 0; s < NS; s++) s_req[s] = sel_v[s] ? m_req[sel[s]] : BUS_REQ_IDLE;
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      m_rsp[m] = BUS_RSP_IDLE;
      for (int s = 0; s < NS; s++)
        if (to[m][s] && sel_v[s] && int'(sel[s]) == m) m_rsp[m] = s_rsp[s];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      own_v_q <= '0;
      own_q   <= '{default: '0};
    end else begin
      for (int s = 0; s < NS; s++) begin
        if (sel_v[s]) begin
          own_q[s]   <= sel[s];
          own_v_q[s] <= s_rsp[s].ready ? m_req[sel[s]].lock : 1'b1;
        end else begin
          own_v_q[s] <= 1'b0;
        end
      end
    end
  end

  // a master holds its request, unchanged, until it is answered
  for (genvar m = 0; m < NM; m++) begin : g_hold
    a_master_holds: assert property (@(posedge clk) disable iff (!rst_n)
                                     m_req[m].valid && !m_rsp[m].ready |=>
                                     m_req[m].valid && $stable(m_req[m].addr) &&
                                     $stable(m_req[m].write));
  end

  // a slave never answers a cycle in which it has no request
  for (genvar s = 0; s < NS; s++) begin : g_chk
    a_no_spurious_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                          s_rsp[s].ready |-> s_req[s].valid);
  end

endmodule
