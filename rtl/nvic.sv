// nvic: nested vectored interrupt controller with hardware exception entry and exit.
//
// Each of NUM_IRQ interrupt lines has an enable, a pending and an active bit and a
// PRIO_BITS priority (a lower number is more urgent; ties go to the lower line number). A
// rising edge on irq[i] makes it pending. The exception sequencer replaces the software
// preamble and postamble of an interrupt:
//   THREAD  -> PUSH     an enabled pending interrupt exists; the context is saved by
//                       hardware for PUSH_CYCLES cycles, then the handler starts.
//   HANDLER -> PUSH     a pending interrupt more urgent than the running one arrives:
//                       it preempts (nesting), again with a full PUSH.
//   HANDLER -> TAIL     the handler returns (exc_return) while an enabled pending
//                       interrupt is more urgent than the code being returned to: the
//                       next handler is entered after TAIL_CYCLES cycles, without
//                       restoring and re-saving the context (tail-chaining).
//   HANDLER -> POP      the handler returns and nothing qualifies: the context is
//                       restored in POP_CYCLES cycles, back to the preempted handler or
//                       to thread mode.
// The interrupt taken is chosen, marked active and cleared from pending when PUSH or
// TAIL begins. The running interrupt is always the most urgent active one, because only
// a strictly more urgent interrupt can preempt.
//
// Core interface: core_stall is high while the sequencer saves, chains or restores;
// handler_start pulses for one cycle with exc_num when a handler is to begin (the core
// then fetches the vector); exc_return is the core's one-cycle end-of-handler signal.
// Register port (32-bit words, same-cycle answer, offsets from the block base): 0x100
// ISER, 0x180 ICER, 0x200 ISPR, 0x280 ICPR (write 1 to set/clear), 0x300 IABR (active,
// read only), 0x400 + 4k IPR (one byte per line, priority in the top PRIO_BITS bits).
//
// The 16-cycle entry, 6-cycle tail-chain and 12-cycle exit are printed in the paper's
// interrupt timing figure; nesting, tail-chaining and the check for a pending interrupt
// at the end of a handler follow its text. The number of lines, the priority width, the
// edge-triggered pending rule and the register layout are this design's choices; the
// core registers themselves are saved by the core, which this block only times.
module nvic
  import cm3_pkg::*;
#(
  parameter int unsigned NUM_IRQ     = 32,
  parameter int unsigned PRIO_BITS   = 3,
  parameter int unsigned PUSH_CYCLES = 16,
  parameter int unsigned TAIL_CYCLES = 6,
  parameter int unsigned POP_CYCLES  = 12
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NUM_IRQ-1:0]          irq,
  input  logic                        exc_return,
  output logic                        core_stall,
  output logic                        handler_start,
  output logic [$clog2(NUM_IRQ)-1:0]  exc_num,
  output logic                        handler_mode,
  output logic                        ev_push,      // pulse: a PUSH began
  output logic                        ev_tail,      // pulse: a tail-chain began
  output logic                        ev_pop,       // pulse: a POP began
  output logic                        ev_preempt,   // pulse: a PUSH began inside a handler
  input  bus_req_t                    reg_req,
  output bus_rsp_t                    reg_rsp
);

  localparam int unsigned IW = $clog2(NUM_IRQ);
  localparam int unsigned CW = 8;
  localparam logic [PRIO_BITS:0] THREAD_PRIO = {1'b1, {PRIO_BITS{1'b0}}};

  typedef enum logic [2:0] {S_THREAD, S_PUSH, S_HANDLER, S_TAIL, S_POP} state_e;

  state_e               state_q;
  logic [CW-1:0]        cnt_q;
  logic [NUM_IRQ-1:0]   en_q, pend_q, act_q, irq_q;
  logic [PRIO_BITS-1:0] prio_q [NUM_IRQ];
  logic [IW-1:0]        num_q;

  // most urgent enabled pending interrupt
  logic               p_v;
  logic [IW-1:0]      p_idx;
  logic [PRIO_BITS:0] p_prio;
  // running (most urgent active) and the level returned to after it
  logic [IW-1:0]      a_idx;
  logic [PRIO_BITS:0] exec_prio, ret_prio;

  always_comb begin
    p_v = 1'b0; p_idx = '0; p_prio = THREAD_PRIO;
    a_idx = '0; exec_prio = THREAD_PRIO;
    for (int i = 0; i < NUM_IRQ; i++) begin
      if (en_q[i] && pend_q[i] && {1'b0, prio_q[i]} < p_prio) begin
        p_v = 1'b1; p_idx = IW'(i); p_prio = {1'b0, prio_q[i]};
      end
      if (act_q[i] && {1'b0, prio_q[i]} < exec_prio) begin
        a_idx = IW'(i); exec_prio = {1'b0, prio_q[i]};
      end
    end
    ret_prio = THREAD_PRIO;
    for (int i = 0; i < NUM_IRQ; i++)
      if (act_q[i] && IW'(i) != a_idx && {1'b0, prio_q[i]} < ret_prio)
        ret_prio = {1'b0, prio_q[i]};
  end

  logic take_push, take_tail, take_pop;
  always_comb begin
    take_push = 1'b0; take_tail = 1'b0; take_pop = 1'b0;
    unique case (state_q)
      S_THREAD:  take_push = p_v;
      S_HANDLER: begin
        if (exc_return) begin
          if (p_v && p_prio < ret_prio) take_tail = 1'b1;
          else                          take_pop  = 1'b1;
        end else if (p_v && p_prio < exec_prio) begin
          take_push = 1'b1;
        end
      end
      default: ;
    endcase
  end

  // next pending and active bits
  logic [NUM_IRQ-1:0] pend_n, act_n;
  always_comb begin
    pend_n = pend_q | (irq & ~irq_q);
    act_n  = act_q;
    if (take_push || take_tail) begin
      pend_n[p_idx] = 1'b0;
    end
    if (take_tail || take_pop) act_n[a_idx] = 1'b0;
    if (take_push || take_tail) act_n[p_idx] = 1'b1;
    if (reg_req.valid && reg_req.write) begin
      if (reg_req.addr[11:0] == 12'h200) pend_n = pend_n | reg_req.wdata[NUM_IRQ-1:0];
      if (reg_req.addr[11:0] == 12'h280) pend_n = pend_n & ~reg_req.wdata[NUM_IRQ-1:0];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_THREAD;
      cnt_q   <= '0;
      en_q    <= '0;
      pend_q  <= '0;
      act_q   <= '0;
      irq_q   <= '0;
      num_q   <= '0;
      prio_q  <= '{default: '0};
    end else begin
      irq_q  <= irq;
      pend_q <= pend_n;
      act_q  <= act_n;
      unique case (state_q)
        S_THREAD, S_HANDLER: begin
          if (take_push || take_tail) begin
            num_q   <= p_idx;
            cnt_q   <= take_push ? CW'(PUSH_CYCLES - 1) : CW'(TAIL_CYCLES - 1);
            state_q <= take_push ? S_PUSH : S_TAIL;
          end else if (take_pop) begin
            cnt_q   <= CW'(POP_CYCLES - 1);
            state_q <= S_POP;
          end
        end
        S_PUSH, S_TAIL: begin
          if (cnt_q == 0) state_q <= S_HANDLER;
          else            cnt_q   <= cnt_q - 1'b1;
        end
        S_POP: begin
          if (cnt_q == 0) state_q <= (|act_q) ? S_HANDLER : S_THREAD;
          else            cnt_q   <= cnt_q - 1'b1;
        end
        default: state_q <= S_THREAD;
      endcase
      // register writes
      if (reg_req.valid && reg_req.write) begin
        if (reg_req.addr[11:0] == 12'h100) en_q <= en_q | reg_req.wdata[NUM_IRQ-1:0];
        if (reg_req.addr[11:0] == 12'h180) en_q <= en_q & ~reg_req.wdata[NUM_IRQ-1:0];
        for (int i = 0; i < NUM_IRQ; i++)
          if (reg_req.addr[11:0] == 12'(12'h400 + 4*(i/4)))
            prio_q[i] <= reg_req.wdata[8*(i%4) + 8 - PRIO_BITS +: PRIO_BITS];
      end
    end
  end

  always_comb begin
    core_stall    = state_q inside {S_PUSH, S_TAIL, S_POP};
    handler_start = (state_q inside {S_PUSH, S_TAIL}) && cnt_q == 0;
    exc_num       = (state_q == S_HANDLER || state_q == S_POP) ? a_idx : num_q;
    handler_mode  = state_q != S_THREAD;
    ev_push       = take_push;
    ev_tail       = take_tail;
    ev_pop        = take_pop;
    ev_preempt    = take_push && state_q == S_HANDLER;
  end

  always_comb begin
    reg_rsp       = BUS_RSP_IDLE;
    reg_rsp.ready = reg_req.valid;
    unique case (reg_req.addr[11:0])
      12'h100, 12'h180: reg_rsp.rdata = 32'(en_q);
      12'h200, 12'h280: reg_rsp.rdata = 32'(pend_q);
      12'h300:          reg_rsp.rdata = 32'(act_q);
      default: ;
    endcase
    for (int i = 0; i < NUM_IRQ; i++)
      if (reg_req.addr[11:0] == 12'(12'h400 + 4*(i/4)))
        reg_rsp.rdata[8*(i%4) + 8 - PRIO_BITS +: PRIO_BITS] = prio_q[i];
  end

  // exc_return is only meaningful while a handler runs
  a_ret_in_handler: assert property (@(posedge clk) disable iff (!rst_n)
                                     exc_return |-> state_q == S_HANDLER);

endmodule
