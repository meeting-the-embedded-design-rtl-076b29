// cm3_top: memory, protection, interrupt and debug-patch subsystem around a Thumb-2 core,
// arranged as in the paper's Cortex-M3 block diagram.
//
// The processor core, the debug access port and the embedded flash array are outside
// this module; their connections are its ports. The core's instruction fetch and data
// requests first pass the memory protection unit; data requests then pass the bit-band
// unit, which turns alias accesses into bit reads and atomic bit writes. The bus matrix
// connects fetch, data and debug masters to four slaves: the code region (flash patch
// in front of the prefetching flash interface), the on-chip SRAM, the peripheral and
// external space (brought out as ext_periph_*), and the private peripheral bus, where
// this module decodes the register blocks of the flash patch (0xE000_2000), the
// interrupt controller (0xE000_E000-0xE000_ECFF) and the protection unit (0xE000_ED00);
// other private peripheral addresses answer with err. The interrupt controller takes
// the interrupt lines and times exception entry, tail-chaining and exit for the core.
//
// All transfers use the valid/ready request/response structures of cm3_pkg, with a
// request held until ready. Parameters default to the sizes used throughout: 32
// interrupt lines, 8 protection regions, 8 patch words, 64 KB of SRAM, 64-bit flash
// lines. The overall arrangement follows the paper's figure; the ports and the address
// decoding of the private peripheral bus are this design's.
module cm3_top
  import cm3_pkg::*;
#(
  parameter int unsigned NUM_IRQ     = 32,
  parameter int unsigned PRIO_BITS   = 3,
  parameter int unsigned NUM_REGIONS = 8,
  parameter int unsigned NUM_PATCH   = 8,
  parameter int unsigned SRAM_BYTES  = 65536,
  parameter int unsigned LINE_BITS   = 64
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // core
  input  bus_req_t                   core_fetch_req,
  input  logic                       core_fetch_priv,
  output bus_rsp_t                   core_fetch_rsp,
  input  bus_req_t                   core_data_req,
  input  logic                       core_data_priv,
  output bus_rsp_t                   core_data_rsp,
  input  logic [NUM_IRQ-1:0]         irq,
  input  logic                       exc_return,
  output logic                       core_stall,
  output logic                       handler_start,
  output logic [$clog2(NUM_IRQ)-1:0] exc_num,
  output logic                       handler_mode,
  output logic                       mpu_fetch_fault,
  output logic                       mpu_data_fault,
  // debug access port
  input  bus_req_t                   dbg_req,
  output bus_rsp_t                   dbg_rsp,
  // embedded flash array
  output logic                       flash_req,
  output logic [31-$clog2(LINE_BITS/8):0] flash_addr,
  input  logic                       flash_ready,
  input  logic [LINE_BITS-1:0]       flash_rdata,
  // peripheral and external space
  output bus_req_t                   ext_periph_req,
  input  bus_rsp_t                   ext_periph_rsp,
  // one-cycle event pulses: {prefetch, flash miss, flash hit, patch hit,
  //                          preemption, pop, tail-chain, push}
  output logic [7:0]                 events
);

  bus_req_t fetch_mpu_req, data_mpu_req, data_bb_req;
  bus_rsp_t fetch_mpu_rsp, data_mpu_rsp, data_bb_rsp;
  bus_req_t m_req [3];
  bus_rsp_t m_rsp [3];
  bus_req_t s_req [4];
  bus_rsp_t s_rsp [4];
  bus_req_t flash_if_req, fpb_reg_req, nvic_reg_req, mpu_reg_req;
  bus_rsp_t flash_if_rsp, fpb_reg_rsp, nvic_reg_rsp, mpu_reg_rsp;

  logic ev_push, ev_tail, ev_pop, ev_preempt, ev_patch, ev_hit, ev_miss, ev_prefetch;

  mpu #(.NUM_REGIONS(NUM_REGIONS)) u_mpu (
    .clk, .rst_n,
    .fetch_up_req(core_fetch_req), .fetch_priv(core_fetch_priv), .fetch_up_rsp(core_fetch_rsp),
    .fetch_dn_req(fetch_mpu_req),  .fetch_dn_rsp(fetch_mpu_rsp),
    .data_up_req(core_data_req),   .data_priv(core_data_priv),   .data_up_rsp(core_data_rsp),
    .data_dn_req(data_mpu_req),    .data_dn_rsp(data_mpu_rsp),
    .reg_req(mpu_reg_req), .reg_rsp(mpu_reg_rsp),
    .fetch_fault(mpu_fetch_fault), .data_fault(mpu_data_fault)
  );

  bitband u_bitband (
    .clk, .rst_n,
    .up_req(data_mpu_req), .up_rsp(data_mpu_rsp),
    .dn_req(data_bb_req),  .dn_rsp(data_bb_rsp)
  );

  always_comb begin
    m_req[0] = fetch_mpu_req;
    m_req[1] = data_bb_req;
    m_req[2] = dbg_req;
  end

  always_comb begin
    fetch_mpu_rsp = m_rsp[0];
    data_bb_rsp   = m_rsp[1];
    dbg_rsp       = m_rsp[2];
  end

  bus_matrix u_matrix (
    .clk, .rst_n, .m_req, .m_rsp, .s_req, .s_rsp
  );

  flash_patch #(.NUM_PATCH(NUM_PATCH)) u_fpb (
    .clk, .rst_n,
    .code_req(s_req[SL_CODE]), .code_rsp(s_rsp[SL_CODE]),
    .flash_req(flash_if_req),  .flash_rsp(flash_if_rsp),
    .reg_req(fpb_reg_req),     .reg_rsp(fpb_reg_rsp),
    .ev_patch
  );

  flash_interface #(.LINE_BITS(LINE_BITS)) u_flash_if (
    .clk, .rst_n,
    .req(flash_if_req), .rsp(flash_if_rsp),
    .flash_req, .flash_addr, .flash_ready, .flash_rdata,
    .ev_hit, .ev_miss, .ev_prefetch
  );

  sram_periph_if #(.SRAM_BYTES(SRAM_BYTES)) u_sram (
    .clk, .rst_n,
    .sram_req(s_req[SL_SRAM]),     .sram_rsp(s_rsp[SL_SRAM]),
    .periph_req(s_req[SL_PERIPH]), .periph_rsp(s_rsp[SL_PERIPH]),
    .ext_periph_req, .ext_periph_rsp
  );

  nvic #(.NUM_IRQ(NUM_IRQ), .PRIO_BITS(PRIO_BITS)) u_nvic (
    .clk, .rst_n, .irq, .exc_return,
    .core_stall, .handler_start, .exc_num, .handler_mode,
    .ev_push, .ev_tail, .ev_pop, .ev_preempt,
    .reg_req(nvic_reg_req), .reg_rsp(nvic_reg_rsp)
  );

  assign events = {ev_prefetch, ev_miss, ev_hit, ev_patch, ev_preempt, ev_pop, ev_tail, ev_push};

  // private peripheral bus decode
  logic sel_fpb, sel_nvic, sel_mpu;
  always_comb begin
    sel_fpb  = s_req[SL_PPB].addr[31:12] == FPB_BASE[31:12];
    sel_nvic = s_req[SL_PPB].addr[31:12] == NVIC_BASE[31:12] && s_req[SL_PPB].addr[11:8] < 4'hD;
    sel_mpu  = s_req[SL_PPB].addr[31:12] == NVIC_BASE[31:12] && s_req[SL_PPB].addr[11:8] >= 4'hD;
    fpb_reg_req        = s_req[SL_PPB];
    fpb_reg_req.valid  = s_req[SL_PPB].valid && sel_fpb;
    nvic_reg_req       = s_req[SL_PPB];
    nvic_reg_req.valid = s_req[SL_PPB].valid && sel_nvic;
    mpu_reg_req        = s_req[SL_PPB];
    mpu_reg_req.valid  = s_req[SL_PPB].valid && sel_mpu;
    mpu_reg_req.addr   = s_req[SL_PPB].addr - MPU_BASE;
  end

  always_comb begin
    if (sel_fpb)       s_rsp[SL_PPB] = fpb_reg_rsp;
    else if (sel_nvic) s_rsp[SL_PPB] = nvic_reg_rsp;
    else if (sel_mpu)  s_rsp[SL_PPB] = mpu_reg_rsp;
    else s_rsp[SL_PPB] = '{ready: s_req[SL_PPB].valid, rdata: 32'h0, err: 1'b1};
  end

endmodule
