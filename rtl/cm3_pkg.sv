// cm3_pkg: types and constants shared by the Cortex-M3 style memory subsystem.
//
// All on-chip transfers use one request/response pair. A master holds a request
// (valid, address, direction, size, write data, lock) stable until the same cycle in
// which the slave answers with ready; rdata and err are valid in that cycle. lock asks
// the interconnect to keep the slave for the next request too (used by the bit-band
// read-modify-write). The memory map follows the regions printed in the memory map
// figure of the paper (Code, SRAM, Peripheral each 0.5 GB, External RAM and External
// device 1.0 GB, then the private peripheral bus and vendor space); the base addresses
// follow from those sizes. The bit-band window (1 MB region, 7 MB gap, 8 MB alias) is
// also the figure's; peripheral register offsets inside the private peripheral bus are
// this design's own choice.
package cm3_pkg;

  typedef enum logic [1:0] {SZ_BYTE = 2'd0, SZ_HALF = 2'd1, SZ_WORD = 2'd2} size_e;

  typedef struct packed {
    logic        valid;
    logic [31:0] addr;
    logic        write;
    size_e       size;
    logic [31:0] wdata;   // byte lanes as in memory: byte n of the word on bits 8n+7:8n
    logic        lock;
  } bus_req_t;

  typedef struct packed {
    logic        ready;
    logic [31:0] rdata;
    logic        err;
  } bus_rsp_t;

  localparam bus_req_t BUS_REQ_IDLE = '{valid: 1'b0, addr: 32'h0, write: 1'b0,
                                        size: SZ_WORD, wdata: 32'h0, lock: 1'b0};
  localparam bus_rsp_t BUS_RSP_IDLE = '{ready: 1'b0, rdata: 32'h0, err: 1'b0};

  // Memory map (0.5 GB regions from the figure)
  localparam logic [31:0] CODE_BASE   = 32'h0000_0000;
  localparam logic [31:0] SRAM_BASE   = 32'h2000_0000;
  localparam logic [31:0] PERIPH_BASE = 32'h4000_0000;
  localparam logic [31:0] EXTRAM_BASE = 32'h6000_0000;
  localparam logic [31:0] EXTDEV_BASE = 32'hA000_0000;
  localparam logic [31:0] PPB_BASE    = 32'hE000_0000;

  // Bit banding: 1 MB region at the start of SRAM and Peripheral, 8 MB alias 8 MB above it
  localparam int unsigned BB_REGION_BYTES = 32'h0010_0000;  // 1 MB
  localparam int unsigned BB_ALIAS_OFFSET = 32'h0080_0000;  // 1 MB region + 7 MB gap
  localparam int unsigned BB_ALIAS_BYTES  = 32'h0080_0000;  // 8 MB, one byte per bit

  // Private peripheral bus register blocks (this design's layout)
  localparam logic [31:0] FPB_BASE  = 32'hE000_2000;  // flash patch
  localparam logic [31:0] NVIC_BASE = 32'hE000_E000;  // interrupt controller
  localparam logic [31:0] MPU_BASE  = 32'hE000_ED00;  // protection unit

  // Slave indices of the bus matrix
  typedef enum logic [1:0] {SL_CODE = 2'd0, SL_SRAM = 2'd1, SL_PERIPH = 2'd2, SL_PPB = 2'd3} slave_e;

  function automatic slave_e decode_slave(input logic [31:0] a);
    if (a[31:29] == 3'b000)      return SL_CODE;
    else if (a[31:29] == 3'b001) return SL_SRAM;
    else if (a[31:29] == 3'b111) return SL_PPB;
    else                         return SL_PERIPH;   // peripheral, external RAM/device
  endfunction

  // Byte-lane write enables of a transfer
  function automatic logic [3:0] byte_enables(input size_e sz, input logic [1:0] a);
    unique case (sz)
      SZ_BYTE: return 4'b0001 << a;
      SZ_HALF: return a[1] ? 4'b1100 : 4'b0011;
      default: return 4'b1111;
    endcase
  endfunction

endpackage
