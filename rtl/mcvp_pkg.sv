// Platform constants of the multicore vector processor: the address map seen
// by the DMA, the numbers and fields of the management core's custom CSRs,
// and the CSR bus between the management core and those registers.
//
// Address map (this design's choice; the sizes follow the 1 MiB of scratchpad
// per worker core):
//   0x1000_0000 + c*0x0010_0000            I-SPM of worker core c
//   0x1000_0000 + c*0x0010_0000 + 0x8_0000 D-SPM of worker core c
//   0x8000_0000 .. 0xFFFF_FFFF             external memory (AXI4)
//
// Custom CSRs, in the RISC-V machine-mode custom read/write range:
//   0x7C0 DMA_SRC     source byte address
//   0x7C1 DMA_DST     destination byte address
//   0x7C2 DMA_LEN     length in bytes (multiple of 4)
//   0x7C3 DMA_CTRL    write bit 0 = 1: start a transfer (ignored while busy)
//   0x7C4 DMA_STATUS  bit 0 busy, bit 1 done (sticky), bit 2 error (sticky);
//                     writing 1 to bit 1 / bit 2 clears it
//   0x7C8 TMR_LO      timer count, bits 31:0 (read / write)
//   0x7C9 TMR_HI      timer count, bits 63:32 (read / write)
//   0x7CA CMP_LO      timer compare, bits 31:0 (reset: all ones)
//   0x7CB CMP_HI      timer compare, bits 63:32 (reset: all ones)
//   0x7CC TMR_CTRL    bit 0 count enable, bit 1 interrupt enable,
//                     bit 2 clear count (write only, reads 0)
//   0x7CD TMR_STATUS  bit 0 match: count >= compare (read only)
package mcvp_pkg;

  localparam logic [31:0] SPM_BASE     = 32'h1000_0000;
  localparam logic [31:0] TILE_STRIDE  = 32'h0010_0000;
  localparam logic [31:0] DSPM_OFFSET  = 32'h0008_0000;
  localparam logic [31:0] EXT_BASE     = 32'h8000_0000;

  // true when a DMA address belongs to external memory (AXI4 side)
  function automatic logic is_ext_addr(logic [31:0] a);
    return a[31];
  endfunction

  typedef enum logic [11:0] {
    CSR_DMA_SRC    = 12'h7C0,
    CSR_DMA_DST    = 12'h7C1,
    CSR_DMA_LEN    = 12'h7C2,
    CSR_DMA_CTRL   = 12'h7C3,
    CSR_DMA_STATUS = 12'h7C4,
    CSR_TMR_LO     = 12'h7C8,
    CSR_TMR_HI     = 12'h7C9,
    CSR_CMP_LO     = 12'h7CA,
    CSR_CMP_HI     = 12'h7CB,
    CSR_TMR_CTRL   = 12'h7CC,
    CSR_TMR_STATUS = 12'h7CD
  } csr_addr_e;

  // One CSR access from the management core. The core performs the Zicsr
  // read-modify-write itself; wdata is the final value to be written.
  typedef struct packed {
    logic        valid;
    logic        we;
    logic [11:0] addr;
    logic [31:0] wdata;
  } csr_req_t;

endpackage
