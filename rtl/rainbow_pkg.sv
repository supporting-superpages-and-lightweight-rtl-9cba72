// rainbow_pkg: address-field widths, memory-line request types and
// translation-path codes shared by the Rainbow hybrid-memory hardware.
//
// Physical and virtual addresses are 48 bits. A 2 MB superpage number
// (PSN / VSN) is address bits 47..21, the 4 KB small-page index inside a
// superpage is bits 20..12, and a 4 KB page number (PPN / VPN) is bits
// 47..12. These fields follow the physical-address layout of the migration
// bitmap cache; the 48-bit width, the 64-byte memory line and the DRAM/NVM
// address map are choices of this implementation.
package rainbow_pkg;

  localparam int unsigned PA_W     = 48;
  localparam int unsigned VA_W     = 48;
  localparam int unsigned SP_W     = PA_W - 21;  // superpage number, 27 bits
  localparam int unsigned PN_W     = PA_W - 12;  // 4 KB page number, 36 bits
  localparam int unsigned SIDX_W   = 9;          // 512 small pages per superpage
  localparam int unsigned LINE_W   = 512;        // one 64-byte memory line
  localparam int unsigned ID_W     = 4;          // request tag

  // Address map (implementation choice): DRAM 4 GB at 0, PCM 32 GB above it.
  localparam logic [PA_W-1:0] DRAM_BASE = 48'h0000_0000_0000;
  localparam logic [PA_W-1:0] NVM_BASE  = 48'h0001_0000_0000;
  localparam logic [PA_W-1:0] NVM_BYTES = 48'h0008_0000_0000;
  localparam logic [SP_W-1:0] NVM_BASE_PSN = SP_W'(NVM_BASE >> 21);

  // A memory-line request (read or write of one 64-byte line).
  typedef struct packed {
    logic [PA_W-1:0]   addr;   // byte address; bits 5..0 select a word for reads
    logic              we;
    logic [LINE_W-1:0] wdata;
    logic [ID_W-1:0]   id;
  } mem_req_t;

  typedef struct packed {
    logic [LINE_W-1:0] rdata;
    logic [ID_W-1:0]   id;
  } mem_resp_t;

  // Bitmap-cache operations.
  typedef enum logic [1:0] {
    BM_LOOKUP = 2'd0,
    BM_SET    = 2'd1,
    BM_CLEAR  = 2'd2
  } bm_op_e;

  // Which of the four addressing paths a translation took.
  typedef enum logic [2:0] {
    XC_SMALL_HIT   = 3'd1,  // path 1: 4 KB TLB hit (cases 1 and 2)
    XC_REMAP       = 3'd2,  // path 2: superpage translation, flag set, DRAM PPN fetched
    XC_SUPERPAGE   = 3'd3,  // path 3: superpage translation, flag clear
    XC_FAULT       = 3'd4   // superpage walk found no mapping
  } xcase_e;

  // Extract the 64-bit word addressed by addr[5:3] from a memory line.
  function automatic logic [63:0] line_word(input logic [LINE_W-1:0] line,
                                            input logic [PA_W-1:0] addr);
    return line[addr[5:3]*64 +: 64];
  endfunction

endpackage
