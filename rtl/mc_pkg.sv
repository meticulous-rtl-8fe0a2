// mc_pkg: constants and types shared by the memory-emulator RTL.
//
// The emulator sits between a CPU's AXI4 master port and the AXI4 slave port of
// a DDR4 memory controller. The data bus is 128 bits wide and runs at 300 MHz
// (4.8 GB/s), which is the configuration the design was built for. The ID and
// address widths are this design's choice (a 40-bit physical address space and
// 6-bit AXI IDs, typical of an ARMv8 SoC's FPGA ports).
//
// Units used throughout:
//   latency    in 100-ns ticks  (rd/wr latency registers)
//   throughput in 10 MB/s units (rd/wr throughput registers); conveniently
//              10 MB/s is exactly 1 byte per 100 ns, so the register value is
//              the number of bytes credited to the token bucket per tick
//   error rate as a 32-bit probability per data bit: rate / 2^32
//
// CSR map (32-bit AXI4-Lite words, one 64-byte block per region ("bank")):
//   +0x00 BOUNDARY   start offset of the region in the emulated DRAM, 4-KB units
//   +0x04 RD_LAT     read latency inserted, 100-ns units
//   +0x08 WR_LAT     write latency inserted, 100-ns units
//   +0x0C RD_THPT    read bandwidth limit, 10 MB/s units, 0 = unlimited
//   +0x10 WR_THPT    write bandwidth limit, 10 MB/s units, 0 = unlimited
//   +0x14 RD_ERR     read bit-flip probability * 2^32
//   +0x18 WR_ERR     write bit-flip probability * 2^32
//   +0x20/+0x24      bytes of read data delivered, low/high word
//   +0x28/+0x2C      bytes of write data delivered, low/high word
//   +0x30/+0x34      bits flipped in read data, low/high word
//   +0x38/+0x3C      bits flipped in write data, low/high word
// Reading a low word latches the matching high word, so a low-then-high read
// pair returns a consistent 64-bit value.
package mc_pkg;

  localparam int unsigned DATA_W   = 128;
  localparam int unsigned STRB_W   = DATA_W / 8;
  localparam int unsigned ID_W     = 6;
  localparam int unsigned ADDR_W   = 40;
  localparam int unsigned LAT_W    = 16;   // latency register width (100-ns units)
  localparam int unsigned THPT_W   = 16;   // throughput register width (10 MB/s units)
  localparam int unsigned TIME_W   = 32;   // current-time counter width (100-ns ticks)
  localparam int unsigned CNT_W    = 64;   // statistics counter width
  localparam int unsigned PAGE_SH  = 12;   // BOUNDARY register granularity: 4 KB

  localparam int unsigned CSR_ADDR_W = 12;
  localparam int unsigned BANK_SH    = 6;  // 64 bytes of CSR per bank

  typedef enum logic [3:0] {
    REG_BOUNDARY = 4'h0,
    REG_RD_LAT   = 4'h1,
    REG_WR_LAT   = 4'h2,
    REG_RD_THPT  = 4'h3,
    REG_WR_THPT  = 4'h4,
    REG_RD_ERR   = 4'h5,
    REG_WR_ERR   = 4'h6,
    REG_RD_BYTES_LO = 4'h8,
    REG_RD_BYTES_HI = 4'h9,
    REG_WR_BYTES_LO = 4'hA,
    REG_WR_BYTES_HI = 4'hB,
    REG_RD_BERR_LO  = 4'hC,
    REG_RD_BERR_HI  = 4'hD,
    REG_WR_BERR_LO  = 4'hE,
    REG_WR_BERR_HI  = 4'hF
  } csr_reg_e;

  // Address-channel payload of AXI4 (AR and AW); the ID travels beside it
  // because its width differs on the CPU side and on the memory side.
  typedef struct packed {
    logic [ADDR_W-1:0] addr;
    logic [7:0]        len;     // beats - 1
    logic [2:0]        size;
    logic [1:0]        burst;
    logic              lock;
    logic [3:0]        cache;
    logic [2:0]        prot;
    logic [3:0]        qos;
  } ax_t;

  // Read-data and write-data payloads (ID beside them as for ax_t).
  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [1:0]        resp;
    logic              last;
  } r_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;
    logic [STRB_W-1:0] strb;
    logic              last;
  } w_t;

  // Emulation parameters of one region, as the CSR hands them to a rate controller.
  typedef struct packed {
    logic [LAT_W-1:0]  rd_lat;
    logic [LAT_W-1:0]  wr_lat;
    logic [THPT_W-1:0] rd_thpt;
    logic [THPT_W-1:0] wr_thpt;
    logic [31:0]       rd_err;
    logic [31:0]       wr_err;
  } region_cfg_t;

  // Per-cycle statistics increments from a rate controller to the CSR counters.
  typedef struct packed {
    logic [15:0] rd_bytes;    // bytes of read data handed to the CPU this cycle
    logic [15:0] wr_bytes;    // bytes of write data handed to memory this cycle
    logic [15:0] rd_flips;    // bits flipped in read data this cycle
    logic [15:0] wr_flips;    // bits flipped in write data this cycle
  } region_stat_t;

endpackage
