// ohm_pkg: types and constants shared by the heterogeneous-memory optical channel.
//
// A virtual channel carries VC_W bits per clock (one bit per wavelength). Every
// transfer on it is a packet: a 64-bit header followed, for commands that carry
// a cache line, by LINE_W bits of data. The header names the command, the sender,
// the receiver, a request id, the cache metadata (valid, dirty, tag) and a line
// address. Light power on a wavelength is carried as an integer level in
// sixteenths of the laser's power so that half- and quarter-power states of a
// half-coupled micro-ring can be represented exactly.
//
// Paper numbers: 16-bit virtual channels, six of them (96-bit channel), DRAM
// timing tRCD 25 ns, tRP 10 ns, tCL 11 ns, tRRD 5 ns, XPoint read 190 ns and
// write 763 ns, tags of up to 6 bits with 1 valid and 1 dirty bit. Own choices:
// 1 ns clock (so the latencies become cycle counts), 64-byte lines, the packet
// layout and the command encoding.
package ohm_pkg;

  localparam int unsigned VC_W       = 16;   // wavelengths per virtual channel
  localparam int unsigned N_VC       = 6;    // virtual channels (memory controllers)
  localparam int unsigned LINE_W     = 512;  // 64-byte cache line
  localparam int unsigned HDR_W      = 64;
  localparam int unsigned ADDR_W     = 40;
  localparam int unsigned TAG_W      = 6;
  localparam int unsigned LVL_W      = 5;    // light level, sixteenths
  localparam logic [LVL_W-1:0] LASER = 5'd16;

  // Timing in 1 ns clock cycles.
  localparam int unsigned T_RCD   = 25;
  localparam int unsigned T_RP    = 10;
  localparam int unsigned T_CL    = 11;
  localparam int unsigned T_RRD   = 5;
  localparam int unsigned T_XP_RD = 190;
  localparam int unsigned T_XP_WR = 763;

  typedef enum logic [3:0] {
    C_NOP    = 4'd0,
    C_ACT    = 4'd1,   // DRAM activate (addr = line address in the row)
    C_PRE    = 4'd2,   // DRAM precharge
    C_RD     = 4'd3,   // read a line
    C_WR     = 4'd4,   // write a line (data follows)
    C_RDDATA = 4'd5,   // read response (data follows)
    C_SWAP   = 4'd6,   // SWAP-CMD: data word holds DRAM addr, XPoint addr, line count
    C_XRD    = 4'd7,   // DRAM read issued by the XPoint controller
    C_XWR    = 4'd8    // DRAM write issued by the XPoint controller (data follows)
  } cmd_e;

  typedef enum logic [1:0] {
    D_MC   = 2'd0,
    D_DRAM = 2'd1,
    D_XP   = 2'd2,
    D_NONE = 2'd3
  } dev_e;

  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [TAG_W-1:0] tag;
  } meta_t;

  typedef struct packed {
    cmd_e              cmd;
    dev_e              src;
    dev_e              dst;
    logic [7:0]        id;
    meta_t             meta;
    logic [ADDR_W-1:0] addr;
  } hdr_t;

  typedef struct packed {
    hdr_t              hdr;
    logic [LINE_W-1:0] data;
  } pkt_t;

  // Receiver coupling state of a micro-ring detector.
  typedef enum logic [1:0] {
    RX_OFF  = 2'd0,   // detuned: light passes untouched
    RX_FULL = 2'd1,   // fully coupled: all light absorbed
    RX_HALF = 2'd2    // half coupled: half the light absorbed, half passes on
  } rx_mode_e;

  // DDR-T side-band message from the XPoint controller.
  typedef enum logic [1:0] {
    RDY_DATA  = 2'd0,  // read data ready to be sent to the memory controller
    RDY_SWAP  = 2'd1,  // swap finished
    RDY_RWR   = 2'd2   // about to reverse-write a line into DRAM
  } rdy_e;

  function automatic logic has_data(cmd_e c);
    return (c == C_WR) || (c == C_RDDATA) || (c == C_SWAP) || (c == C_XWR);
  endfunction

  function automatic int unsigned pkt_flits(cmd_e c);
    return has_data(c) ? (HDR_W + LINE_W) / VC_W : HDR_W / VC_W;
  endfunction

  // event counters of one virtual channel
  typedef struct packed {
    logic [31:0] stall;      // clocks a request waited on a swap or miss conflict
    logic [31:0] swap;       // swaps started by the memory controller
    logic [31:0] swap_done;  // swaps finished by the XPoint controller
    logic [31:0] evict;      // dirty victims snarfed and written by XPoint
    logic [31:0] rwr;        // reverse writes XPoint -> DRAM
    logic [31:0] gap;        // Start-Gap line moves
    logic [31:0] overlay;    // clocks the XPoint rode on a memory-controller packet
    logic [31:0] mode_sw;    // planar <-> two-level changes
    logic [31:0] hit;
    logic [31:0] miss;
    logic [31:0] xp_req;
    logic [31:0] dram_req;
  } vc_stats_t;

endpackage
