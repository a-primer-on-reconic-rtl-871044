// reconic_pkg -- widths, bus structs and constants shared by the RecoNIC shell.
//
// The shell runs in one clock domain. The data path is 512 bits wide on every
// AXI4-Stream and AXI4 bus: at 250 MHz (the rate implied by 170 cycles being
// 680 ns for the PCIe slave bridge) 512 bits give 128 Gb/s, enough for the
// 100 Gb/s line. The 512-bit width, the 4-bit AXI ID and the 32-bit AXI4-Lite
// buses are this design's choice; the paper prints no bus widths.
//
// Every AXI4 / AXI4-Lite port is split into a request struct (all signals the
// manager drives) and a response struct (all signals the subordinate drives).
// AXI4-Stream ports carry an axis_t (valid, data, keep, last) plus a separate
// ready. The 64-bit address, the 12-bit device-memory MSB tag 0xA35 and the
// 16 GB (34-bit) device memory window follow the paper's address map.
package reconic_pkg;

  // ---------------- AXI4-Stream (network packets) ----------------
  localparam int unsigned AXIS_DATA_W = 512;
  localparam int unsigned AXIS_KEEP_W = AXIS_DATA_W / 8;

  typedef struct packed {
    logic                   tvalid;
    logic [AXIS_DATA_W-1:0] tdata;   // byte 0 of the packet in tdata[7:0]
    logic [AXIS_KEEP_W-1:0] tkeep;
    logic                   tlast;
  } axis_t;

  // ---------------- AXI4 memory-mapped ----------------
  localparam int unsigned AXI_ADDR_W = 64;
  localparam int unsigned AXI_DATA_W = 512;
  localparam int unsigned AXI_STRB_W = AXI_DATA_W / 8;
  localparam int unsigned AXI_ID_W   = 4;
  localparam int unsigned AXI_BEAT_BYTES = AXI_DATA_W / 8;   // 64
  localparam logic [2:0]  AXI_SIZE_FULL  = 3'd6;             // 64-byte beats
  localparam logic [1:0]  AXI_BURST_INCR = 2'b01;
  localparam logic [1:0]  AXI_RESP_OKAY   = 2'b00;
  localparam logic [1:0]  AXI_RESP_SLVERR = 2'b10;
  localparam logic [1:0]  AXI_RESP_DECERR = 2'b11;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_ADDR_W-1:0] addr;
    logic [7:0]            len;
    logic [2:0]            size;
    logic [1:0]            burst;
  } axi_ax_t;                          // AW and AR channel payload

  typedef struct packed {
    logic [AXI_DATA_W-1:0] data;
    logic [AXI_STRB_W-1:0] strb;
    logic                  last;
  } axi_w_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0] id;
    logic [1:0]          resp;
  } axi_b_t;

  typedef struct packed {
    logic [AXI_ID_W-1:0]   id;
    logic [AXI_DATA_W-1:0] data;
    logic [1:0]            resp;
    logic                  last;
  } axi_r_t;

  typedef struct packed {
    axi_ax_t aw;  logic aw_valid;
    axi_w_t  w;   logic w_valid;
    logic    b_ready;
    axi_ax_t ar;  logic ar_valid;
    logic    r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    w_ready;
    axi_b_t  b;   logic b_valid;
    logic    ar_ready;
    axi_r_t  r;   logic r_valid;
  } axi_resp_t;

  // ---------------- AXI4-Lite (PCIe register path) ----------------
  localparam int unsigned AXIL_ADDR_W = 32;
  localparam int unsigned AXIL_DATA_W = 32;

  typedef struct packed {
    logic [AXIL_ADDR_W-1:0] aw_addr;  logic aw_valid;
    logic [AXIL_DATA_W-1:0] w_data;
    logic [3:0]             w_strb;   logic w_valid;
    logic                   b_ready;
    logic [AXIL_ADDR_W-1:0] ar_addr;  logic ar_valid;
    logic                   r_ready;
  } axil_req_t;

  typedef struct packed {
    logic                   aw_ready;
    logic                   w_ready;
    logic [1:0]             b_resp;   logic b_valid;
    logic                   ar_ready;
    logic [AXIL_DATA_W-1:0] r_data;
    logic [1:0]             r_resp;   logic r_valid;
  } axil_resp_t;

  // ---------------- Address map ----------------
  // Device memory: 0xA350_0000_0000_0000 .. 0xA350_0003_FFFF_FFFF (16 GB).
  localparam int unsigned   DEV_MSB_W     = 12;
  localparam logic [11:0]   DEV_MSB_TAG   = 12'hA35;
  localparam int unsigned   DEV_MEM_ADDR_W = 34;

  // ---------------- Packet classification ----------------
  localparam logic [15:0] ETHTYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ETHTYPE_IPV6 = 16'h86DD;
  localparam logic [7:0]  IPPROTO_UDP  = 8'd17;
  localparam logic [15:0] ROCEV2_UDP_PORT = 16'd4791;   // IANA port of RoCEv2

  typedef struct packed {
    logic        is_rdma;
    logic [7:0]  bth_opcode;   // RoCEv2 base transport header opcode
    logic [23:0] bth_dest_qp;  // destination queue pair
  } pc_meta_t;

  // ---------------- Lookaside compute control messages ----------------
  localparam logic [7:0] LC_STAT_DONE    = 8'h01;
  localparam logic [7:0] LC_STAT_BAD_ARG = 8'h02;
  localparam logic [7:0] LC_STAT_BUS_ERR = 8'h03;

endpackage
