// realm_pkg: types and constants shared by every AXI-REALM module.
//
// The AXI4 channels are carried as packed structs in the request/response
// bundle style: a manager drives an axi_req_t (AW, W, AR payloads, their valid
// bits and the B/R ready bits), a subordinate drives an axi_resp_t (the ready
// bits and the B/R payloads with their valid bits). One set of widths is used
// on every port of the design. Address (48 bit) and data (64 bit) widths follow
// the platform integration the design was sized for; the ID width (8 bit) and the
// configuration-bus format are this design's own choices. There is no user field.
package realm_pkg;

  localparam int unsigned AddrWidth   = 48;
  localparam int unsigned DataWidth   = 64;
  localparam int unsigned StrbWidth   = DataWidth / 8;
  localparam int unsigned IdWidth     = 8;
  localparam int unsigned CfgAddrWidth = 16;
  localparam int unsigned CfgDataWidth = 64;

  typedef logic [AddrWidth-1:0] addr_t;
  typedef logic [DataWidth-1:0] data_t;
  typedef logic [StrbWidth-1:0] strb_t;
  typedef logic [IdWidth-1:0]   id_t;
  typedef logic [7:0]           len_t;
  typedef logic [2:0]           size_t;

  // AXI4 burst and response encodings
  typedef enum logic [1:0] {BURST_FIXED = 2'b00, BURST_INCR = 2'b01, BURST_WRAP = 2'b10} burst_e;
  localparam logic [1:0] RESP_OKAY   = 2'b00;
  localparam logic [1:0] RESP_EXOKAY = 2'b01;
  localparam logic [1:0] RESP_SLVERR = 2'b10;
  localparam logic [1:0] RESP_DECERR = 2'b11;

  typedef struct packed {
    id_t        id;
    addr_t      addr;
    len_t       len;
    size_t      size;
    logic [1:0] burst;
    logic       lock;
    logic [3:0] cache;
    logic [2:0] prot;
    logic [3:0] qos;
    logic [3:0] region;
  } ax_chan_t;

  typedef struct packed {
    data_t data;
    strb_t strb;
    logic  last;
  } w_chan_t;

  typedef struct packed {
    id_t        id;
    logic [1:0] resp;
  } b_chan_t;

  typedef struct packed {
    id_t        id;
    data_t      data;
    logic [1:0] resp;
    logic       last;
  } r_chan_t;

  typedef struct packed {
    ax_chan_t aw;
    logic     aw_valid;
    w_chan_t  w;
    logic     w_valid;
    logic     b_ready;
    ax_chan_t ar;
    logic     ar_valid;
    logic     r_ready;
  } axi_req_t;

  typedef struct packed {
    logic    aw_ready;
    logic    ar_ready;
    logic    w_ready;
    logic    b_valid;
    b_chan_t b;
    logic    r_valid;
    r_chan_t r;
  } axi_resp_t;

  // Simple single-cycle-acknowledge configuration bus (one request, one
  // response per access). The id identifies the accessing manager.
  typedef struct packed {
    logic                    valid;
    logic                    write;
    logic [CfgAddrWidth-1:0] addr;
    logic [CfgDataWidth-1:0] wdata;
    id_t                     id;
  } cfg_req_t;

  typedef struct packed {
    logic                    ready;
    logic [CfgDataWidth-1:0] rdata;
    logic                    error;
  } cfg_rsp_t;

  // ------------------------------------------------------------------ iRealm
  // Runtime configuration of one subordinate region of an iRealm unit.
  // Region r covers start <= addr < end_addr. Budgets are in bytes, periods in
  // clock cycles; read and write have their own budget and period.
  typedef struct packed {
    addr_t       start_addr;
    addr_t       end_addr;
    logic [31:0] budget_w;
    logic [31:0] budget_r;
    logic [31:0] period_w;
    logic [31:0] period_r;
  } region_cfg_t;

  // Monitoring state of one region: budget left in the current period and
  // bytes transferred since reset (the bandwidth probe).
  typedef struct packed {
    logic [31:0] left_w;
    logic [31:0] left_r;
    logic [31:0] bytes_w;
    logic [31:0] bytes_r;
  } region_stat_t;

  // Per-unit configuration.
  typedef struct packed {
    logic enable;       // 0: unit bypassed
    logic regulate;     // budget/period regulation active
    logic wbuf_en;      // write buffer active
    logic isolate;      // software isolation command
    len_t frag_len;     // fragment length in beats minus one (0..255)
  } irealm_cfg_t;

  // Per-unit status: latency probe (sum over time of outstanding
  // transactions, so sum/count is the mean latency), completed transactions,
  // isolation state and budget depletion.
  typedef struct packed {
    logic [31:0] lat_sum_w;
    logic [31:0] lat_sum_r;
    logic [31:0] txn_w;
    logic [31:0] txn_r;
    logic        isolated;
    logic        depleted;
    logic        active;
  } irealm_stat_t;

  // ------------------------------------------------------------------ eRealm
  // Per-unit configuration (stage budgets are separate arrays). sw_reset and
  // clear are single-cycle pulses.
  typedef struct packed {
    logic enable;      // 0: unit bypassed
    logic irq_en;      // raise irq on a logged fault
    logic auto_reset;  // reset the subordinate as soon as a fault is detected
    logic sw_reset;    // pulse: complete outstanding transactions, reset subordinate
    logic clear;       // pulse: clear the error log and the interrupt
  } erealm_cfg_t;

  // Error log: first fault since the last clear.
  typedef struct packed {
    logic       valid;
    logic       is_write;
    logic [1:0] cause;   // 1: timeout, 2: protocol violation
    logic [2:0] stage;   // stage number, see erealm_tracker
    id_t        id;
    addr_t      addr;
    logic       active;  // unit not bypassed
    logic       busy;    // completing transactions / resetting the subordinate
  } erealm_stat_t;

  // Bytes moved by one beat of the given size.
  function automatic logic [8:0] beat_bytes(size_t size);
    return 9'(1) << size;
  endfunction

  // Bytes moved by a whole burst.
  function automatic logic [16:0] burst_bytes(len_t len, size_t size);
    return (17'(len) + 17'd1) << size;
  endfunction

  // Address of the beat following `beats` beats from `addr` (INCR bursts;
  // FIXED bursts keep their address).
  function automatic addr_t next_addr(addr_t addr, size_t size, logic [1:0] burst,
                                      logic [8:0] beats);
    addr_t aligned;
    if (burst == BURST_FIXED) return addr;
    aligned = (addr >> size) << size;
    return aligned + (addr_t'(beats) << size);
  endfunction

endpackage
