// mon_pkg: types and constants shared by the blocks of the hardware
// monitoring layer (adapter, nucleus with EVMON/TMON, global monitor
// interface, global monitor, interrupt controller).
//
// metric_t is the unit of data that leaves a nucleus: a 64-bit value (an
// event count or an elapsed cycle count, zero-extended) plus a flag that
// says the value is final (a finished time measurement or a latched count),
// and an update bit that toggles whenever a new final value is produced, so
// that a repeated final value (two tasks with the same count) still reads as
// new news downstream.
// reg_req_t is the one register-access request used by every block that
// software can program; read data is returned combinationally in the same
// cycle. Both formats are this design's choice: the paper does not specify
// how monitors are accessed or how metrics are encoded.
package mon_pkg;

  localparam int unsigned MET_W  = 64;  // widest monitor (1T64 in the paper)
  localparam int unsigned ID_W   = 8;   // metric / source identifier width
  localparam int unsigned ADDR_W = 12;  // word address of the register port
  localparam int unsigned DATA_W = 32;

  typedef struct packed {
    logic             upd;      // toggles at every new final value
    logic             final_v;  // value is final (task finished / count latched)
    logic [MET_W-1:0] value;
  } metric_t;

  typedef struct packed {
    logic              wr;
    logic              rd;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } reg_req_t;

  // Comparison applied by the global monitor to a metric value.
  typedef enum logic [1:0] {
    RULE_GT = 2'd0,  // value >  threshold  (watchdog, time limit)
    RULE_LT = 2'd1,  // value <  threshold  (too few events)
    RULE_NE = 2'd2,  // value != threshold  (count fault detection)
    RULE_EQ = 2'd3   // value == threshold
  } rule_mode_e;

  // Top-level address map: addr[11:10] selects the region, addr[9:8] the
  // nucleus within the nucleus region.
  localparam logic [1:0] REGION_NUC  = 2'd0;
  localparam logic [1:0] REGION_GM   = 2'd1;
  localparam logic [1:0] REGION_INTC = 2'd2;

  // Fixed-size lists used to give each monitor of a nucleus its events.
  localparam int unsigned MAX_MON = 4;
  typedef int sel_list_t [MAX_MON];

  localparam reg_req_t REQ_IDLE = '{wr: 1'b0, rd: 1'b0, addr: '0, wdata: '0};

endpackage
