// hw_mon_layer: the hardware monitoring layer in its evaluated
// configuration "Y1" by default (data-transfer fault detection, execution time and
// computation fault detection of a multiply-and-accumulate accelerator).
//
// Chain: adapter -> three nuclei -> global monitor interface (GMI) ->
// global monitor (GM) -> interrupt controller. The platform's trigger lines
// enter on ev_raw:
//   ev_raw[0] data beat on the interconnect into the accelerator (level)
//   ev_raw[1] accelerator start                                   (edge)
//   ev_raw[2] accelerator done                                    (edge)
//   ev_raw[3] one multiply-accumulate operation in the core       (level)
//   ev_raw[4] one result write by the core                        (level)
// Nuclei and the metric ids they produce:
//   interconnect nucleus: 1 EVMON, INT_W bits, programmable; counts beats
//                         per task (latched at done)        -> metric 0
//   data-manager nucleus: 1 TMON, DM_W bits, start..done time -> metric 1
//   core nucleus:         2 EVMONs, CORE_W bits; MAC operations and result
//                         writes per task (latched at done) -> metrics 2, 3
// Rules are programmed in the GM; a broken rule raises irq.
//
// Register port (word address): addr[11:10] = 0 nuclei (addr[9:8] = 0
// interconnect, 1 data manager, 2 core; addr[7:0] their window), 1 GM,
// 2 interrupt controller. Read data is combinational.
// Event widths and the monitor counts follow the paper's configuration
// table (1E32 with programmability, 1T64, 2E10); the line assignment, the
// register map and everything inside the stages are this design's choices.
module hw_mon_layer
  import mon_pkg::*;
#(
  parameter int unsigned N_EV   = 5,
  parameter int unsigned INT_W  = 32,
  parameter int unsigned DM_W   = 64,
  parameter int unsigned CORE_W = 10,
  // Which nuclei are built: all three for Y1; HAS_INT = 0 gives Y2,
  // HAS_CORE = 0 gives Y3. A nucleus left out exports a constant zero
  // metric, which the GMI never forwards.
  parameter bit          HAS_INT  = 1'b1,
  parameter bit          HAS_DM   = 1'b1,
  parameter bit          HAS_CORE = 1'b1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_EV-1:0] ev_raw,
  input  reg_req_t        req,
  output logic [31:0]     rdata,
  output logic            irq,
  output logic [ID_W-1:0] irq_id,
  // Observation of the internal stream and its arbitration.
  output logic            gmi_valid,
  output logic [ID_W-1:0] gmi_id,
  output logic [3:0]      gmi_dirty
);

  localparam int unsigned N_MET = 4;

  logic [N_EV-1:0] ev_inst;
  metric_t met_int  [1];
  metric_t met_dm   [1];
  metric_t met_core [2];
  metric_t met_all  [N_MET];

  logic     [31:0] rd_int, rd_dm, rd_core, rd_gm, rd_ic;
  reg_req_t req_int, req_dm, req_core, req_gm, req_ic;

  logic            gmi_ready;
  metric_t         gmi_metric;
  logic [N_MET-1:0] viol;

  // Address decode: each block sees the request only when it is addressed.
  always_comb begin
    req_int = REQ_IDLE; req_dm = REQ_IDLE; req_core = REQ_IDLE;
    req_gm  = REQ_IDLE; req_ic = REQ_IDLE;
    unique case (req.addr[11:10])
      REGION_NUC: begin
        unique case (req.addr[9:8])
          2'd0: req_int  = req;
          2'd1: req_dm   = req;
          2'd2: req_core = req;
          default: ;
        endcase
      end
      REGION_GM:   req_gm = req;
      REGION_INTC: req_ic = req;
      default: ;
    endcase
    rdata = rd_int | rd_dm | rd_core | rd_gm | rd_ic;
  end

  adapter #(.N_EV(N_EV), .EDGE_MASK(N_EV'(5'b00110))) u_adapter (
    .clk, .rst_n, .ev_raw, .ev_inst
  );

  if (HAS_INT) begin : g_int
    nucleus #(
      .N_EV(N_EV), .N_EVMON(1), .N_TMON(0), .EV_W(INT_W), .PROG(1'b1),
      .EV_SEL('{0, 0, 0, 0}), .LATCH_SEL('{2, -1, -1, -1})
    ) u_nuc_int (
      .clk, .rst_n, .ev_inst, .req(req_int), .rdata(rd_int), .metrics(met_int)
    );
  end else begin : g_int_none
    assign met_int[0] = '0;
    assign rd_int = '0;
  end

  if (HAS_DM) begin : g_dm
    nucleus #(
      .N_EV(N_EV), .N_EVMON(0), .N_TMON(1), .TM_W(DM_W), .PROG(1'b0),
      .START_SEL('{1, 1, 1, 1}), .DONE_SEL('{2, 2, 2, 2})
    ) u_nuc_dm (
      .clk, .rst_n, .ev_inst, .req(req_dm), .rdata(rd_dm), .metrics(met_dm)
    );
  end else begin : g_dm_none
    assign met_dm[0] = '0;
    assign rd_dm = '0;
  end

  if (HAS_CORE) begin : g_core
    nucleus #(
      .N_EV(N_EV), .N_EVMON(2), .N_TMON(0), .EV_W(CORE_W), .PROG(1'b0),
      .EV_SEL('{3, 4, 0, 0}), .LATCH_SEL('{2, 2, -1, -1})
    ) u_nuc_core (
      .clk, .rst_n, .ev_inst, .req(req_core), .rdata(rd_core), .metrics(met_core)
    );
  end else begin : g_core_none
    assign met_core[0] = '0;
    assign met_core[1] = '0;
    assign rd_core = '0;
  end

  assign met_all[0] = met_int[0];
  assign met_all[1] = met_dm[0];
  assign met_all[2] = met_core[0];
  assign met_all[3] = met_core[1];

  gmi #(.N_MET(N_MET)) u_gmi (
    .clk, .rst_n, .metrics(met_all),
    .out_valid(gmi_valid), .out_ready(gmi_ready), .out_id(gmi_id),
    .out_metric(gmi_metric), .dirty(gmi_dirty)
  );

  gm #(.N_MET(N_MET)) u_gm (
    .clk, .rst_n,
    .in_valid(gmi_valid), .in_ready(gmi_ready), .in_id(gmi_id), .in_metric(gmi_metric),
    .req(req_gm), .rdata(rd_gm), .viol
  );

  intc #(.N_SRC(N_MET)) u_intc (
    .clk, .rst_n, .src(viol), .req(req_ic), .rdata(rd_ic), .irq, .irq_id
  );

endmodule
