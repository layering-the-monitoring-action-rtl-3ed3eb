// nucleus: data capture and filtering stage placed at one trigger location.
//
// A nucleus holds N_EVMON event monitors and N_TMON time monitors, all fed
// by the same event instances of the adapter. Each monitor turns instances
// into one metric; the nucleus exports them as metrics[0 .. N_EVMON-1]
// (EVMONs) followed by metrics[N_EVMON ..] (TMONs). Which event lines a
// monitor uses is set by the *_SEL lists (one entry per monitor).
//
// Register window (word address, 8 bits, read data combinational):
//   EVMON i, base 4*i:          +0 ctrl  (bit0 enable, bit1 clear: write 1;
//                                         read: bit0 enable, bit31 final)
//                               +1 event select
//                               +2 value[31:0]   +3 value[63:32]
//   TMON j, base 4*(N_EVMON+j): +0 status (bit0 running, bit31 final)
//                               +2 value[31:0]   +3 value[63:32]
// Writes have an effect only when PROG = 1; values can always be read.
// From the paper: a customizable number of nuclei, each aggregating event
// instances through several EVMONs and TMONs. The register window is this
// design's choice.
module nucleus
  import mon_pkg::*;
#(
  parameter int unsigned N_EV      = 5,
  parameter int unsigned N_EVMON   = 1,
  parameter int unsigned N_TMON    = 0,
  parameter int unsigned EV_W      = 32,
  parameter int unsigned TM_W      = 64,
  parameter bit          PROG      = 1'b0,
  parameter sel_list_t   EV_SEL    = '{0, 0, 0, 0},
  parameter sel_list_t   LATCH_SEL = '{-1, -1, -1, -1},
  parameter sel_list_t   START_SEL = '{0, 0, 0, 0},
  parameter sel_list_t   DONE_SEL  = '{1, 1, 1, 1}
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [N_EV-1:0] ev_inst,
  input  reg_req_t        req,
  output logic [31:0]     rdata,
  output metric_t         metrics [N_EVMON+N_TMON]
);

  localparam int unsigned N_EA = (N_EVMON > 0) ? N_EVMON : 1;

  logic       cfg_en  [N_EA];
  logic       cfg_clr [N_EA];
  logic [7:0] cfg_sel [N_EA];
  logic       tm_run  [N_TMON > 0 ? N_TMON : 1];

  logic [5:0] mon_idx;
  logic [1:0] reg_idx;
  assign mon_idx = req.addr[7:2];
  assign reg_idx = req.addr[1:0];

  for (genvar i = 0; i < N_EVMON; i++) begin : g_ev
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cfg_en[i]  <= 1'b1;
        cfg_clr[i] <= 1'b0;
        cfg_sel[i] <= 8'(EV_SEL[i]);
      end else begin
        cfg_clr[i] <= 1'b0;
        if (PROG && req.wr && 32'(mon_idx) == i) begin
          if (reg_idx == 2'd0) begin
            cfg_en[i]  <= req.wdata[0];
            cfg_clr[i] <= req.wdata[1];
          end
          if (reg_idx == 2'd1) cfg_sel[i] <= req.wdata[7:0];
        end
      end
    end

    evmon #(
      .N_EV(N_EV), .W(EV_W), .PROG(PROG), .EV_SEL(EV_SEL[i]), .LATCH_SEL(LATCH_SEL[i])
    ) u_evmon (
      .clk, .rst_n, .ev_inst,
      .cfg_en(cfg_en[i]), .cfg_clr(cfg_clr[i]), .cfg_sel(cfg_sel[i]),
      .metric(metrics[i])
    );
  end

  for (genvar j = 0; j < N_TMON; j++) begin : g_tm
    tmon #(
      .N_EV(N_EV), .W(TM_W), .START_SEL(START_SEL[j]), .DONE_SEL(DONE_SEL[j])
    ) u_tmon (
      .clk, .rst_n, .ev_inst,
      .metric(metrics[N_EVMON+j]), .running(tm_run[j])
    );
  end
  if (N_TMON == 0) begin : g_no_tm
    assign tm_run[0] = 1'b0;
  end
  if (N_EVMON == 0) begin : g_no_ev
    assign cfg_en[0]  = 1'b0;
    assign cfg_clr[0] = 1'b0;
    assign cfg_sel[0] = '0;
  end

  always_comb begin
    rdata = '0;
    for (int m = 0; m < N_EVMON; m++) begin
      if (req.rd && 32'(mon_idx) == m) begin
        unique case (reg_idx)
          2'd0: rdata = {metrics[m].final_v, 30'd0, cfg_en[m]};
          2'd1: rdata = {24'd0, cfg_sel[m]};
          2'd2: rdata = metrics[m].value[31:0];
          2'd3: rdata = metrics[m].value[63:32];
        endcase
      end
    end
    for (int j = 0; j < N_TMON; j++) begin
      if (req.rd && 32'(mon_idx) == N_EVMON + j) begin
        unique case (reg_idx)
          2'd0: rdata = {metrics[N_EVMON+j].final_v, 30'd0, tm_run[j]};
          2'd1: rdata = '0;
          2'd2: rdata = metrics[N_EVMON+j].value[31:0];
          2'd3: rdata = metrics[N_EVMON+j].value[63:32];
        endcase
      end
    end
  end

endmodule
