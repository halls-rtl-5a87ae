// retention_cluster: one HALLS retention-time cluster, eight STT-RAM banks
// built with the same retention time and therefore the same write latency.
//
// The set address decoder sends one operation (index, tag, data) to the
// cluster together with an 8-bit bank select, the decoded BankID of the
// paper's architecture figure; several banks of a cluster can be selected at
// once when more than one way of a set lives in the cluster. Each bank
// answers with its own done/response (bank hit and hit data), and raises its
// own expiry request. The cluster's retention_tick clocks the lifetime
// counters of all its banks. W_LAT and TICK_PERIOD are the cluster's write
// latency (Table 2) and counter period (retention time / 16).
module retention_cluster
  import halls_pkg::*;
#(
  parameter int unsigned W_LAT       = 3,
  parameter int unsigned TICK_PERIOD = 12500,
  parameter int unsigned ROWS        = BANK_ROWS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [BANKS_PER_CL-1:0]     pwr_en,
  input  logic [BANKS_PER_CL-1:0]     sel,
  input  bank_op_t                    op,
  output logic [BANKS_PER_CL-1:0]     ready,
  output logic [BANKS_PER_CL-1:0]     done,
  output bank_rsp_t [BANKS_PER_CL-1:0] rsp,
  output logic [BANKS_PER_CL-1:0]     exp_req,
  output logic [BANKS_PER_CL-1:0][ROW_W-1:0] exp_row,
  input  logic [BANKS_PER_CL-1:0]     exp_ack,
  output logic [BANKS_PER_CL-1:0]     exp_clean
);
  logic tick;

  retention_tick #(.PERIOD(TICK_PERIOD)) u_tick (.clk, .rst_n, .tick);

  for (genvar b = 0; b < BANKS_PER_CL; b++) begin : g_bank
    stt_bank #(.W_LAT(W_LAT), .ROWS(ROWS)) u_bank (
      .clk, .rst_n,
      .pwr_en (pwr_en[b]),
      .tick,
      .sel    (sel[b]),
      .op,
      .ready  (ready[b]),
      .done   (done[b]),
      .rsp    (rsp[b]),
      .exp_req(exp_req[b]),
      .exp_row(exp_row[b]),
      .exp_ack(exp_ack[b]),
      .exp_clean(exp_clean[b])
    );
  end
endmodule
