// hbm_bank_model: behavioural model of one HBM DRAM bank with an open row.
//
// Behavioural model, not synthesizable design: the DRAM array, sense amplifiers
// and row buffer of a bank are outside the PIM logic. The model holds the
// N_COL 256-bit columns of one open row. A testbench fills it through the load
// port; a column read returns the addressed column in the same cycle, which is
// how the PCU datapath expects bank data (row activation and CAS latency are not
// modelled).
module hbm_bank_model #(
  parameter int unsigned N_COL = 32
) (
  input  logic                      clk,
  input  logic                      load_i,
  input  logic [$clog2(N_COL)-1:0]  load_col_i,
  input  logic [255:0]              load_data_i,
  input  logic [$clog2(N_COL)-1:0]  rd_col_i,
  output logic [255:0]              rd_data_o
);
  logic [255:0] row [N_COL];

  initial for (int i = 0; i < N_COL; i++) row[i] = '0;

  always @(posedge clk) if (load_i) row[load_col_i] <= load_data_i;

  assign rd_data_o = row[rd_col_i];
endmodule
