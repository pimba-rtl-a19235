// hbm_bank_model: behavioural model of one DRAM bank for simulation only.
// A cell array of ROWS rows x 32 columns of 256 bits and a row buffer.
// act copies row act_row into the row buffer; pre writes the row buffer back
// to the open row; column reads come combinationally from the row buffer and
// column writes land in it at the clock edge. It also checks that no column
// access happens without an open row. Analog behaviour and DRAM timing are
// not modelled (timing is enforced by the command scheduler).
module hbm_bank_model #(
  parameter int ROWS = 16
) (
  input  logic         clk,
  input  logic         act,
  input  logic [13:0]  act_row,
  input  logic         pre,
  input  logic         rd,
  input  logic [4:0]   rd_col,
  output logic [255:0] rdata,
  input  logic         we,
  input  logic [4:0]   wr_col,
  input  logic [255:0] wdata
);
  logic [255:0] mem    [ROWS][32];
  logic [255:0] rowbuf [32];
  logic [13:0]  open_row;
  logic         is_open = 1'b0;
  int           n_reads = 0, n_writes = 0, n_errors = 0;

  assign rdata = rowbuf[rd_col];

  always_ff @(posedge clk) begin
    if (act) begin
      for (int c = 0; c < 32; c++) rowbuf[c] <= mem[int'(act_row) % ROWS][c];
      open_row <= act_row;
      is_open  <= 1'b1;
    end
    if (pre && is_open) begin
      for (int c = 0; c < 32; c++) mem[int'(open_row) % ROWS][c] <= rowbuf[c];
      is_open <= 1'b0;
    end
    if (we) begin
      rowbuf[wr_col] <= wdata;
      n_writes <= n_writes + 1;
    end
    if (rd) n_reads <= n_reads + 1;
    if ((rd || we) && !is_open) n_errors <= n_errors + 1;
  end
endmodule
