// dram_model: behavioural model of the DRAM arrays behind GradPIM devices.
//
// Not synthesizable logic: it stands in for the cell arrays, sense
// amplifiers and bank group I/O gating of RANKS x CHIPS devices with BGS
// bank groups of four banks. Storage is sparse (an associative array keyed
// by rank, chip, bank group, bank, row and burst index; unwritten columns
// read as zero). ACT opens a row, PRE closes one bank or all banks. A column
// read returns its data on bg_rdata L cycles after the request; a column
// write stores at the clock edge. Column access to a bank without an open
// row, or ACT to an open bank, counts in errors. poke/peek give testbenches
// direct access to the storage.
module dram_model
  import gradpim_pkg::*;
#(
  parameter int RANKS = 1,
  parameter int CHIPS = 1,
  parameter int BGS   = 4,
  parameter int L     = 4
) (
  input  logic             clk,
  input  row_cmd_t         row_cmd  [RANKS][CHIPS],
  input  bg_req_t          bg_req   [RANKS][CHIPS][BGS],
  output logic [COL_W-1:0] bg_rdata [RANKS][CHIPS][BGS],
  output int               errors
);

  logic [COL_W-1:0] mem [longint];
  logic [ROW_W-1:0] open_row [RANKS][CHIPS][BGS][4];
  logic             is_open  [RANKS][CHIPS][BGS][4];
  logic [COL_W-1:0] pipe     [RANKS][CHIPS][BGS][L];

  function automatic longint key(int r, int c, int g, int b, int row, int col7);
    return (longint'(r) << 40) | (longint'(c) << 35) | (longint'(g) << 30) |
           (longint'(b) << 27) | (longint'(row) << 8) | longint'(col7);
  endfunction

  function automatic void poke(int r, int c, int g, int b, int row, int col7, logic [COL_W-1:0] d);
    mem[key(r, c, g, b, row, col7)] = d;
  endfunction

  function automatic logic [COL_W-1:0] peek(int r, int c, int g, int b, int row, int col7);
    longint k;
    k = key(r, c, g, b, row, col7);
    return mem.exists(k) ? mem[k] : '0;
  endfunction

  initial begin
    errors = 0;
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++) begin
          for (int b = 0; b < 4; b++) begin
            is_open[r][c][g][b]  = 1'b0;
            open_row[r][c][g][b] = '0;
          end
          for (int i = 0; i < L; i++) pipe[r][c][g][i] = '0;
        end
  end

  always @(posedge clk) begin
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++) begin
        row_cmd_t rc;
        rc = row_cmd[r][c];
        if (rc.act) begin
          if (is_open[r][c][rc.bg][rc.ba]) errors++;
          is_open[r][c][rc.bg][rc.ba]  = 1'b1;
          open_row[r][c][rc.bg][rc.ba] = rc.row;
        end
        if (rc.pre) begin
          for (int g = 0; g < BGS; g++)
            for (int b = 0; b < 4; b++)
              if (rc.pre_all || (g == int'(rc.bg) && b == int'(rc.ba))) is_open[r][c][g][b] = 1'b0;
        end
        for (int g = 0; g < BGS; g++) begin
          bg_req_t q;
          q = bg_req[r][c][g];
          for (int i = L - 1; i > 0; i--) pipe[r][c][g][i] <= pipe[r][c][g][i-1];
          pipe[r][c][g][0] <= '0;
          if (q.rd || q.wr) begin
            if (!is_open[r][c][g][q.bank]) errors++;
          end
          if (q.rd)
            pipe[r][c][g][0] <= peek(r, c, g, int'(q.bank), int'(open_row[r][c][g][q.bank]), int'(q.col[9:3]));
          if (q.wr)
            poke(r, c, g, int'(q.bank), int'(open_row[r][c][g][q.bank]), int'(q.col[9:3]), q.wdata);
        end
      end
  end

  always_comb
    for (int r = 0; r < RANKS; r++)
      for (int c = 0; c < CHIPS; c++)
        for (int g = 0; g < BGS; g++)
          bg_rdata[r][c][g] = pipe[r][c][g][L-1];

endmodule
