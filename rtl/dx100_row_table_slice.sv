// dx100_row_table_slice: one slice of the Indirect Access unit's Row Table.
//
// A slice belongs to one DRAM bank (channel, rank, bank group, bank) and holds
// the outstanding rows and columns of that bank: a content-addressed row part
// of ROWS entries {V, S, RO} and, per row, COLS column entries
// {V, S, H, CO, Tail i}. Three operations, all combinational lookups with the
// update at the clock edge:
//  fill     (fill_valid, RO, CO, H, i): find a valid unsent row with RO, then
//           a valid unsent column with CO; return its Tail i as the previous
//           word (fill_prev_v=1) and make i the new tail. Otherwise allocate a
//           column (in the row found, or in a newly allocated row) with tail i
//           and fill_prev_v=0. fill_ok=0 when no row or column is free.
//  request  the slice offers one valid unsent column (rq_valid); it keeps
//           offering columns of the same row until that row has none left,
//           so accesses to one DRAM row leave back to back. rq_grant marks the
//           column sent; a row whose columns are all sent gets S=1.
//  response (rsp_valid, RO, CO): find the valid sent column, return its tail
//           and H bit, and free it; a row with no column left is freed.
// Field set, 64 rows x 8 columns and the fill/request/response roles follow
// the paper. Freeing entries at response and the row-stickiness rule are this
// design's choices.
module dx100_row_table_slice
  import dx100_pkg::*;
#(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  // fill
  input  logic            fill_valid,
  input  logic [RO_W-1:0] fill_ro,
  input  logic [CO_W-1:0] fill_co,
  input  logic            fill_h,
  input  idx_t            fill_i,
  output logic            fill_ok,
  output logic            fill_prev_v,
  output idx_t            fill_prev_i,
  // request
  output logic            rq_valid,
  output logic [RO_W-1:0] rq_ro,
  output logic [CO_W-1:0] rq_co,
  output logic            rq_h,
  input  logic            rq_grant,
  // response
  input  logic            rsp_valid,
  input  logic [RO_W-1:0] rsp_ro,
  input  logic [CO_W-1:0] rsp_co,
  output logic            rsp_hit,
  output idx_t            rsp_tail,
  output logic            rsp_h,
  output logic            empty
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned CW = $clog2(COLS);

  // BCAM cell
  logic [ROWS-1:0]  r_v, r_s;
  logic [RO_W-1:0]  r_ro [ROWS];
  // SRAM cell
  logic [COLS-1:0]  c_v [ROWS];
  logic [COLS-1:0]  c_s [ROWS];
  logic [COLS-1:0]  c_h [ROWS];
  logic [CO_W-1:0]  c_co   [ROWS][COLS];
  idx_t             c_tail [ROWS][COLS];

  // ---------------- fill lookup ----------------
  logic          f_rhit, f_rfree, f_chit, f_cfree;
  logic [RW-1:0] f_row, f_frow;
  logic [CW-1:0] f_col, f_fcol;
  always_comb begin
    f_rhit = 1'b0; f_row = '0; f_rfree = 1'b0; f_frow = '0;
    for (int r = ROWS-1; r >= 0; r--) begin
      if (r_v[r] && !r_s[r] && r_ro[r] == fill_ro) begin f_rhit = 1'b1; f_row = RW'(r); end
      if (!r_v[r]) begin f_rfree = 1'b1; f_frow = RW'(r); end
    end
    f_chit = 1'b0; f_col = '0; f_cfree = 1'b0; f_fcol = '0;
    for (int c = COLS-1; c >= 0; c--) begin
      if (c_v[f_row][c] && !c_s[f_row][c] && c_co[f_row][c] == fill_co) begin
        f_chit = f_rhit; f_col = CW'(c);
      end
      if (!c_v[f_row][c]) begin f_cfree = f_rhit; f_fcol = CW'(c); end
    end
    fill_ok     = f_chit || f_cfree || (!f_rhit && f_rfree);
    fill_prev_v = f_chit;
    fill_prev_i = c_tail[f_row][f_col];
  end

  // ---------------- request scan ----------------
  logic          cur_v;
  logic [RW-1:0] cur_row;
  logic [ROWS-1:0] r_pend;
  logic [RW-1:0] q_row;
  logic [CW-1:0] q_col;
  logic          q_ok;
  always_comb begin
    for (int r = 0; r < ROWS; r++) r_pend[r] = r_v[r] && ((c_v[r] & ~c_s[r]) != '0);
    q_ok  = 1'b0;
    q_row = '0;
    if (cur_v && r_pend[cur_row]) begin
      q_ok = 1'b1; q_row = cur_row;
    end else begin
      for (int r = ROWS-1; r >= 0; r--)
        if (r_pend[r]) begin q_ok = 1'b1; q_row = RW'(r); end
    end
    q_col = '0;
    for (int c = COLS-1; c >= 0; c--)
      if (c_v[q_row][c] && !c_s[q_row][c]) q_col = CW'(c);
    rq_valid = q_ok;
    rq_ro    = r_ro[q_row];
    rq_co    = c_co[q_row][q_col];
    rq_h     = c_h[q_row][q_col];
  end

  // ---------------- response lookup ----------------
  logic          p_hit;
  logic [RW-1:0] p_row;
  logic [CW-1:0] p_col;
  always_comb begin
    p_hit = 1'b0; p_row = '0; p_col = '0;
    for (int r = ROWS-1; r >= 0; r--)
      for (int c = COLS-1; c >= 0; c--)
        if (r_v[r] && r_ro[r] == rsp_ro && c_v[r][c] && c_s[r][c] && c_co[r][c] == rsp_co) begin
          p_hit = 1'b1; p_row = RW'(r); p_col = CW'(c);
        end
    rsp_hit  = p_hit;
    rsp_tail = c_tail[p_row][p_col];
    rsp_h    = c_h[p_row][p_col];
    empty    = (r_v == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_v <= '0; r_s <= '0; cur_v <= 1'b0; cur_row <= '0;
      for (int r = 0; r < ROWS; r++) begin
        r_ro[r] <= '0; c_v[r] <= '0; c_s[r] <= '0; c_h[r] <= '0;
        for (int c = 0; c < COLS; c++) begin c_co[r][c] <= '0; c_tail[r][c] <= '0; end
      end
    end else begin
      // fill
      if (fill_valid && fill_ok) begin
        if (f_chit) begin
          c_tail[f_row][f_col] <= fill_i;
        end else if (f_cfree) begin
          c_v[f_row][f_fcol] <= 1'b1; c_s[f_row][f_fcol] <= 1'b0; c_h[f_row][f_fcol] <= fill_h;
          c_co[f_row][f_fcol] <= fill_co; c_tail[f_row][f_fcol] <= fill_i;
        end else begin
          r_v[f_frow] <= 1'b1; r_s[f_frow] <= 1'b0; r_ro[f_frow] <= fill_ro;
          c_v[f_frow] <= COLS'(1); c_s[f_frow] <= '0; c_h[f_frow] <= COLS'(fill_h);
          c_co[f_frow][0] <= fill_co; c_tail[f_frow][0] <= fill_i;
        end
      end
      // request
      if (rq_grant && q_ok) begin
        logic [COLS-1:0] left;
        c_s[q_row][q_col] <= 1'b1;
        left = c_v[q_row] & ~c_s[q_row];
        left[q_col] = 1'b0;
        if (left == '0) r_s[q_row] <= 1'b1;
        cur_v   <= left != '0;
        cur_row <= q_row;
      end
      // response
      if (rsp_valid && p_hit) begin
        logic [COLS-1:0] rest;
        c_v[p_row][p_col] <= 1'b0;
        rest = c_v[p_row];
        rest[p_col] = 1'b0;
        if (rest == '0) begin r_v[p_row] <= 1'b0; r_s[p_row] <= 1'b0; end
      end
    end
  end

  // a slice never grants a request it did not offer
  a_grant: assert property (@(posedge clk) disable iff (!rst_n) rq_grant |-> rq_valid);
endmodule
