// Password table: ROWS x COLS cells, each holding up to SLOTS PUF words.
//
// A cell is addressed by a row and a column. A write request appends its
// word to the cell behind the entries already there, so two users whose keys
// map to the same cell (a collision) both keep their challenge; it fails,
// leaving the cell unchanged, when the cell is full. A lookup request
// compares its word with every filled entry of the cell and hits when one of
// them is equal. A combinational read port returns any entry for display.
//
// Timing: a request is accepted in any cycle (req_valid); its result
// (rsp_hit, rsp_slot, rsp_fill) appears with rsp_valid one cycle later.
// rsp_slot is the slot written or the lowest matching slot; rsp_fill is the
// number of entries in the cell after the request. Reset empties every cell;
// the stored words themselves are not cleared.
//
// The 16 x 16 size, addressing by row and column and appending on a
// collision follow the paper, whose table is a software structure that can
// grow without limit. A hardware table needs a bound: SLOTS entries per cell
// is this design's choice, as are the lookup rule (any entry of the cell) and
// the response format.
`timescale 1ns / 1ps
module password_table
  import ro_puf_pkg::*;
#(
  parameter int unsigned ROWS  = TABLE_ROWS,
  parameter int unsigned COLS  = TABLE_COLS,
  parameter int unsigned SLOTS = 4,
  parameter int unsigned W     = WORD_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // write (append) or lookup
  input  logic                      req_valid,
  input  logic                      req_write,
  input  logic [$clog2(ROWS)-1:0]   req_row,
  input  logic [$clog2(COLS)-1:0]   req_col,
  input  logic [W-1:0]              req_word,
  output logic                      rsp_valid,
  output logic                      rsp_hit,
  output logic [$clog2(SLOTS)-1:0]  rsp_slot,
  output logic [$clog2(SLOTS+1)-1:0] rsp_fill,
  // display read port
  input  logic [$clog2(ROWS)-1:0]   rd_row,
  input  logic [$clog2(COLS)-1:0]   rd_col,
  input  logic [$clog2(SLOTS)-1:0]  rd_slot,
  output logic                      rd_valid,
  output logic [W-1:0]              rd_word
);

  localparam int unsigned CELLS  = ROWS * COLS;
  localparam int unsigned CELL_W = $clog2(CELLS);
  localparam int unsigned SLOT_W = $clog2(SLOTS);
  localparam int unsigned FILL_W = $clog2(SLOTS + 1);

  logic [W-1:0]      mem  [CELLS * SLOTS];
  logic [FILL_W-1:0] fill [CELLS];

  logic [CELL_W-1:0] cell_idx;
  logic [CELL_W-1:0] rd_cell;
  logic [FILL_W-1:0] cell_fill;
  logic              match;
  logic [SLOT_W-1:0] match_slot;

  assign cell_idx      = CELL_W'(req_row) * CELL_W'(COLS) + CELL_W'(req_col);
  assign rd_cell   = CELL_W'(rd_row) * CELL_W'(COLS) + CELL_W'(rd_col);
  assign cell_fill = fill[cell_idx];

  // Lowest filled slot of the addressed cell_idx that holds req_word.
  always_comb begin
    match      = 1'b0;
    match_slot = '0;
    for (int s = SLOTS - 1; s >= 0; s--) begin
      if (FILL_W'(s) < cell_fill && mem[int'(cell_idx) * SLOTS + s] == req_word) begin
        match      = 1'b1;
        match_slot = SLOT_W'(s);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (req_valid && req_write && cell_fill < FILL_W'(SLOTS))
      mem[int'(cell_idx) * SLOTS + int'(cell_fill)] <= req_word;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < CELLS; c++) fill[c] <= '0;
      rsp_valid <= 1'b0;
      rsp_hit   <= 1'b0;
      rsp_slot  <= '0;
      rsp_fill  <= '0;
    end else begin
      rsp_valid <= req_valid;
      if (req_valid) begin
        if (req_write) begin
          rsp_hit  <= (cell_fill < FILL_W'(SLOTS));
          rsp_slot <= SLOT_W'(cell_fill);
          if (cell_fill < FILL_W'(SLOTS)) begin
            fill[cell_idx] <= cell_fill + 1'b1;
            rsp_fill   <= cell_fill + 1'b1;
          end else begin
            rsp_fill   <= cell_fill;
          end
        end else begin
          rsp_hit  <= match;
          rsp_slot <= match_slot;
          rsp_fill <= cell_fill;
        end
      end
    end
  end

  assign rd_valid = FILL_W'(rd_slot) < fill[rd_cell];
  assign rd_word  = mem[int'(rd_cell) * SLOTS + int'(rd_slot)];

endmodule
