// Password-management controller: runs one registration or authentication.
//
// An operation is accepted when op_valid and op_ready are both high. The
// cell is addressed by K = id_key XOR pw_key: the upper nibble of K is the
// row, the lower nibble the column. In the accepting cycle puf_start is
// raised, so the PUF sequencer latches the password hash from the same
// request. When the PUF word arrives, a registration appends it to the cell
// as the user's challenge, and an authentication looks it up there as the
// response. The result is reported with res_valid for one cycle:
// REGISTERED or TABLE_FULL for a registration, APPROVED (the response equals
// a stored challenge of the cell) or FAILED for an authentication. res_word
// is the PUF word, res_row and res_col the cell.
//
// Timing: PUF time plus three cycles from acceptance to res_valid; op_ready
// is low meanwhile.
//
// The two modes, the XOR addressing, storing the challenge instead of the
// password and comparing the response with it follow the paper. The paper's
// text forms the address from hash(ID) and hash(password), while its
// screenshots show the hexadecimal codes of the first ID and password
// characters (61 and 31 giving row 6, column 1 counted from one); here the
// two keys are inputs, so either can be supplied. Row and column count from
// zero. The handshake is this design's own.
`timescale 1ns / 1ps
module pwm_controller
  import ro_puf_pkg::*;
#(
  parameter int unsigned KW = KEY_W
) (
  input  logic                clk,
  input  logic                rst_n,
  // request
  input  logic                op_valid,
  output logic                op_ready,
  input  pwm_op_t             op,
  input  logic [KW-1:0]       id_key,
  input  logic [KW-1:0]       pw_key,
  // PUF sequencer
  output logic                puf_start,
  input  logic                puf_done,
  input  puf_word_t           puf_word,
  // password table
  output logic                tbl_req_valid,
  output logic                tbl_req_write,
  output logic [KW/2-1:0]     tbl_row,
  output logic [KW/2-1:0]     tbl_col,
  output puf_word_t           tbl_word,
  input  logic                tbl_rsp_valid,
  input  logic                tbl_rsp_hit,
  // result
  output logic                res_valid,
  output pwm_status_t         res_status,
  output puf_word_t           res_word,
  output logic [KW/2-1:0]     res_row,
  output logic [KW/2-1:0]     res_col
);

  typedef enum logic [1:0] {C_IDLE, C_PUF, C_TABLE} cstate_t;

  cstate_t         state_q;
  pwm_op_t         op_q;
  logic [KW-1:0]   addr_q;
  puf_word_t       word_q;

  assign op_ready  = (state_q == C_IDLE);
  assign puf_start = op_valid && op_ready;
  assign tbl_row   = addr_q[KW-1:KW/2];
  assign tbl_col   = addr_q[KW/2-1:0];
  assign tbl_word  = word_q;
  assign res_row   = addr_q[KW-1:KW/2];
  assign res_col   = addr_q[KW/2-1:0];
  assign res_word  = word_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q       <= C_IDLE;
      op_q          <= OP_REGISTER;
      addr_q        <= '0;
      word_q        <= '0;
      tbl_req_valid <= 1'b0;
      tbl_req_write <= 1'b0;
      res_valid     <= 1'b0;
      res_status    <= ST_REGISTERED;
    end else begin
      tbl_req_valid <= 1'b0;
      res_valid     <= 1'b0;
      unique case (state_q)
        C_IDLE: begin
          if (op_valid) begin
            op_q    <= op;
            addr_q  <= id_key ^ pw_key;
            state_q <= C_PUF;
          end
        end
        C_PUF: begin
          if (puf_done) begin
            word_q        <= puf_word;
            tbl_req_valid <= 1'b1;
            tbl_req_write <= (op_q == OP_REGISTER);
            state_q       <= C_TABLE;
          end
        end
        C_TABLE: begin
          if (tbl_rsp_valid) begin
            res_valid <= 1'b1;
            if (op_q == OP_REGISTER)
              res_status <= tbl_rsp_hit ? ST_REGISTERED : ST_TABLE_FULL;
            else
              res_status <= tbl_rsp_hit ? ST_APPROVED : ST_FAILED;
            state_q <= C_IDLE;
          end
        end
        default: state_q <= C_IDLE;
      endcase
    end
  end

  // The table answers only requests this controller made.
  assert property (@(posedge clk) disable iff (!rst_n)
                   tbl_rsp_valid |-> state_q == C_TABLE);

endmodule
