// subarray: one NAND-SPIN processing subarray.  It holds the convolution
// memory (256x128 MTJs), one SPCSA sense amplifier and one bit-counter
// unit per column, the weight buffer, the output multiplexer and the
// decoder/row driver/column driver that turn a micro-operation into the
// WE, ER, R_y, C_x, FU and REF levels of the paper's circuit table:
//
//   op        WE ER  C    R_y  FU    REF
//   ERASE      1  1  0    0    0     0     (device row: 8 rows -> 0)
//   PROGRAM    1  0  D    1    0     0     (row: bits with D=1 -> 1)
//   SENSE/read 0  1  0    1    1     1     (SA out = stored bit)
//   SENSE/AND  0  1  0    1    W     1     (SA out = W AND stored bit)
//
// A command is taken when cmd_valid and cmd_ready are both high
// (cmd_ready = idle).  The subarray then holds the levels for the op's
// latency: T_ERASE, T_PROGRAM, T_SENSE cycles, one more for a SENSE that
// also counts (the SA latches in the first cycle and the bit-counter adds
// the latched result in the second), one cycle for buffer and bit-counter
// ops.  `done` pulses in the cycle after the op has taken effect, which is
// also the first cycle cmd_ready is high again.
//
// A PROGRAM takes its column vector from the command (data bus / in-mat
// movement) or from the bit-counter LSBs (write-back of a sum or product
// bit, the paper's WWL).  A BUF_WRITE takes the command data, the SA
// outputs, their inverse or the bit-counter LSBs.  The MUX sends the SA
// outputs (normal read) or the bit-counter LSBs (bit-by-bit readout) to
// mux_out, chosen by out_sel; the paper gives the MUX, the select input is
// this design's.  The latencies assume a 1 GHz clock.
module subarray
  import pim_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  sub_cmd_t          cmd,
  output logic              done,
  input  logic              out_sel,   // 0: SA outputs, 1: bit-counter LSBs
  output logic [N_COLS-1:0] mux_out,
  output logic [N_COLS-1:0] sa_out,
  output logic [N_COLS-1:0] bc_lsb
);

  localparam int unsigned RW = $clog2(N_ROWS);
  localparam int unsigned DW = $clog2(N_ROWS / MTJ_PER_DEV);

  sub_cmd_t   cur;
  logic       busy;
  logic [2:0] cnt;
  logic       apply;

  function automatic logic [2:0] latency(input sub_cmd_t c);
    case (c.op)
      SOP_ERASE:   return 3'(T_ERASE - 1);
      SOP_PROGRAM: return 3'(T_PROGRAM - 1);
      SOP_SENSE:   return c.count ? 3'(T_SENSE) : 3'(T_SENSE - 1);
      default:     return 3'd0;
    endcase
  endfunction

  assign cmd_ready = !busy;
  assign apply     = busy && (cnt == 3'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
      cur  <= '{op: SOP_NOP, psrc: PSRC_DATA, bsrc: BSRC_DATA, default: '0};
    end else begin
      done <= apply;
      if (cmd_valid && cmd_ready) begin
        cur  <= cmd;
        busy <= 1'b1;
        cnt  <= latency(cmd);
      end else if (busy) begin
        if (cnt == 3'd0) busy <= 1'b0;
        else             cnt  <= cnt - 3'd1;
      end
    end
  end

  // ---------------------------------------------------- decoder and drivers
  logic              we, er, r_en, ref_on, re;
  logic [N_COLS-1:0] c_vec, fu_vec, p_state, buf_rd;
  logic              bc_clr, bc_count, bc_shift, buf_we, buf_slide;
  logic [N_COLS-1:0] buf_wd;

  always_comb begin
    we = 1'b0; er = 1'b0; r_en = 1'b0; ref_on = 1'b0; re = 1'b0;
    c_vec = '0; fu_vec = '0;
    bc_clr = 1'b0; bc_count = 1'b0; bc_shift = 1'b0;
    buf_we = 1'b0; buf_slide = 1'b0; buf_wd = cur.data[N_COLS-1:0];
    if (busy) begin
      unique case (cur.op)
        SOP_ERASE: begin we = 1'b1; er = 1'b1; end
        SOP_PROGRAM: begin
          we = 1'b1; r_en = 1'b1;
          c_vec = (cur.psrc == PSRC_BC) ? bc_lsb : cur.data[N_COLS-1:0];
        end
        SOP_SENSE: begin
          er = 1'b1; r_en = 1'b1; ref_on = 1'b1;
          fu_vec = cur.fu_buf ? buf_rd : '1;
          re = (cnt == (cur.count ? 3'(T_SENSE) : 3'(T_SENSE - 1)));
          bc_count = cur.count && (cnt == 3'd0);
        end
        SOP_BC_RESET:  bc_clr   = apply;
        SOP_BC_SHIFT:  bc_shift = apply;
        SOP_BUF_WRITE: begin
          buf_we = apply;
          unique case (cur.bsrc)
            BSRC_DATA: buf_wd = cur.data[N_COLS-1:0];
            BSRC_SA:   buf_wd = sa_out;
            BSRC_SA_N: buf_wd = ~sa_out;
            BSRC_BC:   buf_wd = bc_lsb;
          endcase
        end
        SOP_BUF_SLIDE: buf_slide = apply;
        SOP_NOP: ;
      endcase
    end
  end

  // ------------------------------------------------------------- datapath
  nand_spin_array #(.N_ROWS(N_ROWS), .N_COLS(N_COLS)) u_cm (
    .clk, .apply, .we, .er,
    .dev   (cur.row[RW-1 -: DW]),
    .r_en, .row (cur.row[RW-1:0]), .c (c_vec), .p_state
  );

  spcsa_array #(.N_COLS(N_COLS)) u_sa (
    .clk, .rst_n, .re, .ref_on, .fu (fu_vec), .p_state, .out (sa_out)
  );

  logic [CNT_W-1:0] bc_value [N_COLS];
  bit_counter #(.N_COLS(N_COLS), .W(CNT_W)) u_bc (
    .clk, .rst_n, .clr (bc_clr), .count (bc_count), .sa (sa_out),
    .shift (bc_shift), .lsb (bc_lsb), .value (bc_value)
  );

  weight_buffer #(.N_COLS(N_COLS), .N_ROWS(BUF_ROWS)) u_buf (
    .clk, .rst_n, .we (buf_we), .wrow (cur.buf_row), .wdata (buf_wd),
    .slide (buf_slide), .rrow (cur.buf_row), .rdata (buf_rd)
  );

  assign mux_out = out_sel ? bc_lsb : sa_out;

  // A command must stay stable until it is accepted.
  a_cmd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && !cmd_ready) |=> (cmd_valid && $stable(cmd)));

endmodule
