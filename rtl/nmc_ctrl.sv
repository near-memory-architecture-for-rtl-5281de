// nmc_ctrl: controller of one NMC-TOS block ("controls for CMP" and the
// row sequencing).
//
// A patch update runs every patch row through four one-cycle phases:
//   PCH  precharge the read bitlines (row address is set up)
//   MO   read the row (RWL), decrement it (MOL), write TOS-1 into the CMP
//        module (WWL_CMP)
//   CMP  compare TOS-1 with TH; at the end WR_CK latches the write-back word
//   WR   write the word back through the array's write port (WWL)
// Because the array reads and writes through separate ports, row k+1 starts
// its PCH while row k is in CMP, so row k's WR overlaps row k+1's MO.
// A P-row patch therefore takes P*(t1+t2)+t3+t4 = 2P+2 cycles (16 for P=7).
// The next event is accepted in the last cycle, so back-to-back events
// complete every 2P+2 cycles and never read a row that is still being
// written. Patch rows outside the array keep their slot but do nothing.
//
// Interface: ev_valid/ev_ready handshake with the event row ev_y; cur_y is
// the latched row. Stage outputs: mo_valid/mo_row (read row, WWL_CMP),
// cmp_valid/cmp_center (WR_CK and "this is the event's row"), wr_valid/
// wr_row (WWL). After reset the controller first writes 0 to every row, one
// per cycle (clr_en/clr_row), then raises ev_ready. Frame reads (fr_req) are
// granted only when no event is in flight or waiting.
// Phases, their order and the pipelined schedule follow the paper; one cycle
// per phase, the handshake, the clear sweep and the frame-read port are this
// design's choices.
module nmc_ctrl
  import tos_pkg::*;
#(
  parameter int unsigned ROWS = 180,
  parameter int unsigned P    = 7,
  localparam int unsigned RW  = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // event in
  input  logic          ev_valid,
  output logic          ev_ready,
  input  y_t            ev_y,
  output logic          busy,
  // stage controls
  output logic          mo_valid,
  output logic [RW-1:0] mo_row,
  output logic          cmp_valid,
  output logic          cmp_center,
  output logic          wr_valid,
  output logic [RW-1:0] wr_row,
  // array clear after reset
  output logic          clr_en,
  output logic [RW-1:0] clr_row,
  // frame read arbitration
  input  logic          fr_req,
  output logic          fr_gnt
);

  localparam int unsigned HALF   = (P - 1) / 2;
  localparam int unsigned NCYC   = 2 * P + 2;
  localparam int unsigned CW     = $clog2(NCYC + 1);

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_BUSY} state_t;
  state_t state;

  logic [CW-1:0] cyc;        // cycle within the current patch, 0 .. NCYC-1
  y_t            cur_y;
  logic [RW-1:0] cmp_row;
  logic          mo_center;

  logic          last_cyc;
  assign last_cyc = (state == S_BUSY) && (cyc == CW'(NCYC - 1));
  assign ev_ready = (state == S_IDLE) || last_cyc;
  assign busy     = (state == S_BUSY);
  assign clr_en   = (state == S_CLEAR);
  assign fr_gnt   = fr_req && (state == S_IDLE) && !ev_valid;

  // PCH phase: slot k = cyc/2 on even cycles while k < P.
  logic          pch_fire;
  logic [CW-1:0] pch_slot;
  int            pch_row;
  always_comb begin
    pch_slot = cyc >> 1;
    pch_fire = (state == S_BUSY) && !cyc[0] && (pch_slot < CW'(P));
    pch_row  = int'(cur_y) - int'(HALF) + int'(pch_slot);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_CLEAR;
      clr_row    <= '0;
      cyc        <= '0;
      cur_y      <= '0;
      mo_valid   <= 1'b0;
      mo_row     <= '0;
      mo_center  <= 1'b0;
      cmp_valid  <= 1'b0;
      cmp_row    <= '0;
      cmp_center <= 1'b0;
      wr_valid   <= 1'b0;
      wr_row     <= '0;
    end else begin
      // sequencing
      case (state)
        S_CLEAR: begin
          clr_row <= clr_row + 1'b1;
          if (clr_row == RW'(ROWS - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (ev_valid) begin
            state <= S_BUSY;
            cyc   <= '0;
            cur_y <= ev_y;
          end
        end
        default: begin
          if (last_cyc) begin
            cyc <= '0;
            if (ev_valid) cur_y <= ev_y;
            else          state <= S_IDLE;
          end else begin
            cyc <= cyc + 1'b1;
          end
        end
      endcase

      // PCH -> MO
      mo_valid  <= pch_fire && (pch_row >= 0) && (pch_row < int'(ROWS));
      mo_row    <= RW'(pch_row);
      mo_center <= (pch_slot == CW'(HALF));
      // MO -> CMP
      cmp_valid  <= mo_valid;
      cmp_row    <= mo_row;
      cmp_center <= mo_center;
      // CMP -> WR
      wr_valid <= cmp_valid;
      wr_row   <= cmp_row;
    end
  end

  // The write-back of one row never hits the row being read.
  a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
    (mo_valid && wr_valid) |-> (mo_row != wr_row));
  // An event is only taken when the array is ready.
  a_no_accept_in_clear: assert property (@(posedge clk) disable iff (!rst_n)
    clr_en |-> !ev_ready);

endmodule
