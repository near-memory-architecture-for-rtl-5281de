// stcf: spatio-temporal correlation filter (background-activity denoiser).
//
// Keeps the last timestamp of every pixel. For each incoming event it looks
// at the 8 pixels around it (3 x 3 without the centre) and counts those that
// fired within the time window tw, i.e. t_event - t_neighbour <= tw
// (modulo 2^TS_W). With at least SUPPORT such neighbours the event is passed
// on as signal, otherwise it is dropped as noise. The event's own timestamp
// is stored in either case.
// Implementation: a single-port timestamp memory (valid bit + timestamp per
// pixel) read one neighbour per cycle. An event takes 1 cycle to enter,
// 8 to scan, 1 to store, so the filter takes a new event every 10 cycles
// unless the output is stalled. After reset every pixel is marked empty, one
// per cycle (SENSOR_W * SENSOR_H cycles), before in_ready rises.
// Interface: valid/ready streams in and out (out holds until taken); dropped
// is a one-cycle pulse per noise event.
// The filtering rule and SUPPORT = 2 follow the paper; the 3 x 3
// neighbourhood, polarity-blind matching, the memory organisation and the
// run-time window input are this design's choices.
module stcf
  import tos_pkg::*;
#(
  parameter int unsigned SENSOR_W = 240,
  parameter int unsigned SENSOR_H = 180,
  parameter int unsigned SUPPORT  = 2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  ts_t    tw,          // TW_STCF in timestamp units
  input  logic   in_valid,
  output logic   in_ready,
  input  event_t in_ev,
  output logic   out_valid,
  input  logic   out_ready,
  output event_t out_ev,
  output logic   dropped
);

  localparam int unsigned NPIX = SENSOR_W * SENSOR_H;
  localparam int unsigned AW   = $clog2(NPIX);

  typedef struct packed {
    logic valid;
    ts_t  t;
  } entry_t;

  entry_t mem [NPIX];

  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_SCAN, S_STORE} state_t;
  state_t        state;
  logic [AW-1:0] clr_addr;
  event_t        ev;
  logic [2:0]    k;          // neighbour index 0..7
  logic [3:0]    support;

  // neighbour k -> (dx, dy), skipping the centre
  int dx, dy, nx, ny;
  logic          n_in;
  logic [AW-1:0] n_addr, own_addr;
  entry_t        n_ent;
  logic          n_hit;
  always_comb begin
    int j;
    j  = (int'(k) < 4) ? int'(k) : int'(k) + 1;   // 0..8 without 4
    dx = (j % 3) - 1;
    dy = (j / 3) - 1;
    nx = int'(ev.x) + dx;
    ny = int'(ev.y) + dy;
    n_in     = (nx >= 0) && (nx < int'(SENSOR_W)) && (ny >= 0) && (ny < int'(SENSOR_H));
    n_addr   = n_in ? AW'(ny * int'(SENSOR_W) + nx) : '0;
    own_addr = AW'(int'(ev.y) * int'(SENSOR_W) + int'(ev.x));
    n_ent    = mem[n_addr];
    n_hit    = n_in && n_ent.valid && ((ev.t - n_ent.t) <= tw);
  end

  assign in_ready = (state == S_IDLE) && !out_valid;

  always_ff @(posedge clk) begin
    if (state == S_CLEAR)      mem[clr_addr] <= '0;
    else if (state == S_STORE) mem[own_addr] <= '{valid: 1'b1, t: ev.t};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_CLEAR;
      clr_addr  <= '0;
      ev        <= '0;
      k         <= '0;
      support   <= '0;
      out_valid <= 1'b0;
      out_ev    <= '0;
      dropped   <= 1'b0;
    end else begin
      dropped <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      case (state)
        S_CLEAR: begin
          clr_addr <= clr_addr + 1'b1;
          if (clr_addr == AW'(NPIX - 1)) state <= S_IDLE;
        end
        S_IDLE: begin
          if (in_valid && in_ready) begin
            ev      <= in_ev;
            k       <= '0;
            support <= '0;
            state   <= S_SCAN;
          end
        end
        S_SCAN: begin
          if (n_hit) support <= support + 1'b1;
          k <= k + 1'b1;
          if (k == 3'd7) state <= S_STORE;
        end
        default: begin  // S_STORE
          if (support >= 4'(SUPPORT)) begin
            out_valid <= 1'b1;
            out_ev    <= ev;
          end else begin
            dropped <= 1'b1;
          end
          state <= S_IDLE;
        end
      endcase
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (out_valid && !out_ready) |=> (out_valid && $stable(out_ev)));

endmodule
