// tpu: Track Processing Unit, a CU x CV block of retina cells with its own
// cluster finder.
//
// Accumulation. Four input lines bring the hits of one event. A hit at the
// head of a line is taken at once and registered; in the next cycle every
// engine adds its weights. An end-of-event word waits at the head of its line
// until all four lines show one; the four are then consumed together (their
// event ids must agree, else sync_err pulses). One cycle later, when the last
// hits have been added, all accumulators are copied into a shadow bank and
// cleared, so the next event accumulates while this one is read out. If the
// readout of the previous event is still running, the end-of-event words wait
// and stall pulses every such cycle.
//
// Readout. The shadow bank is scanned one cell per cycle, cell c = row*CU +
// col (row along v, column along u). A cell is a local maximum when its level
// is at least the threshold thr, is above every neighbour with a lower index
// and not below any neighbour with a higher index (so ties give one maximum).
// Only the 3x3 neighbourhood inside this TPU is used; cells outside count as
// empty. For each maximum the centroid of the 3x3 neighbourhood is formed,
// S = sum(a), Su = sum(a*du), Sv = sum(a*dv), and the offsets Su/S and Sv/S
// are computed to FRAC fractional bits by a restoring divider (FRAC cycles).
// The track word carries the global TPU number and
//   u = (U0 + col + 1) * 2^FRAC + Su*2^FRAC/S   (truncated toward zero),
// v alike with V0 and row; the +1 keeps u and v positive. After the last cell
// an end-of-event word with the event id closes the event.
//
// Tuning registers (cfg kind CFG_TPU_REG, unit = TPU_ID): addr 0 search
// distance, 1 sigma shift of the weight, 2 threshold.
// Cell engines, local maxima and centroid follow the paper; TPU size, the
// shadow bank, the tie rule, the border rule, the threshold and the output
// format are this design's choices.
module tpu
  import retina_pkg::*;
#(
  parameter int unsigned TPU_ID   = 0,
  parameter int unsigned BOARD_ID = 0,
  parameter int unsigned CU       = 4,
  parameter int unsigned CV       = 4,
  parameter int unsigned U0       = 0,
  parameter int unsigned V0       = 0,
  parameter int unsigned FRAC     = 7,
  parameter int unsigned N_LINES  = 4,
  parameter int unsigned W_W      = 8,
  parameter int unsigned ACC_W    = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg,
  input  logic [N_LINES-1:0] in_valid,
  output logic [N_LINES-1:0] in_ready,
  input  word_t              in_data [N_LINES],
  output logic               out_valid,
  input  logic               out_ready,
  output word_t              out_data,
  output logic               stall,
  output logic               sync_err
);
  localparam int unsigned NC   = CU * CV;
  localparam int unsigned CIW  = (NC > 1) ? $clog2(NC) : 1;
  localparam int unsigned SW   = ACC_W + 4;        // sums of 9 levels
  localparam logic [5:0]  GTPU = 6'(BOARD_ID * N_TPU + TPU_ID);

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_DIV, S_EMIT, S_EOE} state_e;

  // tuning registers
  logic [COORD_W-1:0] sd;
  logic [3:0]         sig_sh;
  logic [ACC_W-1:0]   thr;

  // input side
  logic [N_LINES-1:0] take, eoe_head;
  logic               all_eoe, snap, snap_q;
  logic [N_LINES-1:0] hv_q;
  hit_t               hit_q [N_LINES];
  logic [DATA_W-1:0]  ev_q, ev_id;
  logic               ids_differ;

  // cells
  logic [ACC_W-1:0] acc    [NC];
  logic [ACC_W-1:0] shadow [NC];

  // readout
  state_e             state;
  logic [CIW-1:0]     c;
  logic               is_max;
  logic [SW-1:0]      s_sum;
  logic signed [SW:0] s_u, s_v;
  logic [SW-1:0]      den, r_u, r_v;
  logic [FRAC-1:0]    q_u, q_v;
  logic               neg_u, neg_v;
  logic [$clog2(FRAC+1)-1:0] cnt;
  logic [TRK_W-1:0]   u_out, v_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sd     <= COORD_W'(64);
      sig_sh <= 4'd6;
      thr    <= ACC_W'(256);
    end else if (cfg.we && cfg.kind == CFG_TPU_REG && cfg.board == 3'(BOARD_ID)
                 && cfg.unit == 8'(TPU_ID)) begin
      case (cfg.addr[1:0])
        2'd0:    sd     <= cfg.data[COORD_W-1:0];
        2'd1:    sig_sh <= cfg.data[3:0];
        2'd2:    thr    <= cfg.data[ACC_W-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- input and accumulation ----------------
  always_comb begin
    ids_differ = 1'b0;
    for (int k = 0; k < N_LINES; k++) begin
      eoe_head[k] = in_valid[k] && in_data[k].eoe;
      take[k]     = in_valid[k] && !in_data[k].eoe;
      if (in_data[k].data != in_data[0].data) ids_differ = 1'b1;
    end
    all_eoe = &eoe_head;
    snap    = all_eoe && (state == S_IDLE) && !snap_q;
    stall   = all_eoe && !snap;
    for (int k = 0; k < N_LINES; k++) in_ready[k] = in_data[k].eoe ? snap : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hv_q     <= '0;
      snap_q   <= 1'b0;
      ev_q     <= '0;
      sync_err <= 1'b0;
      for (int k = 0; k < N_LINES; k++) hit_q[k] <= '0;
    end else begin
      hv_q     <= take;
      snap_q   <= snap;
      sync_err <= snap && ids_differ;
      if (snap) ev_q <= in_data[0].data;
      for (int k = 0; k < N_LINES; k++) hit_q[k] <= hit_t'(in_data[k].data);
    end
  end

  for (genvar i = 0; i < NC; i++) begin : g_cell
    retina_engine #(
      .CELL_ID(i), .TPU_ID(TPU_ID), .BOARD_ID(BOARD_ID),
      .N_LINES(N_LINES), .W_W(W_W), .ACC_W(ACC_W)
    ) u_engine (
      .clk, .rst_n, .cfg,
      .hit_valid(hv_q), .hit(hit_q), .sd, .sig_sh,
      .clear(snap_q), .acc(acc[i])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)      shadow[i] <= '0;
      else if (snap_q) shadow[i] <= acc[i];
    end
  end

  // ---------------- local maximum and 3x3 sums of cell c ----------------
  always_comb begin
    int row, col, rr, cc, n;
    n      = 0;
    rr     = 0;
    cc     = 0;
    row    = int'(c) / CU;
    col    = int'(c) % CU;
    is_max = (shadow[c] >= thr) && (shadow[c] != '0);
    s_sum  = '0;
    s_u    = '0;
    s_v    = '0;
    for (int dr = -1; dr <= 1; dr++) begin
      for (int dc = -1; dc <= 1; dc++) begin
        rr = row + dr;
        cc = col + dc;
        if (rr >= 0 && rr < CV && cc >= 0 && cc < CU) begin
          n = rr * CU + cc;
          s_sum = s_sum + SW'(shadow[n]);
          if (dc ==  1) s_u = s_u + (SW+1)'(shadow[n]);
          if (dc == -1) s_u = s_u - (SW+1)'(shadow[n]);
          if (dr ==  1) s_v = s_v + (SW+1)'(shadow[n]);
          if (dr == -1) s_v = s_v - (SW+1)'(shadow[n]);
          if (n < int'(c) && shadow[n] >= shadow[c]) is_max = 1'b0;
          if (n > int'(c) && shadow[n] >  shadow[c]) is_max = 1'b0;
        end
      end
    end
  end

  // ---------------- readout state machine ----------------
  always_comb begin
    logic [TRK_W-1:0] cu_base, cv_base;
    cu_base = TRK_W'(U0 + (int'(c) % CU) + 1) << FRAC;
    cv_base = TRK_W'(V0 + (int'(c) / CU) + 1) << FRAC;
    u_out   = neg_u ? cu_base - TRK_W'(q_u) : cu_base + TRK_W'(q_u);
    v_out   = neg_v ? cv_base - TRK_W'(q_v) : cv_base + TRK_W'(q_v);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      ev_id <= '0;
      den   <= '0;
      r_u   <= '0;
      r_v   <= '0;
      q_u   <= '0;
      q_v   <= '0;
      neg_u <= 1'b0;
      neg_v <= 1'b0;
      cnt   <= '0;
    end else begin
      case (state)
        S_IDLE: if (snap_q) begin
          state <= S_SCAN;
          c     <= '0;
          ev_id <= ev_q;
        end
        S_SCAN: begin
          if (is_max) begin
            state <= S_DIV;
            den   <= s_sum;
            neg_u <= s_u[SW];
            neg_v <= s_v[SW];
            r_u   <= s_u[SW] ? SW'(-s_u) : SW'(s_u);
            r_v   <= s_v[SW] ? SW'(-s_v) : SW'(s_v);
            q_u   <= '0;
            q_v   <= '0;
            cnt   <= '0;
          end else if (c == CIW'(NC - 1)) begin
            state <= S_EOE;
          end else begin
            c <= c + 1'b1;
          end
        end
        S_DIV: begin
          // remainders stay below den, so 2*r fits in SW+1 bits
          if ({r_u, 1'b0} >= {1'b0, den}) begin
            r_u <= SW'({r_u, 1'b0} - {1'b0, den});
            q_u <= {q_u[FRAC-2:0], 1'b1};
          end else begin
            r_u <= {r_u[SW-2:0], 1'b0};
            q_u <= {q_u[FRAC-2:0], 1'b0};
          end
          if ({r_v, 1'b0} >= {1'b0, den}) begin
            r_v <= SW'({r_v, 1'b0} - {1'b0, den});
            q_v <= {q_v[FRAC-2:0], 1'b1};
          end else begin
            r_v <= {r_v[SW-2:0], 1'b0};
            q_v <= {q_v[FRAC-2:0], 1'b0};
          end
          cnt <= cnt + 1'b1;
          if (cnt == $clog2(FRAC+1)'(FRAC - 1)) state <= S_EMIT;
        end
        S_EMIT: if (out_ready) begin
          if (c == CIW'(NC - 1)) state <= S_EOE;
          else begin
            state <= S_SCAN;
            c     <= c + 1'b1;
          end
        end
        S_EOE: if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign out_valid = (state == S_EMIT) || (state == S_EOE);
  always_comb begin
    if (state == S_EOE) out_data = '{eoe: 1'b1, data: ev_id};
    else                out_data = '{eoe: 1'b0, data: track_t'{tpu: GTPU, u: u_out, v: v_out}};
  end

endmodule
