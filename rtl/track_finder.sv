// track_finder: the last retina step. Takes the responses R of a GU x GV grid
// of cells at the end of an event, finds the local maxima, and interpolates
// each maximum with the centroid of the 3x3 cells around it:
//     du = sum(i R_ij) / sum(R_ij),  dv = sum(j R_ij) / sum(R_ij),
// i, j in {-1, 0, +1}, giving the track parameters u0 + du, v0 + dv.
//
// A cell is a local maximum when R > THRESH, R is greater than each of its
// neighbours earlier in raster order and no smaller than each later one (so a
// plateau yields one track). Neighbours outside the grid count as absent.
// The local-maximum test and the 3x3 centroid follow the source; the
// threshold, the tie rule and the grid-edge rule are this design's.
//
// Timing: `start` (one cycle, all cells done) snapshots the responses, so the
// cells may be cleared and start the next event at once. The finder then
// scans one cell per cycle; each maximum costs two serial divisions of
// DIV_W cycles plus the output handshake. After the scan, a word with
// trk_eoe = 1 closes the event. `busy` is high from start to that word.
// du and dv are signed with CENT_FRAC fractional bits (1/64 of a cell).
module track_finder
  import retina_pkg::*;
#(
  parameter int unsigned GU     = 4,
  parameter int unsigned GV     = 4,
  parameter int unsigned THRESH = 512
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [ACC_W-1:0] resp [GU*GV],
  output logic             busy,

  output logic             trk_valid,
  input  logic             trk_ready,
  output logic             trk_eoe,
  output track_t           trk
);

  localparam int unsigned NC    = GU * GV;
  localparam int unsigned SUM_W = ACC_W + 4;            // 9 responses
  localparam int unsigned DIV_W = SUM_W + CENT_FRAC;
  localparam int unsigned CW    = (NC > 1) ? $clog2(NC) : 1;   // cell index

  typedef enum logic [2:0] {S_IDLE, S_SCAN, S_DIVU, S_DIVV, S_EMIT, S_EOE} state_e;
  state_e state;

  logic [ACC_W-1:0]         r [NC];
  logic [$clog2(NC+1)-1:0]  idx;
  logic [NC-1:0]            is_max;

  // local maxima of the snapshot
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      is_max[c] = (r[c] > ACC_W'(THRESH));
      for (int dv = -1; dv <= 1; dv++) begin
        for (int du = -1; du <= 1; du++) begin
          int nu, nv, n;
          nu = c % GU + du;
          nv = c / GU + dv;
          n  = nv * GU + nu;
          if ((du != 0 || dv != 0) && nu >= 0 && nu < GU && nv >= 0 && nv < GV) begin
            if (n < c) begin
              if (!(r[c] > r[n])) is_max[c] = 1'b0;
            end else begin
              if (r[c] < r[n]) is_max[c] = 1'b0;
            end
          end
        end
      end
    end
  end

  // 3x3 sums around the cell being scanned
  logic [SUM_W-1:0]        s_sum;
  logic signed [SUM_W:0]   s_nu, s_nv;
  always_comb begin
    int cu, cv, nu, nv;
    s_sum = '0;
    s_nu  = '0;
    s_nv  = '0;
    cu = int'(idx) % GU;
    cv = int'(idx) / GU;
    for (int dv = -1; dv <= 1; dv++) begin
      for (int du = -1; du <= 1; du++) begin
        nu = cu + du;
        nv = cv + dv;
        if (nu >= 0 && nu < GU && nv >= 0 && nv < GV) begin
          s_sum = s_sum + SUM_W'(r[nv * GU + nu]);
          if (du < 0) s_nu = s_nu - $signed((SUM_W+1)'(r[nv * GU + nu]));
          if (du > 0) s_nu = s_nu + $signed((SUM_W+1)'(r[nv * GU + nu]));
          if (dv < 0) s_nv = s_nv - $signed((SUM_W+1)'(r[nv * GU + nu]));
          if (dv > 0) s_nv = s_nv + $signed((SUM_W+1)'(r[nv * GU + nu]));
        end
      end
    end
  end

  logic             div_start, div_busy, div_done;   // div_busy: status only, unused
  logic [DIV_W-1:0] div_a, div_b, div_q;
  logic             neg_u, neg_v;
  logic [DIV_W-1:0] mag_u, mag_v;
  logic [SUM_W-1:0] sum_q;
  logic [DIV_W-1:0] mag_v_q;

  seq_divider #(.W(DIV_W)) u_div (
    .clk, .rst_n,
    .start   (div_start),
    .dividend(div_a),
    .divisor (div_b),
    .busy    (div_busy),
    .done    (div_done),
    .quotient(div_q)
  );

  logic [SUM_W:0] abs_nu, abs_nv;
  assign abs_nu = s_nu[SUM_W] ? -s_nu : s_nu;
  assign abs_nv = s_nv[SUM_W] ? -s_nv : s_nv;
  assign mag_u  = DIV_W'(abs_nu) << CENT_FRAC;
  assign mag_v  = DIV_W'(abs_nv) << CENT_FRAC;

  function automatic logic signed [7:0] signed_q(logic neg, logic [DIV_W-1:0] q);
    logic [7:0] m;
    m = (q > DIV_W'(127)) ? 8'd127 : q[7:0];
    return neg ? -$signed(m) : $signed(m);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      div_start <= 1'b0;
      div_a     <= '0;
      div_b     <= '0;
      neg_u     <= 1'b0;
      neg_v     <= 1'b0;
      sum_q     <= '0;
      mag_v_q   <= '0;
      trk_valid <= 1'b0;
      trk_eoe   <= 1'b0;
      trk       <= '0;
      for (int c = 0; c < NC; c++) r[c] <= '0;
    end else begin
      div_start <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          for (int c = 0; c < NC; c++) r[c] <= resp[c];
          idx   <= '0;
          state <= S_SCAN;
        end
        S_SCAN: begin
          if (idx == ($clog2(NC+1))'(NC)) begin
            trk_valid <= 1'b1;
            trk_eoe   <= 1'b1;
            trk       <= '0;
            state     <= S_EOE;
          end else if (is_max[CW'(idx)]) begin
            neg_u     <= s_nu[SUM_W];
            neg_v     <= s_nv[SUM_W];
            sum_q     <= s_sum;
            div_a     <= mag_u;
            div_b     <= DIV_W'(s_sum);
            div_start <= 1'b1;
            trk.cell_u <= 8'(int'(idx) % GU);
            trk.cell_v <= 8'(int'(idx) / GU);
            trk.peak   <= r[CW'(idx)];
            state     <= S_DIVU;
            // keep the v numerator for the second division
            mag_v_q   <= mag_v;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        S_DIVU: if (div_done) begin
          trk.du    <= signed_q(neg_u, div_q);
          div_a     <= mag_v_q;
          div_b     <= DIV_W'(sum_q);
          div_start <= 1'b1;
          state     <= S_DIVV;
        end
        S_DIVV: if (div_done) begin
          trk.dv    <= signed_q(neg_v, div_q);
          trk_valid <= 1'b1;
          trk_eoe   <= 1'b0;
          state     <= S_EMIT;
        end
        S_EMIT: if (trk_ready) begin
          trk_valid <= 1'b0;
          idx       <= idx + 1'b1;
          state     <= S_SCAN;
        end
        S_EOE: if (trk_ready) begin
          trk_valid <= 1'b0;
          trk_eoe   <= 1'b0;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

endmodule
