// tb_track_finder: random 4x4 response grids with a few planted peaks. The
// reference model here finds the local maxima (R > threshold, strictly
// greater than earlier neighbours in raster order, not smaller than later
// ones) and the 3x3 centroid offsets du = trunc(64 * sum(i R) / sum(R)),
// dv likewise, and checks the tracks the finder emits, in raster order, then
// the closing end-of-event word. Also bounds the cycles per event: one per
// cell scanned plus 2 divisions (2 x 27 cycles) and a few handshake cycles per
// track.
module tb_track_finder;
  import retina_pkg::*;

  localparam int GU = 4, GV = 4, NC = 16, TH = 512;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  logic             start, busy, trk_valid, trk_ready, trk_eoe;
  logic [ACC_W-1:0] resp [NC];
  track_t           trk;

  track_finder #(.GU(GU), .GV(GV), .THRESH(TH)) dut (.*);

  int checks = 0, failures = 0;

  task automatic fail(string msg);
    failures++;
    $display("FAIL %0t: %s", $time, msg);
  endtask

  int r [NC];
  track_t exp_q [$];

  function automatic int ival(int c);
    return r[c];
  endfunction

  task automatic model();
    exp_q.delete();
    for (int c = 0; c < NC; c++) begin
      bit m;
      int cu, cv, s, nu, nv;
      cu = c % GU; cv = c / GU;
      m = r[c] > TH;
      s = 0; nu = 0; nv = 0;
      for (int dv = -1; dv <= 1; dv++) for (int du = -1; du <= 1; du++) begin
        int u, v, n;
        u = cu + du; v = cv + dv; n = v * GU + u;
        if (u >= 0 && u < GU && v >= 0 && v < GV) begin
          if (n < c && !(r[c] > r[n])) m = 0;
          if (n > c && r[c] < r[n]) m = 0;
          s += r[n]; nu += du * r[n]; nv += dv * r[n];
        end
      end
      if (m) begin
        track_t t;
        int qu, qv;
        qu = (nu < 0 ? -nu : nu) * 64 / s; if (qu > 127) qu = 127; if (nu < 0) qu = -qu;
        qv = (nv < 0 ? -nv : nv) * 64 / s; if (qv > 127) qv = 127; if (nv < 0) qv = -qv;
        t.cell_u = 8'(cu); t.cell_v = 8'(cv);
        t.du = 8'(qu); t.dv = 8'(qv);
        t.peak = 16'(r[c]);
        exp_q.push_back(t);
      end
    end
  endtask

  initial begin
    rst_n = 1'b1;
    #1 rst_n = 1'b0;
    start = 0; trk_ready = 1;
    resp = '{default: '0};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 200; e++) begin
      int ntr, cyc, bound;
      for (int c = 0; c < NC; c++) r[c] = $urandom_range(300);
      for (int p = 0; p < 1 + $urandom_range(2); p++) r[$urandom_range(NC-1)] = 600 + $urandom_range(9000);
      if (e % 10 == 3) begin r[5] = 2000; r[6] = 2000; end    // plateau: one track only
      for (int c = 0; c < NC; c++) resp[c] = 16'(r[c]);
      model();
      start = 1;
      @(negedge clk);
      start = 0;
      resp = '{default: '0};       // snapshot taken: inputs may change now
      ntr = 0; cyc = 1;
      forever begin
        trk_ready = ($urandom_range(3) != 0);
        @(posedge clk);
        cyc++;
        if (trk_valid && trk_ready) begin
          if (trk_eoe) break;
          checks++;
          if (exp_q.size() == 0) fail("unexpected track");
          else begin
            track_t t;
            t = exp_q.pop_front();
            if (t != trk) fail($sformatf("track %h expected %h", trk, t));
          end
          ntr++;
        end
        @(negedge clk);
        if (cyc > 5000) break;
      end
      @(negedge clk);
      checks++;
      if (exp_q.size() != 0) fail($sformatf("event %0d: %0d tracks missing", e, exp_q.size()));
      bound = NC + 3 + ntr * (2 * 27 + 4) * 2;   // x2 for random trk_ready stalls
      checks++;
      if (cyc > bound) fail($sformatf("event took %0d cycles, bound %0d", cyc, bound));
      checks++;
      if (busy) fail("busy after end of event");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
