// core_checker -- stimulus generator and scoreboard for sysmt_core.
//
// Streams TILES output tiles through a connected sysmt_core, back to back
// or with idle gaps, and checks every PE's psum against the reference model
// at exactly the edge its last step lands (and one edge earlier, when only
// the last step is missing), which also pins the latency: a tile of L steps
// presented from edge n0 is complete in PE (r, c) after edge n0 + L + r + c.
// Each tile has K = L * THREADS dot-product terms split evenly over the
// threads, so the core needs K/THREADS input cycles per tile.
//
// Tiles cycle through data scenarios that provoke each NB-SMT mechanism:
//   0 sparse ReLU-like activations     (mix of idle, single and collisions)
//   1 dense 8-bit data                 (lossy precision reduction)
//   2 4-bit activations                (collisions without error)
//   3 dense data with weight reduction (reduce_w_i = 1)
//   4 only threads 0 and 1 carry data  (a 4-thread core run at 2 threads)
//   5 only thread 0 carries data       (single-thread, exact)
// The controller status from every PE is tallied; a mechanism that never
// occurred counts as a failure. reduce_w_i only changes while the array is
// drained. done_o rises when the last tile has been checked; the counts
// n_chk and n_fail are then final and read by the enclosing testbench.
module core_checker
  import nbsmt_pkg::*;
  import nbsmt_ref_pkg::*;
#(
  parameter int unsigned ROWS    = 4,
  parameter int unsigned COLS    = 4,
  parameter int unsigned THREADS = 2,
  parameter int unsigned TILES   = 12,
  parameter int unsigned MAX_L   = 16
) (
  input  logic                                clk,
  output logic                                rst_n,
  output logic                                reduce_w_o,
  output act_t       [ROWS-1:0][THREADS-1:0]  x_o,
  output wgt_t       [COLS-1:0][THREADS-1:0]  w_o,
  output beat_t                               beat_o,
  input  acc_t       [ROWS-1:0][COLS-1:0]     psum_i,
  input  ctrl_stat_t [ROWS-1:0][COLS-1:0]     stat_i,
  output logic                                done_o
);

  int edge_n = 0;                       // rising edges since reset released
  int t_start[TILES], t_len[TILES];
  int exp_full[TILES][ROWS][COLS];
  int exp_part[TILES][ROWS][COLS];      // without the last step
  longint sq_err = 0;                   // squared error against exact products
  int n_lossy = 0, n_exact_coll = 0, n_single = 0, n_idle = 0, n_multi = 0, n_wred = 0;
  int n_b2b = 0, n_gap = 0, n_half = 0;
  bit checked_all = 0;
  int n_chk = 0, n_fail = 0;

  always @(posedge clk) if (rst_n) edge_n <= edge_n + 1;

  function automatic int gen_x(int scen);
    case (scen)
      1, 3:    return int'($urandom_range(1, 255));
      2:       return ($urandom_range(0, 3) == 0) ? 0 : int'($urandom_range(1, 15));
      default: return ($urandom_range(0, 1) == 0) ? 0 :
                      ($urandom_range(0, 1) == 0) ? int'($urandom_range(1, 15))
                                                  : int'($urandom_range(16, 255));
    endcase
  endfunction
  function automatic int gen_w(int scen);
    int v = int'($urandom_range(0, 255)) - 128;
    if (scen == 0 && $urandom_range(0, 9) == 0) v = 0;
    if ((scen == 1 || scen == 3) && v == 0) v = 1;
    return v;
  endfunction

  // ---------------------------------------------------------------- driver
  initial begin
    int xs[ROWS][THREADS], ws[COLS][THREADS], xa[4], wa[4];
    int scen, L, prod, exact;
    bit last_rw;
    foreach (t_len[j]) begin t_len[j] = 0; t_start[j] = 0; end
    rst_n = 0; reduce_w_o = 0; x_o = '0; w_o = '0; beat_o = '0; done_o = 0;
    repeat (4) @(posedge clk);
    #1 rst_n = 1;
    last_rw = 0;
    for (int j = 0; j < TILES; j++) begin
      scen = j % 6;
      if (scen == 4 && THREADS != 4) scen = 0;
      // reduce_w_i is static configuration: drain the array before changing it.
      if ((scen == 3) != last_rw) begin
        repeat (ROWS + COLS + 3) @(posedge clk);
        #1;
        reduce_w_o = (scen == 3);
        last_rw    = (scen == 3);
      end else if (j > 0 && $urandom_range(0, 2) == 0) begin
        repeat ($urandom_range(1, 3)) @(posedge clk);
        #1;
        n_gap++;
      end else if (j > 0) n_b2b++;
      L = int'($urandom_range(2, MAX_L));
      t_start[j] = edge_n + 1;          // first step is sampled at the next edge
      t_len[j]   = L;
      foreach (exp_full[j][r, c]) begin exp_full[j][r][c] = 0; exp_part[j][r][c] = 0; end
      for (int k = 0; k < L; k++) begin
        for (int r = 0; r < ROWS; r++)
          for (int t = 0; t < THREADS; t++) begin
            xs[r][t] = gen_x(scen);
            if ((scen == 4 && t >= 2) || (scen == 5 && t >= 1)) xs[r][t] = 0;
            x_o[r][t] = 8'(xs[r][t]);
          end
        for (int c = 0; c < COLS; c++)
          for (int t = 0; t < THREADS; t++) begin
            ws[c][t] = gen_w(scen);
            w_o[c][t] = 8'(ws[c][t]);
          end
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            for (int t = 0; t < 4; t++) begin
              xa[t] = (t < THREADS) ? xs[r][t] : 0;
              wa[t] = (t < THREADS) ? ws[c][t] : 0;
            end
            prod  = (THREADS == 2) ? pe2(xa[0], wa[0], xa[1], wa[1], last_rw) : pe4(xa, wa, last_rw);
            exact = xa[0] * wa[0] + xa[1] * wa[1] + xa[2] * wa[2] + xa[3] * wa[3];
            sq_err += (longint'(prod) - longint'(exact)) ** 2;
            if (k == L - 1) exp_part[j][r][c] = exp_full[j][r][c];
            exp_full[j][r][c] += prod;
          end
        beat_o.valid = 1'b1;
        beat_o.first = (k == 0);
        @(posedge clk);
        #1;
      end
      beat_o = '0; x_o = '0; w_o = '0;
      if (scen == 4) n_half++;
    end
    wait (checked_all);
    repeat (2) @(posedge clk);
    done_o = 1;
  end

  // ----------------------------------------------------------- scoreboard
  initial begin
    int due;
    while (!checked_all) begin
      @(posedge clk);
      #2;
      if (!rst_n) continue;
      // Tally what the controllers did in the beat they just multiplied.
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          if (stat_i[r][c].collision && stat_i[r][c].lossy) n_lossy++;
          if (stat_i[r][c].collision && !stat_i[r][c].lossy) n_exact_coll++;
          if (stat_i[r][c].n_active == 3'd1) n_single++;
          if (stat_i[r][c].n_active >= 3'd3) n_multi++;
          if (stat_i[r][c].collision && stat_i[r][c].lossy && reduce_w_o) n_wred++;
        end
      for (int j = 0; j < TILES; j++) begin
        if (t_len[j] == 0) continue;
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            due = t_start[j] + t_len[j] + r + c;
            if (edge_n == due - 1 && t_len[j] > 1) begin
              n_chk++;
              if (int'(psum_i[r][c]) != exp_part[j][r][c]) begin
                n_fail++;
                $display("FAIL tile %0d PE(%0d,%0d) one edge early: %0d exp %0d",
                         j, r, c, psum_i[r][c], exp_part[j][r][c]);
              end
            end
            if (edge_n == due) begin
              n_chk++;
              if (int'(psum_i[r][c]) != exp_full[j][r][c]) begin
                n_fail++;
                $display("FAIL tile %0d PE(%0d,%0d): %0d exp %0d",
                         j, r, c, psum_i[r][c], exp_full[j][r][c]);
              end
              if (j == TILES - 1 && r == ROWS - 1 && c == COLS - 1) checked_all = 1;
            end
          end
      end
    end
    // Mechanism coverage.
    $display("core %0dx%0d %0dT: lossy collisions %0d, exact collisions %0d, single-thread beats %0d, 3-4 way collisions %0d, weight-reduced collisions %0d, back-to-back tiles %0d, gaps %0d, 2-thread tiles on 4T %0d, squared error %0d",
             ROWS, COLS, THREADS, n_lossy, n_exact_coll, n_single, n_multi, n_wred, n_b2b, n_gap, n_half, sq_err);
    n_chk += 5;
    if (n_lossy == 0)      begin n_fail++; $display("FAIL no lossy precision reduction"); end
    if (n_exact_coll == 0) begin n_fail++; $display("FAIL no error-free collision"); end
    if (n_single == 0)     begin n_fail++; $display("FAIL no single-thread beat"); end
    if (n_wred == 0)       begin n_fail++; $display("FAIL no weight-reduced collision"); end
    if (n_b2b == 0)        begin n_fail++; $display("FAIL no back-to-back tiles"); end
    if (THREADS == 4) begin
      n_chk += 2;
      if (n_multi == 0) begin n_fail++; $display("FAIL no 3-4 way collision"); end
      if (n_half == 0)  begin n_fail++; $display("FAIL no 2-thread tile"); end
    end
  end

endmodule
