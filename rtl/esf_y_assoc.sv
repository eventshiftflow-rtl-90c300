// esf_y_assoc: joins the x and y pipelines into 2D velocity vectors.
//
// The x pipeline reports a hypothesis j_x for an occupied column x0, and the
// y pipeline a hypothesis j_y for each occupied row. For every x detection
// this block looks at the set Y(x0) of rows that had at least one event in
// column x0 during the same bin, and outputs
//   - the median of the y pipeline's hypotheses over the rows of Y(x0) that
//     have a y detection (the associated vertical motion), and
//   - the median row of Y(x0) (where along the column the feature is).
//
// Event map. To know Y(x0) the block keeps one bit per sensor pixel, set
// by any event at that pixel in the bin. There are two banks: events of the
// running bin go into one while the previous bin's map is read from the
// other; bin_done swaps them and clears the bank that becomes the write
// bank. This is NX*NY bits per bank, far more than the rest of the core,
// and is this design's way of recording "which y pixels had events at x0";
// the paper does not say how that set is stored.
//
// Result tables. While the two scorers run, every detection that passed the
// threshold (det_hit) is written into a per-column table (j_x) and a per-row
// table (j_y). Once both scorers have pulsed done, the block walks the
// marked columns, lowest first. For each it makes one pass over the NY rows
// (one row per cycle) that counts the rows of Y(x0), finds the median row
// and builds a histogram of the j_y values over the rows that have one; a
// second pass over the 2J+1 histogram bins finds the median j_y. So each x
// detection takes NY + 2J + 3 cycles; with 240 columns that is at most about
// 51,600 cycles, well inside a bin of several milliseconds.
//
// Medians are lower medians: the ceil(n/2)-th smallest of n values. If no
// row of Y(x0) has a y detection, out_jy_ok is low and out_jy is 0.
//
// Outputs: out_valid pulses once per x detection with out_x, out_jx,
// out_jy_ok, out_jy, out_y and out_ny (the size of Y(x0)). busy is high
// while the walk runs; done pulses at its end. If bin_done arrives while the
// walk is still running, the unfinished walk is dropped and overrun pulses.
module esf_y_assoc #(
  parameter int unsigned NX = 240,
  parameter int unsigned NY = 180,
  parameter int unsigned J  = 15,
  parameter int unsigned CW = 16,
  parameter int unsigned XW = $clog2(NX),
  parameter int unsigned YW = $clog2(NY),
  parameter int unsigned JW = $clog2(J + 1) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // accepted events of the running bin
  input  logic                 ev_valid,
  input  logic [CW-1:0]        ev_x,
  input  logic [CW-1:0]        ev_y,
  input  logic                 bin_done,
  // x pipeline detections
  input  logic                 xd_valid,
  input  logic                 xd_hit,
  input  logic [XW-1:0]        xd_x,
  input  logic signed [JW-1:0] xd_j,
  input  logic                 x_done,
  // y pipeline detections
  input  logic                 yd_valid,
  input  logic                 yd_hit,
  input  logic [YW-1:0]        yd_y,
  input  logic signed [JW-1:0] yd_j,
  input  logic                 y_done,
  // associated output
  output logic                 out_valid,
  output logic [XW-1:0]        out_x,
  output logic signed [JW-1:0] out_jx,
  output logic                 out_jy_ok,
  output logic signed [JW-1:0] out_jy,
  output logic [YW-1:0]        out_y,
  output logic [YW:0]          out_ny,
  output logic                 busy,
  output logic                 done,
  output logic                 overrun
);
  localparam int unsigned NL = 2 * J + 1;
  localparam int unsigned KW = $clog2(NL + 1);
  localparam int unsigned CNTW = YW + 1;         // counts up to NY

  typedef enum logic [2:0] {IDLE, WAIT, PICK, YPASS, JPASS, EMIT} state_e;

  // ---------------------------------------------------------------- event map
  logic [NY-1:0] ymap [2][NX];
  logic          wb;                      // bank written by the running bin

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wb <= 1'b0;
      for (int b = 0; b < 2; b++)
        for (int x = 0; x < NX; x++) ymap[b][x] <= '0;
    end else if (bin_done) begin
      wb <= ~wb;
      for (int x = 0; x < NX; x++) ymap[~wb][x] <= '0;
    end else if (ev_valid && ev_x < CW'(NX) && ev_y < CW'(NY)) begin
      ymap[wb][ev_x[XW-1:0]][ev_y[YW-1:0]] <= 1'b1;
    end
  end

  // ------------------------------------------------------------ result tables
  logic [NX-1:0]        xpend;            // columns still to associate
  logic signed [JW-1:0] xj [NX];
  logic [NY-1:0]        yv;
  logic signed [JW-1:0] yj [NY];
  logic                 xfin, yfin;

  // ------------------------------------------------------------------- walker
  state_e               state;
  logic [XW-1:0]        x_cur, x_next;
  logic                 have_next;
  logic [NY-1:0]        row;
  logic [CNTW-1:0]      row_cnt;          // |Y(x0)|, counted combinationally
  logic [YW-1:0]        yi;
  logic [CNTW-1:0]      ycum;             // rows of Y(x0) seen so far
  logic [CNTW-1:0]      nv;               // rows of Y(x0) with a y detection
  logic [CNTW-1:0]      hist [NL];
  logic [KW-1:0]        k;
  logic [CNTW-1:0]      kcum;
  logic                 jfound;
  logic [YW-1:0]        med_y;
  logic signed [JW-1:0] med_j;

  always_comb begin
    x_next    = '0;
    have_next = 1'b0;
    for (int i = NX - 1; i >= 0; i--) begin
      if (xpend[i]) begin
        x_next    = XW'(i);
        have_next = 1'b1;
      end
    end
  end

  assign row = ymap[~wb][x_cur];
  always_comb begin
    row_cnt = '0;
    for (int i = 0; i < NY; i++) row_cnt = row_cnt + CNTW'(row[i]);
  end

  // ceil(n/2)-th element, 1-based
  function automatic logic [CNTW-1:0] half_up(logic [CNTW-1:0] n);
    return CNTW'((n + 1'b1) >> 1);
  endfunction

  logic [CNTW-1:0] kcum_next;
  assign kcum_next = kcum + hist[k];

  assign busy = (state != IDLE) && (state != WAIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      xpend     <= '0;
      yv        <= '0;
      xfin      <= 1'b0;
      yfin      <= 1'b0;
      x_cur     <= '0;
      yi        <= '0;
      ycum      <= '0;
      nv        <= '0;
      k         <= '0;
      kcum      <= '0;
      jfound    <= 1'b0;
      med_y     <= '0;
      med_j     <= '0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_jx    <= '0;
      out_jy_ok <= 1'b0;
      out_jy    <= '0;
      out_y     <= '0;
      out_ny    <= '0;
      done      <= 1'b0;
      overrun   <= 1'b0;
      for (int i = 0; i < NX; i++) xj[i] <= '0;
      for (int i = 0; i < NY; i++) yj[i] <= '0;
      for (int i = 0; i < NL; i++) hist[i] <= '0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      overrun   <= 1'b0;
      if (bin_done) begin
        // A new bin closes: its scorers will refill the tables.
        overrun <= busy;
        state   <= WAIT;
        xpend   <= '0;
        yv      <= '0;
        xfin    <= 1'b0;
        yfin    <= 1'b0;
        for (int i = 0; i < NL; i++) hist[i] <= '0;
      end else begin
        if (xd_valid && xd_hit) begin
          xpend[xd_x] <= 1'b1;
          xj[xd_x]    <= xd_j;
        end
        if (yd_valid && yd_hit) begin
          yv[yd_y] <= 1'b1;
          yj[yd_y] <= yd_j;
        end
        if (x_done) xfin <= 1'b1;
        if (y_done) yfin <= 1'b1;
        unique case (state)
          IDLE: ;
          WAIT: if (xfin && yfin) state <= PICK;
          PICK: begin
            if (have_next) begin
              x_cur        <= x_next;
              xpend[x_next] <= 1'b0;
              yi           <= '0;
              ycum         <= '0;
              nv           <= '0;
              med_y        <= '0;
              state        <= YPASS;
            end else begin
              done  <= 1'b1;
              state <= IDLE;
            end
          end
          YPASS: begin
            if (row[yi]) begin
              ycum <= ycum + 1'b1;
              if (ycum + 1'b1 == half_up(row_cnt)) med_y <= yi;
              if (yv[yi]) begin
                nv <= nv + 1'b1;
                hist[KW'(yj[yi] + $signed(JW'(J)))] <=
                  hist[KW'(yj[yi] + $signed(JW'(J)))] + 1'b1;
              end
            end
            if (yi == YW'(NY - 1)) begin
              k      <= '0;
              kcum   <= '0;
              jfound <= 1'b0;
              med_j  <= '0;
              state  <= JPASS;
            end else begin
              yi <= yi + 1'b1;
            end
          end
          JPASS: begin
            kcum <= kcum_next;
            if (!jfound && nv != '0 && kcum_next >= half_up(nv)) begin
              jfound <= 1'b1;
              med_j  <= JW'(int'(k) - int'(J));
            end
            hist[k] <= '0;
            if (k == KW'(NL - 1)) state <= EMIT;
            else k <= k + 1'b1;
          end
          EMIT: begin
            out_valid <= 1'b1;
            out_x     <= x_cur;
            out_jx    <= xj[x_cur];
            out_jy_ok <= jfound;
            out_jy    <= jfound ? med_j : '0;
            out_y     <= med_y;
            out_ny    <= row_cnt;
            state     <= PICK;
          end
          default: state <= IDLE;
        endcase
      end
    end
  end
endmodule
