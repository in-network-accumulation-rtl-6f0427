// tb_ina_mesh: end-to-end run of the full 8 x 8 mesh at its default parameters,
// two convolution layers back to back.
//
// Layer A (weights split over three PEs, as when C*R*R*q exceeds a PE's memory):
// in every column the rows are grouped in blocks of four; row 0 of a block starts
// the INA packet with its psum, rows 1 and 2 add theirs inside their routers, and
// row 3 receives the finished output activation. Row 3 of each block then gathers
// the eight results of its row into one gather packet (head + 2 body flits),
// started at x = 0 and ending at x = 7, where it leaves the mesh.
// Layer B (each filter fits in one PE, no INA): every PE's result is gathered
// along its row.
// The expected sums are computed here from the random weights and activations.
// Activations of the INA member rows are delayed at random so INA packets must
// wait for operand 1, and gather packets for payloads. Every mechanism is counted
// and must occur: INA packet injection, in-router accumulation, INA hold, gather
// injection, payload load, load hold, and the switch between the two layer modes.
module tb_ina_mesh;
  import ina_pkg::*;
  localparam int MX = 8, MY = 8, L = 1;
  localparam int X = 16;            // weights per PE in both layers
  localparam int RA = 3, RB = 2;    // output activations per PE in layers A, B
  logic clk = 0, rst_n = 0;
  cfg_t cfg[MY][MX];
  logic flush = 0, pe_clear = 0;
  logic w_valid[MY][MX][L], w_ready[MY][MX][L];
  logic [31:0] w_data[MY][MX][L];
  logic a_valid[MY][MX], a_ready[MY][MX];
  logic [31:0] a_data[MY][MX];
  logic host_valid[MY][MX];
  flit_t host_flit[MY][MX];
  logic ev_ina_sum[MY][MX], ev_load[MY][MX], ev_ina_stall[MY][MX], ev_ld_stall[MY][MX];
  logic ev_ina_inj[MY][MX], ev_gather_inj[MY][MX];
  int checks = 0, failures = 0;

  ina_mesh dut (.clk, .rst_n, .cfg, .flush, .pe_clear, .w_valid, .w_data, .w_ready,
    .a_valid, .a_data, .a_ready, .host_valid, .host_flit, .ev_ina_sum, .ev_load,
    .ev_ina_stall, .ev_ld_stall, .ev_ina_inj, .ev_gather_inj);

  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("%0t: %s", $time, what); end
  endtask

  // ---------------- stimulus data ----------------
  logic [31:0] wt [MY][MX][X];
  logic [31:0] act[MY][MX][4][X];
  logic        use_pe[MY][MX];
  int          rounds;
  logic        slow[MY][MX];

  // per-node stream drivers
  int wi[MY][MX], act_ix[MY][MX], ar[MY][MX];
  always @(negedge clk) begin
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        w_valid[y][x][0] = 1'b0;
        a_valid[y][x]    = 1'b0;
        if (rst_n && !pe_clear && use_pe[y][x]) begin
          if (wi[y][x] < X) begin
            w_valid[y][x][0] = 1'b1; w_data[y][x][0] = wt[y][x][wi[y][x]];
          end else if (ar[y][x] < rounds && (!slow[y][x] || $urandom_range(0, 7) == 0)) begin
            a_valid[y][x] = 1'b1; a_data[y][x] = act[y][x][ar[y][x]][act_ix[y][x]];
          end
        end
      end
  end
  always @(posedge clk) begin
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        if (w_valid[y][x][0] && w_ready[y][x][0]) wi[y][x]++;
        if (a_valid[y][x] && a_ready[y][x]) begin
          if (act_ix[y][x] == X - 1) begin act_ix[y][x] = 0; ar[y][x]++; end
          else act_ix[y][x]++;
        end
      end
  end

  // ---------------- event counters ----------------
  int n_ina_inj = 0, n_ina_sum = 0, n_ina_stall = 0, n_g_inj = 0, n_load = 0, n_ld_stall = 0;
  always @(posedge clk) if (rst_n)
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        n_ina_inj   += int'(ev_ina_inj[y][x]);
        n_ina_sum   += int'(ev_ina_sum[y][x]);
        n_ina_stall += int'(ev_ina_stall[y][x]);
        n_g_inj     += int'(ev_gather_inj[y][x]);
        n_load      += int'(ev_load[y][x]);
        n_ld_stall  += int'(ev_ld_stall[y][x]);
      end

  // ---------------- host-side collection ----------------
  flit_t hq[MY][MX][$];
  always @(posedge clk) if (rst_n)
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++)
        if (host_valid[y][x]) hq[y][x].push_back(host_flit[y][x]);

  function automatic logic [31:0] dot(int y, int x, int r);
    logic [31:0] s; s = 0;
    for (int i = 0; i < X; i++) s += wt[y][x][i] * act[y][x][r][i];
    return s;
  endfunction

  // check the gather packets that left at (MX-1, y): one per round, slot x holds exp[x]
  task automatic check_gathers(int y, int nrounds, bit ina_layer);
    chk(hq[y][MX-1].size() == 3 * nrounds, $sformatf("gather packets at row %0d: %0d flits", y, hq[y][MX-1].size()));
    for (int r = 0; r < nrounds && hq[y][MX-1].size() >= 3; r++) begin
      flit_t h, b1, b2; head_t hd;
      h = hq[y][MX-1].pop_front(); b1 = hq[y][MX-1].pop_front(); b2 = hq[y][MX-1].pop_front();
      hd = head_t'(h.data);
      chk(h.ftype == FT_HEAD && b1.ftype == FT_BODY && b2.ftype == FT_TAIL && hd.ptype == PKT_GATHER,
          "gather framing");
      for (int x = 0; x < MX; x++) begin
        logic [31:0] e, g;
        if (ina_layer) e = dot(y - 3, x, r) + dot(y - 2, x, r) + dot(y - 1, x, r);
        else           e = dot(y, x, r);
        g = (x < 4) ? b1.data[x*32 +: 32] : b2.data[(x-4)*32 +: 32];
        chk(g == e, $sformatf("output (row %0d, col %0d, round %0d): got %h exp %h", y, x, r, g, e));
      end
    end
  endtask

  task automatic wait_idle(int flits_expected, int which_rows_mask);
    int got, t;
    t = 0;
    do begin
      got = 0;
      for (int y = 0; y < MY; y++) if (which_rows_mask[y]) got += hq[y][MX-1].size();
      @(posedge clk); t++;
    end while (got < flits_expected && t < 25000);
    repeat (50) @(posedge clk);
  endtask

  int cyc_a, cyc_b;
  initial begin
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        cfg[y][x] = '0; use_pe[y][x] = 0; slow[y][x] = 0; wi[y][x] = 0; act_ix[y][x] = 0; ar[y][x] = 0;
        w_valid[y][x][0] = 0; w_data[y][x][0] = 0; a_valid[y][x] = 0; a_data[y][x] = 0;
        for (int i = 0; i < X; i++) begin
          wt[y][x][i] = $urandom;
          for (int r = 0; r < 4; r++) act[y][x][r][i] = $urandom;
        end
      end
    rounds = RA;

    // ---------- layer A: INA over three PEs per output ----------
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        cfg_t c; c = '0;
        c.nweights = 14'(X);
        c.gather_body = 4'(MX / 4); c.gather_slot = 4'(x);
        case (y % 4)
          0: begin c.role = ROLE_INA_INIT; c.ina_dst_x = 4'(x); c.ina_dst_y = 4'(y + 3); use_pe[y][x] = 1; end
          1, 2: begin c.role = ROLE_INA_MEMBER; use_pe[y][x] = 1; slow[y][x] = 1; end
          default: begin
            c.role = ROLE_NONE;
            c.gather_grp = 16'(y);
            c.gather_init = (x == 0);
            c.gather_member = (x != 0);
            c.gather_dst_x = 4'(MX - 1); c.gather_dst_y = 4'(y);
          end
        endcase
        cfg[y][x] = c;
      end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    cyc_a = 0;
    fork
      begin wait_idle(2 * 3 * RA, 8'b1000_1000); end
      forever begin @(posedge clk); cyc_a++; end
    join_any
    disable fork;
    $display("layer A: %0d cycles", cyc_a);
    check_gathers(3, RA, 1);
    check_gathers(7, RA, 1);
    for (int y = 0; y < MY; y++) for (int x = 0; x < MX; x++) if (y % 4 != 3 || x != MX - 1)
      chk(hq[y][x].size() == 0, "unexpected flits at host port");
    chk(n_ina_inj == MX * 2 * RA, $sformatf("INA packets injected: %0d", n_ina_inj));
    chk(n_ina_sum == MX * 4 * RA, $sformatf("in-router accumulations: %0d", n_ina_sum));

    // ---------- layer B: no INA, every PE gathers along its row ----------
    @(negedge clk);
    pe_clear = 1;
    rounds = RB;
    for (int y = 0; y < MY; y++)
      for (int x = 0; x < MX; x++) begin
        cfg_t c; c = '0;
        c.nweights = 14'(X); c.role = ROLE_NONE;
        c.gather_body = 4'(MX / 4); c.gather_slot = 4'(x); c.gather_grp = 16'(100 + y);
        c.gather_init = (x == 0); c.gather_member = (x != 0);
        c.gather_dst_x = 4'(MX - 1); c.gather_dst_y = 4'(y);
        cfg[y][x] = c;
        use_pe[y][x] = 1; slow[y][x] = (x % 3 == 1); wi[y][x] = 0; act_ix[y][x] = 0; ar[y][x] = 0;
        for (int i = 0; i < X; i++) begin
          wt[y][x][i] = $urandom;
          for (int r = 0; r < 4; r++) act[y][x][r][i] = $urandom;
        end
      end
    @(negedge clk);
    pe_clear = 0;
    cyc_b = 0;
    fork
      begin wait_idle(MY * 3 * RB, 8'hFF); end
      forever begin @(posedge clk); cyc_b++; end
    join_any
    disable fork;
    $display("layer B: %0d cycles", cyc_b);
    for (int y = 0; y < MY; y++) check_gathers(y, RB, 0);

    $display("events: ina_inj=%0d ina_sum=%0d ina_stall=%0d gather_inj=%0d load=%0d load_stall=%0d",
             n_ina_inj, n_ina_sum, n_ina_stall, n_g_inj, n_load, n_ld_stall);
    chk(n_ina_inj > 0, "no INA packet injected");
    chk(n_ina_sum > 0, "no in-network accumulation");
    chk(n_ina_stall > 0, "no INA hold");
    chk(n_g_inj == 2 * RA + MY * RB, $sformatf("gather packets started: %0d", n_g_inj));
    chk(n_load == 2 * (MX - 1) * RA + MY * (MX - 1) * RB, $sformatf("payload loads: %0d", n_load));
    chk(n_ld_stall > 0, "no load hold");
    chk(cyc_b > 0, "mode switch to the non-INA layer did not run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
