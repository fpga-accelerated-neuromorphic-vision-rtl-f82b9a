// tb_grid_cluster_ip: end-to-end test of the grid clustering core at its
// default parameters.
//
// The testbench plays the parts around the core: the processor programming
// grid_size over AXI4-Lite, the DMA engine streaming event batches in and
// results out, and the host software that groups the returned cells into
// clusters. Each batch is 250 events inside the region of interest
// x in [20, 580], y in [20, 420]: a few tight groups of events, each
// standing for an object crossing one cell, plus scattered noise. The last
// event of a batch carries TLAST.
//
// Checks:
//   * every returned word equals (y / grid_size, x / grid_size) of its event,
//     in order, with TLAST only on the last word of the batch;
//   * grid_size reads back as 16 after reset and as written afterwards;
//   * a batch at full rate is taken in 250 clocks (one event per clock) and
//     its last result appears 2 clocks after its last event;
//   * host-side clustering of the returned cells (count per cell, keep cells
//     with at least 5 events, centroid of their pixels) finds every planted
//     group, with the centroid the testbench computes from the pixels alone.
// Counted mechanisms, each of which must happen at least once: output
// back-pressure stalling the input, gaps in the input stream, a full-rate
// batch, a change of grid_size between batches, TLAST, and clusters that
// pass and cells that fail the event threshold.
module tb_grid_cluster_ip;
  import grid_pkg::*;

  localparam int BATCH      = 250;
  localparam int MIN_EVENTS = 5;
  localparam int ROI_X0 = 20, ROI_Y0 = 20, ROI_X1 = 580, ROI_Y1 = 420;

  logic clk = 1'b0, rstn = 1'b0;

  logic [AXIL_ADDR_W-1:0] awaddr, araddr;
  logic        awvalid, awready, wvalid, wready, bvalid, bready;
  logic        arvalid, arready, rvalid, rready;
  logic [31:0] wdata, rdata;
  logic [3:0]  wstrb;
  logic [1:0]  bresp, rresp;

  event_word_t in_tdata;
  cell_word_t  out_tdata;
  logic        in_tvalid, in_tready, in_tlast;
  logic        out_tvalid, out_tready, out_tlast;

  grid_cluster_ip dut (
    .aclk(clk), .aresetn(rstn),
    .s_axi_control_awaddr(awaddr), .s_axi_control_awvalid(awvalid), .s_axi_control_awready(awready),
    .s_axi_control_wdata(wdata), .s_axi_control_wstrb(wstrb), .s_axi_control_wvalid(wvalid),
    .s_axi_control_wready(wready), .s_axi_control_bresp(bresp), .s_axi_control_bvalid(bvalid),
    .s_axi_control_bready(bready), .s_axi_control_araddr(araddr), .s_axi_control_arvalid(arvalid),
    .s_axi_control_arready(arready), .s_axi_control_rdata(rdata), .s_axi_control_rresp(rresp),
    .s_axi_control_rvalid(rvalid), .s_axi_control_rready(rready),
    .in_stream_tdata(in_tdata), .in_stream_tvalid(in_tvalid), .in_stream_tready(in_tready),
    .in_stream_tlast(in_tlast),
    .out_stream_tdata(out_tdata), .out_stream_tvalid(out_tvalid), .out_stream_tready(out_tready),
    .out_stream_tlast(out_tlast)
  );

  always #5 clk = ~clk;   // any period; the core's nominal clock is 200 MHz

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_backpressure = 0, n_gap = 0, n_fullrate = 0, n_reconfig = 0;
  int n_tlast = 0, n_clusters = 0, n_below = 0;

  int in_gap_pct = 0, out_stall_pct = 0;
  int          cur_gs;

  // One batch: pixels sent and cells returned.
  int          bx[BATCH], by[BATCH];
  cell_word_t  got[BATCH];
  logic        got_last[BATCH];
  int          n_got;
  int          acc_first, acc_last, out_last_cycle;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---------------- AXI4-Lite master ----------------
  task automatic axil_write(logic [AXIL_ADDR_W-1:0] a, logic [31:0] d);
    @(negedge clk);
    awaddr = a; awvalid = 1'b1; wdata = d; wstrb = 4'hF; wvalid = 1'b1; bready = 1'b1;
    #1;
    while (awvalid || wvalid) begin
      logic aw_done, w_done;
      aw_done = awready;
      w_done  = wready;
      @(negedge clk);
      if (aw_done) awvalid = 1'b0;
      if (w_done)  wvalid  = 1'b0;
      #1;
    end
    while (!bvalid) begin @(negedge clk); #1; end
    check(bresp == RESP_OKAY, "write response OKAY");
    @(negedge clk);
    bready = 1'b0;
  endtask

  task automatic axil_read(logic [AXIL_ADDR_W-1:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1'b1; rready = 1'b1;
    #1;
    while (!arready) begin @(negedge clk); #1; end
    @(negedge clk);
    arvalid = 1'b0;
    #1;
    while (!rvalid) begin @(negedge clk); #1; end
    d = rdata;
    check(rresp == RESP_OKAY, "read response OKAY");
    @(negedge clk);
    rready = 1'b0;
  endtask

  task automatic set_grid_size(logic [15:0] g);
    logic [31:0] d;
    axil_write(REG_GRID_SIZE, {16'h0, g});
    axil_read(REG_GRID_SIZE, d);
    check(d == {16'h0, g}, $sformatf("grid_size reads back %0d", g));
    if (int'(g) != cur_gs) n_reconfig++;
    cur_gs = int'(g);
  endtask

  // ---------------- batch generation ----------------
  // n_groups tight groups of group_n events inside one cell each; the rest
  // is noise spread over the region of interest.
  int planted_cx[$], planted_cy[$], planted_n[$];
  task automatic make_batch(int n_groups, int group_n);
    int k = 0;
    planted_cx.delete(); planted_cy.delete(); planted_n.delete();
    for (int g = 0; g < n_groups; g++) begin
      int cx, cy;
      bit clash;
      // Pick a cell fully inside the region, not used by another group.
      do begin
        cx = $urandom_range((ROI_X0 + cur_gs - 1) / cur_gs, ROI_X1 / cur_gs - 1);
        cy = $urandom_range((ROI_Y0 + cur_gs - 1) / cur_gs, ROI_Y1 / cur_gs - 1);
        clash = 0;
        foreach (planted_cx[i]) if (planted_cx[i] == cx && planted_cy[i] == cy) clash = 1;
      end while (clash);
      planted_cx.push_back(cx);
      planted_cy.push_back(cy);
      planted_n.push_back(group_n);
      for (int e = 0; e < group_n; e++) begin
        bx[k] = cx * cur_gs + int'($urandom_range(0, cur_gs - 1));
        by[k] = cy * cur_gs + int'($urandom_range(0, cur_gs - 1));
        k++;
      end
    end
    for (; k < BATCH; k++) begin
      bx[k] = int'($urandom_range(ROI_X0, ROI_X1));
      by[k] = int'($urandom_range(ROI_Y0, ROI_Y1));
    end
    // Shuffle so groups and noise interleave, as in a real event stream.
    for (int i = BATCH - 1; i > 0; i--) begin
      int j = $urandom_range(0, i);
      int t;
      t = bx[i]; bx[i] = bx[j]; bx[j] = t;
      t = by[i]; by[i] = by[j]; by[j] = t;
    end
  endtask

  // ---------------- streaming ----------------
  task automatic stream_in();
    for (int i = 0; i < BATCH; i++) begin
      while ($urandom_range(0, 99) < in_gap_pct) begin
        in_tvalid = 1'b0;
        n_gap++;
        @(negedge clk);
      end
      in_tdata  = '{y: 16'(by[i]), x: 16'(bx[i])};
      in_tlast  = (i == BATCH - 1);
      in_tvalid = 1'b1;
      #1;
      while (!in_tready) begin
        n_backpressure++;
        @(negedge clk);
        #1;
      end
      if (i == 0) acc_first = cycle;
      if (i == BATCH - 1) acc_last = cycle;
      @(negedge clk);
    end
    in_tvalid = 1'b0;
    in_tlast  = 1'b0;
  endtask

  task automatic stream_out();
    n_got = 0;
    while (n_got < BATCH) begin
      @(negedge clk);
      out_tready = ($urandom_range(0, 99) >= out_stall_pct);
      #1;
      if (out_tvalid && out_tready) begin
        got[n_got]      = out_tdata;
        got_last[n_got] = out_tlast;
        out_last_cycle  = cycle;
        n_got++;
      end
    end
    @(negedge clk);
    out_tready = 1'b0;
  endtask

  // ---------------- host-side clustering ----------------
  task automatic check_batch();
    int cnt[int];
    longint sx[int], sy[int];
    for (int i = 0; i < BATCH; i++) begin
      int ecx, ecy, key;
      ecx = bx[i] / cur_gs;
      ecy = by[i] / cur_gs;
      check(got[i].cell_x == 16'(ecx) && got[i].cell_y == 16'(ecy),
            $sformatf("event %0d (%0d,%0d): cell (%0d,%0d) expected (%0d,%0d)",
                      i, bx[i], by[i], got[i].cell_x, got[i].cell_y, ecx, ecy));
      check(got_last[i] == (i == BATCH - 1), $sformatf("TLAST on word %0d", i));
      if (got_last[i]) n_tlast++;
      // Cluster formation works on the cells the core returned.
      key = int'(got[i].cell_y) * 65536 + int'(got[i].cell_x);
      if (!cnt.exists(key)) begin cnt[key] = 0; sx[key] = 0; sy[key] = 0; end
      cnt[key]++;
      sx[key] += longint'(bx[i]);
      sy[key] += longint'(by[i]);
    end
    foreach (cnt[key]) begin
      if (cnt[key] >= MIN_EVENTS) n_clusters++;
      else n_below++;
    end
    // Every planted group must come out as a cluster whose centroid lies in
    // its cell and equals the mean of the pixels that fall in that cell.
    foreach (planted_cx[g]) begin
      int key, n;
      longint mx, my;
      key = planted_cy[g] * 65536 + planted_cx[g];
      n = 0; mx = 0; my = 0;
      for (int i = 0; i < BATCH; i++)
        if (bx[i] / cur_gs == planted_cx[g] && by[i] / cur_gs == planted_cy[g]) begin
          n++; mx += longint'(bx[i]); my += longint'(by[i]);
        end
      check(cnt.exists(key) && cnt[key] == n && n >= MIN_EVENTS,
            $sformatf("planted group in cell (%0d,%0d) found as a cluster", planted_cx[g], planted_cy[g]));
      if (cnt.exists(key) && n > 0)
        check(sx[key] / longint'(cnt[key]) == mx / longint'(n) && sy[key] / longint'(cnt[key]) == my / longint'(n),
              $sformatf("centroid of cluster (%0d,%0d)", planted_cx[g], planted_cy[g]));
    end
  endtask

  task automatic run_batch(int n_groups, int group_n, int gap, int stall);
    in_gap_pct    = gap;
    out_stall_pct = stall;
    make_batch(n_groups, group_n);
    fork
      stream_in();
      stream_out();
    join
    check_batch();
  endtask

  initial begin
    logic [31:0] d;
    awvalid = 0; wvalid = 0; bready = 0; arvalid = 0; rready = 0;
    awaddr = 0; araddr = 0; wdata = 0; wstrb = 0;
    in_tvalid = 0; in_tlast = 0; in_tdata = '0; out_tready = 0;
    repeat (4) @(negedge clk);
    rstn = 1'b1;

    // After reset the core divides by 16.
    axil_read(REG_GRID_SIZE, d);
    check(d == 32'd16, $sformatf("grid_size after reset is %0d, expected 16", d));
    cur_gs = 16;

    // Batch 1: full rate, one event per clock.
    run_batch(3, 12, 0, 0);
    check(acc_last - acc_first == BATCH - 1,
          $sformatf("full-rate batch accepted over %0d clocks, expected %0d", acc_last - acc_first + 1, BATCH));
    check(out_last_cycle - acc_last == 2,
          $sformatf("last result %0d clocks after last event, expected 2", out_last_cycle - acc_last));
    if (acc_last - acc_first == BATCH - 1) n_fullrate++;

    // Batches 2-4: gaps and back-pressure.
    run_batch(4, 8, 20, 30);
    run_batch(2, 20, 50, 10);
    run_batch(5, MIN_EVENTS, 5, 60);

    // Change the grid and run again.
    set_grid_size(16'd32);
    run_batch(3, 10, 20, 30);
    set_grid_size(16'd8);
    run_batch(4, 6, 10, 20);
    set_grid_size(16'd16);
    run_batch(3, 12, 0, 0);

    $display("backpressure=%0d gaps=%0d fullrate=%0d reconfig=%0d tlast=%0d clusters=%0d below_threshold=%0d",
             n_backpressure, n_gap, n_fullrate, n_reconfig, n_tlast, n_clusters, n_below);
    check(n_backpressure > 0, "output back-pressure happened");
    check(n_gap > 0, "input gaps happened");
    check(n_fullrate > 0, "a full-rate batch happened");
    check(n_reconfig > 0, "grid_size was changed");
    check(n_tlast > 0, "TLAST came through");
    check(n_clusters > 0, "clusters passed the threshold");
    check(n_below > 0, "cells fell below the threshold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
