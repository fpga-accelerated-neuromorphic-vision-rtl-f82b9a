// tb_grid_quant_pipe: self-checking test of the three-stage pipeline.
//
// A source process feeds event words and a sink process takes results; both
// act half a clock away from the rising edge, so every handshake they see is
// the one the design sees at the next edge. Expected cells are computed here
// from the words sent (x / grid_size in the low half, y / grid_size in the
// high half, all ones for a zero grid_size) and kept in a queue, with TLAST.
//
// Phases:
//   1. full rate: 250 words back to back with out_tready high. Checks one
//      word accepted every clock (II = 1), a latency of 2 clocks from input
//      handshake to output handshake, and the total clock count 250 + 2.
//   2. random gaps on the input and random stalls on the output, with checks
//      that a stalled output word is held unchanged.
//   3. the same with other grid sizes (1, 7, 32, 640, 0), changed while the
//      pipeline is empty.
// It counts how often the input was stalled by back-pressure and fails if
// that never happened.
module tb_grid_quant_pipe;
  localparam int unsigned W = 16;
  localparam int unsigned BATCH = 250;

  logic           clk = 1'b0, rstn = 1'b0;
  logic [W-1:0]   gs;
  logic [2*W-1:0] in_tdata, out_tdata;
  logic           in_tvalid, in_tready, in_tlast;
  logic           out_tvalid, out_tready, out_tlast;

  int checks = 0, failures = 0;
  int cycle = 0;
  int stall_count = 0;
  int sent = 0, received = 0;
  int in_gap_pct = 0, out_stall_pct = 0;

  logic [2*W:0] exp_q[$];   // {tlast, cell word}
  int           acc_cycle_q[$];

  grid_quant_pipe dut (
    .aclk(clk), .aresetn(rstn), .grid_size(gs),
    .in_tdata(in_tdata), .in_tvalid(in_tvalid), .in_tready(in_tready), .in_tlast(in_tlast),
    .out_tdata(out_tdata), .out_tvalid(out_tvalid), .out_tready(out_tready), .out_tlast(out_tlast)
  );

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [W-1:0] q(logic [W-1:0] n, logic [W-1:0] d);
    return (d == 0) ? '1 : n / d;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sends n events of random coordinates below (xmax, ymax); the last carries TLAST.
  task automatic send_batch(int n, int xmax, int ymax);
    for (int i = 0; i < n; i++) begin
      logic [W-1:0] x, y;
      while ($urandom_range(0, 99) < in_gap_pct) begin
        in_tvalid = 1'b0;
        @(negedge clk);
      end
      x = W'($urandom_range(0, xmax));
      y = W'($urandom_range(0, ymax));
      in_tdata  = {y, x};
      in_tlast  = (i == n - 1);
      in_tvalid = 1'b1;
      #1;
      while (!in_tready) begin
        stall_count++;
        @(negedge clk);
        #1;
      end
      exp_q.push_back({in_tlast, q(y, gs), q(x, gs)});
      acc_cycle_q.push_back(cycle);
      sent++;
      @(negedge clk);
    end
    in_tvalid = 1'b0;
  endtask

  // Sink: random stalls, compares each taken word with the queue.
  logic [2*W:0] held;
  logic         was_stalled = 1'b0;
  int           last_latency;
  initial begin
    out_tready = 1'b0;
    forever begin
      @(negedge clk);
      if (was_stalled) begin
        checks++;
        if (!out_tvalid || {out_tlast, out_tdata} !== held) begin
          failures++;
          $display("FAIL stalled output word changed");
        end
      end
      out_tready = ($urandom_range(0, 99) >= out_stall_pct);
      #1;
      was_stalled = out_tvalid && !out_tready;
      held = {out_tlast, out_tdata};
      if (out_tvalid && out_tready) begin
        checks++;
        if (exp_q.size() == 0) begin
          failures++;
          $display("FAIL output word with nothing expected");
        end else begin
          logic [2*W:0] e;
          e = exp_q.pop_front();
          last_latency = cycle - acc_cycle_q.pop_front();
          if ({out_tlast, out_tdata} !== e) begin
            failures++;
            $display("FAIL got last=%0b cy=%0d cx=%0d, expected last=%0b cy=%0d cx=%0d",
                     out_tlast, out_tdata[2*W-1:W], out_tdata[W-1:0], e[2*W], e[2*W-1:W], e[W-1:0]);
          end
        end
        received++;
      end
    end
  end

  task automatic drain();
    int guard = 0;
    while (received != sent && guard < 10000) begin
      @(negedge clk);
      guard++;
    end
    repeat (3) @(negedge clk);
    checks++;
    if (received != sent || out_tvalid) begin
      failures++;
      $display("FAIL drain: sent %0d received %0d", sent, received);
    end
  endtask

  initial begin
    int t0, t1, lat_fail;
    in_tvalid = 1'b0;
    in_tdata  = '0;
    in_tlast  = 1'b0;
    gs        = 16'd16;
    repeat (3) @(negedge clk);
    rstn = 1'b1;
    @(negedge clk);

    // Phase 1: full rate.
    out_stall_pct = 0;
    in_gap_pct    = 0;
    t0 = cycle;
    send_batch(BATCH, 639, 479);
    t1 = cycle;
    checks++;
    if (t1 - t0 != BATCH) begin
      failures++;
      $display("FAIL %0d words took %0d clocks at the input, expected %0d (II=1)", BATCH, t1 - t0, BATCH);
    end
    drain();
    checks++;
    if (last_latency != 2) begin
      failures++;
      $display("FAIL latency %0d clocks, expected 2", last_latency);
    end
    checks++;
    if (cycle - t0 > BATCH + 2 + 4) begin
      failures++;
      $display("FAIL batch end to end took %0d clocks", cycle - t0);
    end

    // Phase 2: random gaps and stalls.
    in_gap_pct    = 30;
    out_stall_pct = 40;
    send_batch(BATCH, 639, 479);
    drain();
    send_batch(BATCH, 65535, 65535);
    drain();

    // Phase 3: other grid sizes, changed with the pipeline empty.
    foreach (gs_list[i]) begin
      gs = gs_list[i];
      send_batch(100, 65535, 65535);
      drain();
    end

    checks++;
    if (stall_count == 0) begin
      failures++;
      $display("FAIL back-pressure never stalled the input");
    end
    $display("input stalls by back-pressure: %0d, words: %0d", stall_count, received);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [W-1:0] gs_list[5] = '{16'd1, 16'd7, 16'd32, 16'd640, 16'd0};
endmodule
