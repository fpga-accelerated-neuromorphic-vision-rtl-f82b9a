// tb_workload_peak_rate: one second of a camera's peak event output pushed
// through the grid clustering core, at its default parameters.
//
// A node of the detection system sees at most 250,000 events per second.
// This test sends that many events, as 1,000 batches of 250 (the host's
// batch size) inside the region of interest x in [20, 580], y in [20, 420],
// back to back on in_stream with TLAST on the last event of every batch,
// and takes out_stream with tready held high, as a DMA engine that keeps up
// would. Each result is compared with (y / 16, x / 16) computed here, TLAST
// must mark every 250th word, and the whole second of events must pass in
// 250,000 + 2 clocks (one event per clock plus the pipeline latency), i.e.
// 1.25 ms at 200 MHz. For every batch the testbench also counts the cells
// holding at least 5 events, the host's cluster threshold, and reports the
// total.
module tb_workload_peak_rate;
  import grid_pkg::*;

  localparam int BATCH    = 250;
  localparam int N_BATCH  = 1000;
  localparam int N_EVENTS = BATCH * N_BATCH;

  logic clk = 1'b0, rstn = 1'b0;
  event_word_t in_tdata;
  cell_word_t  out_tdata;
  logic        in_tvalid, in_tready, in_tlast;
  logic        out_tvalid, out_tready, out_tlast;
  logic [1:0]  bresp, rresp;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] rdata;

  grid_cluster_ip dut (
    .aclk(clk), .aresetn(rstn),
    .s_axi_control_awaddr('0), .s_axi_control_awvalid(1'b0), .s_axi_control_awready(awready),
    .s_axi_control_wdata('0), .s_axi_control_wstrb('0), .s_axi_control_wvalid(1'b0),
    .s_axi_control_wready(wready), .s_axi_control_bresp(bresp), .s_axi_control_bvalid(bvalid),
    .s_axi_control_bready(1'b1), .s_axi_control_araddr('0), .s_axi_control_arvalid(1'b0),
    .s_axi_control_arready(arready), .s_axi_control_rdata(rdata), .s_axi_control_rresp(rresp),
    .s_axi_control_rvalid(rvalid), .s_axi_control_rready(1'b1),
    .in_stream_tdata(in_tdata), .in_stream_tvalid(in_tvalid), .in_stream_tready(in_tready),
    .in_stream_tlast(in_tlast),
    .out_stream_tdata(out_tdata), .out_stream_tvalid(out_tvalid), .out_stream_tready(out_tready),
    .out_stream_tlast(out_tlast)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0, errors = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  logic [32:0] exp_q[$];     // {tlast, cell word}
  int n_in = 0, n_out = 0, n_clusters = 0;
  int first_in, last_out;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Source: all events back to back.
  initial begin
    in_tvalid = 1'b0; in_tlast = 1'b0; in_tdata = '0;
    repeat (4) @(negedge clk);
    rstn = 1'b1;
    @(negedge clk);
    for (int b = 0; b < N_BATCH; b++) begin
      int cnt[int];
      cnt.delete();
      for (int i = 0; i < BATCH; i++) begin
        logic [15:0] x, y;
        int key;
        // A quarter of each batch is one object's trail of close events.
        if (i % 4 == 0) begin
          x = 16'(100 + (b % 400) + $urandom_range(0, 3));
          y = 16'(200 + $urandom_range(0, 3));
        end else begin
          x = 16'($urandom_range(20, 580));
          y = 16'($urandom_range(20, 420));
        end
        in_tdata  = '{y: y, x: x};
        in_tlast  = (i == BATCH - 1);
        in_tvalid = 1'b1;
        #1;
        while (!in_tready) begin @(negedge clk); #1; end
        if (n_in == 0) first_in = cycle;
        exp_q.push_back({in_tlast, y / 16'd16, x / 16'd16});
        key = 65536 * int'(y[15:4]) + int'(x[15:4]);
        if (!cnt.exists(key)) cnt[key] = 0;
        cnt[key]++;
        n_in++;
        @(negedge clk);
      end
      foreach (cnt[k]) if (cnt[k] >= 5) n_clusters++;
    end
    in_tvalid = 1'b0;
  end

  // Sink: always ready.
  initial begin
    out_tready = 1'b1;
    forever begin
      @(negedge clk);
      #1;
      if (out_tvalid) begin
        logic [32:0] e;
        checks++;
        if (exp_q.size() == 0) begin
          errors++;
          failures++;
        end else begin
          e = exp_q.pop_front();
          if ({out_tlast, out_tdata} !== e) begin
            errors++;
            failures++;
            if (errors < 10)
              $display("FAIL word %0d: got 0x%09h expected 0x%09h", n_out, {out_tlast, out_tdata}, e);
          end
        end
        n_out++;
        last_out = cycle;
        if (n_out == N_EVENTS) begin
          if (errors != 0) $display("FAIL %0d of %0d words wrong", errors, N_EVENTS);
          checks++;
          if (last_out - first_in != N_EVENTS + 1) begin
            failures++;
            $display("FAIL %0d events took %0d clocks, expected %0d",
                     N_EVENTS, last_out - first_in + 1, N_EVENTS + 2);
          end
          checks++;
          if (n_clusters < N_BATCH) begin
            failures++;
            $display("FAIL only %0d cells over the threshold in %0d batches", n_clusters, N_BATCH);
          end
          repeat (3) @(negedge clk);
          checks++;
          if (out_tvalid) begin
            failures++;
            $display("FAIL extra output words");
          end
          $display("events=%0d clocks=%0d cells_over_threshold=%0d",
                   N_EVENTS, last_out - first_in + 1, n_clusters);
          $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
          $finish;
        end
      end
    end
  end
endmodule
