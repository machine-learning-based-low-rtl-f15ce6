// tb_distress_channel -- self-checking test of the TDM status channel.
//
// Sink status words change at random. The testbench keeps its own slot
// counter and a history of the inputs; after every clock edge each table
// entry must equal the input of its sink as it was at the most recent edge
// in which that sink's slot was on the link, PIPE edges earlier. A separate
// measurement flips one sink's congestion bit and checks that the sources
// see it within FRAME + PIPE = 10 cycles, the delay budget of the design.
module tb_distress_channel;
  import cc_pkg::*;
  localparam int unsigned NUM_SINKS = 36, LANES = 6, PIPE = 4;
  localparam int unsigned FRAME = (NUM_SINKS + LANES - 1) / LANES;

  logic clk = 0, rst_n = 0;
  sink_status_t status_in [NUM_SINKS];
  sink_status_t status_out [NUM_SINKS];
  sink_status_t hist [64][NUM_SINKS];
  int checks = 0, failures = 0;
  int k;
  int max_lat = 0;

  distress_channel #(.NUM_SINKS(NUM_SINKS), .LANES(LANES), .PIPE(PIPE)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < NUM_SINKS; s++) status_in[s] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    k = 0;
    for (int c = 0; c < 3000; c++) begin
      for (int s = 0; s < NUM_SINKS; s++)
        if ($urandom_range(0, 99) < 10) status_in[s] = sink_status_t'($urandom);
      @(posedge clk);
      for (int s = 0; s < NUM_SINKS; s++) hist[k % 64][s] = status_in[s];
      @(negedge clk);
      for (int s = 0; s < NUM_SINKS; s++) begin
        int slot, base, kk;
        sink_status_t exp_s;
        slot = s / LANES;
        base = k - int'(PIPE);
        if (base < slot) exp_s = '0;
        else begin
          kk = base - ((base - slot) % FRAME);
          exp_s = hist[kk % 64][s];
        end
        check(status_out[s] == exp_s, "table entry");
      end
      k++;
    end
    // latency of a single change, every sink
    for (int s = 0; s < NUM_SINKS; s++) begin
      int lat;
      status_in[s].cong = ~status_in[s].cong;
      lat = 0;
      while (status_out[s].cong != status_in[s].cong && lat < 50) begin
        @(negedge clk);
        lat++;
      end
      if (lat > max_lat) max_lat = lat;
      check(lat <= int'(FRAME + PIPE), "change seen within FRAME+PIPE cycles");
      check(lat >= int'(PIPE), "channel has its pipeline delay");
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    $display("max latency = %0d cycles", max_lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
