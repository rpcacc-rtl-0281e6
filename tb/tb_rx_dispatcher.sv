// tb_rx_dispatcher: sends 200 random-length messages (byte stream, 'last' on
// the final byte) into the dispatcher; four modelled lanes report idle when
// not holding a message, take one random 5..40-cycle "processing" time after
// the last byte, and accept bytes with random ready.  Checks that every
// message is delivered whole, in order within itself, to a single idle lane,
// that bytes of different messages never mix, and that all lanes get work.
module tb_rx_dispatcher;
  localparam int NL = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, in_last = 0; logic [7:0] in_data = 0;
  logic [NL-1:0] lane_idle, lane_valid, lane_ready;
  logic [7:0] lane_data; logic lane_last;
  logic [$clog2(64):0] fifo_level;

  rx_dispatcher #(.NLANES(NL), .FIFO_DEPTH(64)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // byte b of message m = m*7 + b (mod 256); message m has len[m] bytes
  int lens [200];
  int busy [NL], cur_msg [NL], cur_b [NL], got [NL], delivered;
  bit mid [NL];
  bit seen [200];
  always @(posedge clk) begin
    if (!rst_n) begin
      lane_idle <= '1; lane_ready <= '0; delivered = 0;
      for (int i = 0; i < NL; i++) begin busy[i] = 0; mid[i] = 0; got[i] = 0; end
    end else begin
      for (int i = 0; i < NL; i++) begin
        if (lane_valid[i] && lane_ready[i]) begin
          check(busy[i] == 0, "byte sent to a lane that is processing");
          if (!mid[i]) begin  // first byte names the message (byte 0 = m)
            cur_msg[i] = int'(lane_data); cur_b[i] = 0; mid[i] = 1;
            check(!seen[cur_msg[i]], "message delivered twice");
            seen[cur_msg[i]] = 1;
          end else check(lane_data == 8'(cur_msg[i] * 7 + cur_b[i]), "message bytes mixed or reordered");
          cur_b[i]++;
          if (lane_last) begin
            check(cur_b[i] == lens[cur_msg[i]], "message length");
            mid[i] = 0; got[i]++; delivered++;
            busy[i] = $urandom_range(5, 40);
          end
        end else if (busy[i] > 0) busy[i]--;
        lane_idle[i] <= (busy[i] == 0) && !mid[i] && !(lane_valid[i] && lane_ready[i]);
        lane_ready[i] <= 1'($urandom);
      end
      check($onehot0(lane_valid), "more than one lane offered a byte");
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int m = 0; m < 200; m++) begin lens[m] = $urandom_range(1, 30); seen[m] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int m = 0; m < 200; m++)
      for (int b = 0; b < lens[m]; b++) begin
        @(negedge clk);
        in_valid = 1; in_data = (b == 0) ? 8'(m) : 8'(m * 7 + b); in_last = (b == lens[m] - 1);
        @(posedge clk); while (!in_ready) @(posedge clk);
        #1 in_valid = 0;
      end
    while (delivered < 200) @(posedge clk);
    for (int i = 0; i < NL; i++) check(got[i] > 10, $sformatf("lane %0d got messages (%0d)", i, got[i]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
