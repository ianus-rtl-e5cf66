// tb_iop_crossbar: random all-to-all traffic through the 17-port switch.
//
// Phase 1: every port sends 200 messages to random ports while every output
// is stalled at random. Each message carries its source and sequence number;
// a scoreboard per (source, destination) pair checks that each message
// arrives once, at the right output, with the right source tag and in order.
// Phase 2: three inputs hammer one output that is always ready; the grants
// must rotate 0, 1, 5, 0, 1, 5, ... one per cycle (round robin, full rate).
module tb_iop_crossbar;
  import ianus_pkg::*;
  localparam int NP = 17;

  logic clk = 0, rst_n = 0;
  logic [NP-1:0] in_valid, in_ready, out_valid, out_ready;
  logic [4:0]    in_dest [NP];
  logic [4:0]    out_src [NP];
  msg_t          in_msg  [NP];
  msg_t          out_msg [NP];
  int checks = 0, failures = 0, cycles = 0, contention = 0, stalls = 0;
  int sent [NP];
  logic [31:0] sb [NP][NP][$];   // [src][dst] expected data, in order
  bit phase2 = 0;
  int p2_seen [$];

  iop_crossbar #(.NP(NP), .ID_W(5)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Source side: keep a message waiting until it is taken.
  always @(posedge clk) begin
    if (rst_n && !phase2) begin
      for (int i = 0; i < NP; i++) begin
        if (in_valid[i] && in_ready[i]) begin
          sb[i][in_dest[i]].push_back(in_msg[i].data);
          sent[i]++;
          in_valid[i] <= 1'b0;
        end
        if ((!in_valid[i] || in_ready[i]) && sent[i] + (in_valid[i] && in_ready[i] ? 1 : 0) < 200
            && ($urandom % 3) != 0) begin
          int d;
          d = $urandom % NP;
          in_valid[i] <= 1'b1;
          in_dest[i]  <= 5'(d);
          in_msg[i]   <= '{op: OP_WRITE, addr: 16'(i),
                           data: {16'(i), 16'(sent[i] + (in_valid[i] && in_ready[i] ? 1 : 0))}};
        end
      end
      for (int o = 0; o < NP; o++) begin
        int nreq;
        nreq = 0;
        for (int i = 0; i < NP; i++) if (in_valid[i] && in_dest[i] == 5'(o)) nreq++;
        if (nreq > 1) contention++;
        if (out_valid[o] && !out_ready[o]) stalls++;
        out_ready[o] <= ($urandom % 4) != 0;
      end
    end
  end

  // Sink side
  always @(posedge clk) begin
    if (rst_n) begin
      for (int o = 0; o < NP; o++) begin
        if (out_valid[o] && out_ready[o]) begin
          if (!phase2) begin
            int s;
            s = int'(out_src[o]);
            checks++;
            if (s >= NP || out_msg[o].data[31:16] != 16'(s) || sb[s][o].size() == 0
                || sb[s][o][0] != out_msg[o].data) begin
              failures++;
              if (failures < 10) $display("FAIL out %0d src %0d data %h", o, s, out_msg[o].data);
            end else void'(sb[s][o].pop_front());
          end else p2_seen.push_back(int'(out_src[o]));
        end
      end
    end
  end

  initial begin
    in_valid = '0; out_ready = '0;
    for (int i = 0; i < NP; i++) begin
      sent[i] = 0; in_dest[i] = '0; in_msg[i] = '{op: OP_NOP, addr: '0, data: '0};
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (sent.sum() == NP * 200);
    @(posedge clk);
    // drain
    repeat (100) begin
      @(negedge clk);
      out_ready = '1;
    end
    for (int s = 0; s < NP; s++)
      for (int d = 0; d < NP; d++) begin
        checks++;
        if (sb[s][d].size() != 0) begin
          failures++; $display("FAIL %0d messages %0d->%0d lost", sb[s][d].size(), s, d);
        end
      end
    checks++;
    if (contention == 0 || stalls == 0) begin
      failures++; $display("FAIL no contention (%0d) or no stalls (%0d)", contention, stalls);
    end
    $display("phase 1: contention cycles %0d, stalled output cycles %0d", contention, stalls);

    // Phase 2: round robin among inputs 0, 1, 5 towards output 3.
    @(negedge clk);
    phase2 = 1;
    in_valid = '0;
    in_valid[0] = 1; in_valid[1] = 1; in_valid[5] = 1;
    in_dest[0] = 5'd3; in_dest[1] = 5'd3; in_dest[5] = 5'd3;
    out_ready = '1;
    repeat (16) @(posedge clk);
    checks++;
    if (p2_seen.size() < 12) begin
      failures++; $display("FAIL only %0d grants in phase 2", p2_seen.size());
    end else begin
      for (int k = 0; k < 12; k++) begin
        int exp_src;
        exp_src = (k % 3 == 0) ? 0 : (k % 3 == 1) ? 1 : 5;
        checks++;
        if (p2_seen[k] != exp_src) begin
          failures++; $display("FAIL grant %0d went to %0d, expected %0d", k, p2_seen[k], exp_src);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
