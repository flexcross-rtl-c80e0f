// tb_parser: self-checking test of the Parser.
// Sends IPv4/UDP frames with random sizes, destination ports and TOS values and checks
// the metadata on every beat: packet size (frame length), flow type (destination port
// mod 4), priority (TOS bits 7:5), task sequence and first task from the reset flow
// table (the four sequences of the paper's first scenario), step 0, and one timestamp
// per packet that grows from packet to packet. Also checks a run-time rewrite of the flow
// table, an IPv6 frame, a non-IP frame (size 1518), data pass-through and the
// one-cycle latency.
module tb_parser;
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;
  localparam int SIZES [6] = '{64, 128, 256, 512, 1024, 1518};
  logic clk = 0, rst = 1;
  logic [DATA_W-1:0] s_tdata;
  logic [KEEP_W-1:0] s_tkeep;
  logic s_tlast, s_tvalid = 0, s_tready;
  beat_t m_beat;
  logic m_valid, m_ready = 1;
  logic cfg_we = 0;
  logic [1:0] cfg_flow = 0;
  task_seq_t cfg_seq = '0;
  int checks = 0, failures = 0;

  parser #(.NUM_FLOWS(4)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  task_seq_t flows [4];
  bq_t   exp_f [$];
  meta_t exp_m [$];
  int beat_i = 0;
  logic [31:0] ts, last_ts = 0;

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    chk(exp_f.size() > 0, "unexpected beat");
    if (exp_f.size() > 0) begin
      chk(m_beat.tdata == beat_data(exp_f[0], beat_i) && m_beat.tkeep == beat_keep(exp_f[0], beat_i), "data");
      chk(m_beat.tlast == (beat_i == nbeats(exp_f[0].size()) - 1), "tlast");
      chk(m_beat.tuser.pkt_len == exp_m[0].pkt_len, $sformatf("pkt_len %0d exp %0d", m_beat.tuser.pkt_len, exp_m[0].pkt_len));
      chk(m_beat.tuser.flow_type == exp_m[0].flow_type, "flow_type");
      chk(m_beat.tuser.prio == exp_m[0].prio, "prio");
      chk(m_beat.tuser.task_seq == exp_m[0].task_seq, "task_seq");
      chk(m_beat.tuser.next_task == exp_m[0].task_seq[0] && m_beat.tuser.step == 0, "next_task/step");
      if (beat_i == 0) begin
        ts = m_beat.tuser.timestamp;
        chk(ts > last_ts, "timestamp grows");
        last_ts = ts;
      end else chk(m_beat.tuser.timestamp == ts, "timestamp held");
      beat_i++;
      if (m_beat.tlast) begin void'(exp_f.pop_front()); void'(exp_m.pop_front()); beat_i = 0; end
    end
  end

  always @(posedge clk) #1 m_ready = ($urandom % 4) != 0;

  task automatic send(input bq_t f, input meta_t m);
    exp_f.push_back(f);
    exp_m.push_back(m);
    for (int b = 0; b < nbeats(f.size()); b++) begin
      s_tdata = beat_data(f, b); s_tkeep = beat_keep(f, b);
      s_tlast = (b == nbeats(f.size()) - 1);
      s_tvalid = 1;
      do @(posedge clk); while (!s_tready);
      #1;
    end
    s_tvalid = 0;
  endtask

  function automatic meta_t expect_meta(input int len, input int dport, input logic [7:0] tos);
    meta_t m = '0;
    m.pkt_len = 16'(len);
    m.flow_type = 4'(dport % 4);
    m.prio = tos[7:5];
    m.task_seq = flows[dport % 4];
    return m;
  endfunction

  initial begin
    flows[0] = mk_seq(1, 2, 4, 6, 3, 0, 0);   // CRC, FW, AES, LB, NAT
    flows[1] = mk_seq(2, 3, 4, 5, 0, 0, 0);   // FW, NAT, AES, router
    flows[2] = mk_seq(1, 4, 5, 0, 0, 0, 0);   // CRC, AES, router
    flows[3] = mk_seq(1, 6, 0, 0, 0, 0, 0);   // CRC, LB
    repeat (3) @(posedge clk);
    #1 rst = 0;
    @(posedge clk); #1;
    // latency: beat in at edge t is presented from t on (m_valid after that edge)
    begin
      bq_t f = make_frame(64, 16'd1, 16'd2, 32'h0B000001, 32'd1, 8'hE0);
      exp_f.push_back(f); exp_m.push_back(expect_meta(64, 2, 8'hE0));
      s_tdata = beat_data(f, 0); s_tkeep = beat_keep(f, 0); s_tlast = 1; s_tvalid = 1;
      @(posedge clk); #1 s_tvalid = 0;
      chk(m_valid, "one-cycle latency");
      repeat (4) @(posedge clk); #1;
    end
    for (int k = 0; k < 200; k++) begin
      automatic int len = SIZES[$urandom % 6];
      automatic int dp  = $urandom % 65536;
      automatic logic [7:0] tos = 8'($urandom);
      send(make_frame(len, 16'd5, 16'(dp), 32'h0B000001, 32'(k), tos), expect_meta(len, dp, tos));
      if (k == 100) begin
        // run-time remap of flow 2 to NAT -> router
        cfg_we = 1; cfg_flow = 2'd2; cfg_seq = mk_seq(3, 5, 0, 0, 0, 0, 0);
        @(posedge clk); #1 cfg_we = 0;
        flows[2] = mk_seq(3, 5, 0, 0, 0, 0, 0);
      end
    end
    // IPv6 / UDP: payload length 100, traffic class 0xA0 -> prio 5, dst port 7 -> flow 3
    begin
      bq_t f = make_frame(154, 16'd5, 16'd7, 32'h0B000001, 32'd999, 8'h00);
      meta_t m = '0;
      f[12] = 8'h86; f[13] = 8'hDD;
      f[14] = 8'h6A; f[15] = 8'h00; f[18] = 8'd0; f[19] = 8'd100; f[20] = 8'd17;
      f[54] = 8'd0; f[55] = 8'd5; f[56] = 8'd0; f[57] = 8'd7;
      m.pkt_len = 16'd154; m.flow_type = 4'd3; m.prio = 3'd5; m.task_seq = flows[3];
      send(f, m);
    end
    // non-IP frame
    begin
      bq_t f = make_frame(128, 16'd5, 16'd6, 32'h0B000001, 32'd998, 8'h00);
      meta_t m = '0;
      f[12] = 8'h88; f[13] = 8'hB5;
      m.pkt_len = 16'd1518; m.flow_type = 4'd0; m.task_seq = flows[0];
      send(f, m);
    end
    repeat (50) @(posedge clk);
    chk(exp_f.size() == 0, "all packets out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
