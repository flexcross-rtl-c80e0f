// tb_pu_firewall: self-checking test of pu_firewall.
// Source ports 1000 and 2000 are put on the block list; packets from them must vanish,
// all others must pass unchanged, and drop_count must count the blocked packets.
// Packets of random size are driven with random gaps while the output applies random
// backpressure; every output packet is compared beat by beat with the expected one,
// worked out here from the frame contents and the configured table.
module tb_pu_firewall;
  import flexcross_pkg::*;
  import tb_pkt_pkg::*;
  localparam int SIZES [6] = '{64, 128, 256, 512, 1024, 1518};
  logic clk = 0, rst = 1;
  beat_t s_beat, m_beat;
  logic s_valid = 0, s_ready, m_valid, m_ready = 1;
  int checks = 0, failures = 0;
  logic cfg_we = 0, cfg_valid = 0;
  logic [2:0] cfg_idx = 0;
  logic [15:0] cfg_port = 0;
  logic [31:0] drop_count;
  int n_block = 0;
  localparam int PORTS [5] = '{1000, 2000, 3000, 4000, 5};

  pu_firewall dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", msg); end
  endtask

  // expected output packets, in order
  bq_t exp_f [$];
  int  exp_port [$];
  int  got = 0, beat_i = 0, sent = 0;
  bit  rand_ready = 1;

  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    chk(exp_f.size() > 0, "unexpected output packet");
    if (exp_f.size() > 0) begin
      chk(m_beat.tdata == beat_data(exp_f[0], beat_i) && m_beat.tkeep == beat_keep(exp_f[0], beat_i),
          $sformatf("data pkt %0d beat %0d", got, beat_i));
      chk(m_beat.tlast == (beat_i == nbeats(exp_f[0].size()) - 1), "tlast");
      chk(exp_port[0] < 0 || int'(m_beat.tuser.eth_port) == exp_port[0],
          $sformatf("eth_port %0d exp %0d", m_beat.tuser.eth_port, exp_port[0]));
      chk(m_beat.tuser.pkt_len == 16'(exp_f[0].size()), "metadata passes");
      beat_i++;
      if (m_beat.tlast) begin
        void'(exp_f.pop_front()); void'(exp_port.pop_front());
        beat_i = 0; got++;
      end
    end
  end

  always @(posedge clk) begin
    #1 m_ready = rand_ready ? (($urandom % 4) != 0) : 1'b1;
  end

  task automatic send(input bq_t f);
    meta_t m = simple_meta(f.size(), 0);
    for (int b = 0; b < nbeats(f.size()); b++) begin
      s_beat = frame_beat(f, b, m);
      s_valid = 1;
      do @(posedge clk); while (!s_ready);
      #1;
      if (($urandom % 5) == 0) begin s_valid = 0; @(posedge clk); #1; end
    end
    s_valid = 0;
    sent++;
  endtask

  initial begin
    int latency;

    repeat (3) @(posedge clk);
    #1 rst = 0;
    cfg_we = 1; cfg_idx = 3'd2; cfg_valid = 1; cfg_port = 16'd1000; @(posedge clk); #1;
    cfg_idx = 3'd5; cfg_port = 16'd2000; @(posedge clk); #1;
    cfg_idx = 3'd6; cfg_port = 16'd3000; @(posedge clk); #1;
    cfg_valid = 0; @(posedge clk); #1;   // entry 6 written invalid again: 3000 passes
    cfg_we = 0;
    // latency: one single-beat packet, output ready
    rand_ready = 0;
    @(posedge clk); #1;
    begin
      bq_t f0 = make_frame(64, 16'd7, 16'd9, 32'h0B00_0001, 32'd1, 8'h00);
      exp_f.push_back(f0); exp_port.push_back(-1);
      send(f0);
      latency = 0;
      while (!m_valid) begin @(posedge clk); #1; latency++; end
      chk(latency == 0, $sformatf("output one cycle after input, got %0d extra", latency));
      @(posedge clk); #1;
    end
    rand_ready = 1;
    for (int k = 0; k < 300; k++) begin
      automatic int len = SIZES[$urandom % 6];
      automatic int sp = PORTS[$urandom % 5];
      automatic bq_t f = make_frame(len, 16'(sp), 16'(k), 32'h0B00_0001, 32'(k + 10), 8'h00);
      if (sp == 1000 || sp == 2000) n_block++;
      else begin exp_f.push_back(f); exp_port.push_back(-1); end
      send(f);
    end
    rand_ready = 0;
    repeat (200) @(posedge clk);
    chk(exp_f.size() == 0, $sformatf("%0d packets missing", exp_f.size()));
    chk(drop_count == 32'(n_block), $sformatf("drop_count %0d exp %0d", drop_count, n_block));
    chk(n_block > 0, "some packets blocked");
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
