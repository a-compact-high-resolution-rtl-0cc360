// tb_config_rx: feeds configuration frames, with frame check sequence, as a
// byte stream with random gaps, and checks that a frame for this board with
// the right protocol number sets run, line mask, delay and the data
// destination and delivers every command bit-exact (with cmd_ready held off
// at random), and that frames with a wrong identifier, wrong protocol number
// or a non-IP EtherType change nothing and are counted as ignored.
module tb_config_rx;
  import mst_pkg::*;
  import eth_tb_pkg::*;
  localparam logic [15:0] PROTO = 16'h4D53;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, in_ready, cmd_valid, cmd_ready = 0, run;
  logic [7:0] in_data = 0, line_mask;
  logic [31:0] board_id = 32'h0BAD_CAFE, peer_ip;
  logic [CMD_W-1:0] cmd_bits;
  logic [CMD_LEN_W-1:0] cmd_len;
  logic [15:0] delay, peer_port, cfg_accepted, frames_ignored;
  logic [47:0] peer_mac;
  int checks = 0, failures = 0;
  always #12.5 clk = ~clk;

  config_rx #(.CFG_PROTO(PROTO)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  cmd_t got[$];
  always @(posedge clk) begin
    cmd_ready <= ($urandom_range(0, 4) == 0);
    if (rst_n && cmd_valid && cmd_ready) got.push_back('{int'(cmd_len), cmd_bits});
  end

  task automatic send(input bq_t f);
    foreach (f[i]) begin
      in_valid = 0;
      repeat ($urandom_range(0, 2)) @(negedge clk);
      in_valid = 1; in_data = f[i]; in_last = (i == f.size() - 1);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
    end
    in_valid = 0; in_last = 0;
  endtask

  initial begin
    cmdq_t cmds;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (3) @(negedge clk);
    check(!run && line_mask == 8'hFF, "reset settings");
    cmds = {};
    for (int k = 0; k < 5; k++) begin
      cmd_t c;
      c.len = $urandom_range(3, 64);
      c.bits = {$urandom, $urandom} & ~(64'hFFFF_FFFF_FFFF_FFFF >> c.len);
      cmds.push_back(c);
    end
    // wrong board
    send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, PROTO, 32'h12345678, 8'h01, 8'h0F, 16'd99, cmds)));
    // wrong protocol
    send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, 16'h1234, board_id, 8'h01, 8'h0F, 16'd99, cmds)));
    // not IPv4
    send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, PROTO, board_id, 8'h01, 8'h0F, 16'd99, cmds, 16'h86DD)));
    // IDs that differ from this board's in one byte only
    for (int k = 0; k < 4; k++)
      send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, PROTO, board_id ^ (32'h1 << (8*k)),
                                8'h01, 8'h0F, 16'd99, cmds)));
    repeat (20) @(negedge clk);
    check(!run && delay == 0 && got.size() == 0 && cfg_accepted == 0, "foreign frames change nothing");
    check(frames_ignored == 7, $sformatf("seven frames ignored (%0d)", frames_ignored));
    // good frame
    send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, PROTO, board_id, 8'h01, 8'h5A, 16'd123, cmds)));
    repeat (100) @(negedge clk);
    check(run && line_mask == 8'h5A && delay == 16'd123, "settings applied");
    check(peer_mac == 48'h001122334455 && peer_ip == 32'hC0A80A01 && peer_port == 16'd6001, "data destination taken from the sender");
    check(cfg_accepted == 1, "accepted count");
    check(got.size() == cmds.size(), $sformatf("%0d commands", got.size()));
    foreach (cmds[i]) if (i < got.size())
      check(got[i].len == cmds[i].len && got[i].bits == cmds[i].bits, $sformatf("command %0d", i));
    // a second good frame with no commands switches the run off
    cmds = {};
    send(with_fcs(make_config(48'h001122334455, 32'hC0A80A01, 16'd6001, PROTO, board_id, 8'h00, 8'hFF, 16'd7, cmds)));
    repeat (20) @(negedge clk);
    check(!run && delay == 16'd7 && cfg_accepted == 2, "second configuration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
