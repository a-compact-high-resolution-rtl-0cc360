// async_fifo: dual-clock FIFO used to pass Ethernet byte streams between the
// 40 MHz readout clock and the 25 MHz RGMII clocks.
//
// Classic Gray-code pointer design: binary read and write pointers, Gray
// copies passed through two-flop synchronisers, full and empty computed from
// the synchronised Gray pointers.  Depth is 2**AW words.  Show-ahead read side:
// rd_data is the oldest word whenever rd_valid is high, and rd_ready pops it.
// wr_ready is low when full.  This is a standard helper, not part of the
// tracker design itself.
module async_fifo #(
  parameter int unsigned W  = 9,
  parameter int unsigned AW = 11
) (
  input  logic         wr_clk,
  input  logic         wr_rst_n,
  input  logic         wr_valid,
  input  logic [W-1:0] wr_data,
  output logic         wr_ready,
  input  logic         rd_clk,
  input  logic         rd_rst_n,
  output logic         rd_valid,
  output logic [W-1:0] rd_data,
  input  logic         rd_ready
);
  logic [W-1:0] mem [2**AW];
  logic [AW:0]  wbin, wgray, rbin, rgray;
  logic [AW:0]  rgray_w1, rgray_w2, wgray_r1, wgray_r2;

  function automatic logic [AW:0] b2g(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // write side
  logic [AW:0] wbin_n;
  assign wbin_n   = wbin + 1'b1;
  assign wr_ready = (wgray != {~rgray_w2[AW:AW-1], rgray_w2[AW-2:0]});

  always_ff @(posedge wr_clk) begin
    if (wr_valid && wr_ready) mem[wbin[AW-1:0]] <= wr_data;
  end

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wr_valid && wr_ready) begin
        wbin  <= wbin_n;
        wgray <= b2g(wbin_n);
      end
    end
  end

  // read side
  logic [AW:0] rbin_n;
  assign rbin_n   = rbin + 1'b1;
  assign rd_valid = (rgray != wgray_r2);
  assign rd_data  = mem[rbin[AW-1:0]];

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (rd_valid && rd_ready) begin
        rbin  <= rbin_n;
        rgray <= b2g(rbin_n);
      end
    end
  end
endmodule
