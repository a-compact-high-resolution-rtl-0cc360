// depp_regs: configuration and monitoring registers of the trigger controller,
// reached from the control PC through a USB bridge that presents an 8-bit
// asynchronous parallel port (the Digilent DEPP/EPP protocol).
//
// Protocol (host side asynchronous, synchronised here into clk): the host
// drives astb_n low for an address cycle or dstb_n low for a data cycle, with
// write_n low for a write.  Once the cycle is done this block raises wait_o;
// the host then releases the strobe and wait_o falls.  An address write loads
// the register pointer, an address read returns it; data cycles access the
// register the pointer selects.  On reads db_oe is high and db_o is driven.
//
// Register map (this design's own choice; the tracker design only says the
// port serves "general configuration and monitoring"):
//   0      control: bit0 trigger enable, bit1 periodic mode
//   1..3   periodic trigger interval in clk cycles, little endian (24 bits)
//   4..7   trigger counter, little endian, read only
//   8..11  coincidence counter, little endian, read only
module depp_regs #(
  parameter logic [23:0] PERIOD_DEFAULT = 24'd400000   // 100 Hz at 40 MHz
) (
  input  logic        clk,
  input  logic        rst_n,
  // DEPP bus
  input  logic        astb_n,
  input  logic        dstb_n,
  input  logic        write_n,
  input  logic [7:0]  db_i,
  output logic [7:0]  db_o,
  output logic        db_oe,
  output logic        wait_o,
  // register contents
  output logic        enable,
  output logic        periodic_mode,
  output logic [23:0] period,
  input  logic [31:0] trig_count,
  input  logic [31:0] coinc_count
);

  typedef enum logic [1:0] {S_IDLE, S_ACK} state_t;
  state_t     state;
  logic [2:0] astb_s, dstb_s;   // [2] is the synchronised value
  logic [7:0] addr;

  function automatic logic [7:0] read_reg(input logic [7:0] a);
    unique case (a)
      8'd0:    return {6'd0, periodic_mode, enable};
      8'd1:    return period[7:0];
      8'd2:    return period[15:8];
      8'd3:    return period[23:16];
      8'd4:    return trig_count[7:0];
      8'd5:    return trig_count[15:8];
      8'd6:    return trig_count[23:16];
      8'd7:    return trig_count[31:24];
      8'd8:    return coinc_count[7:0];
      8'd9:    return coinc_count[15:8];
      8'd10:   return coinc_count[23:16];
      8'd11:   return coinc_count[31:24];
      default: return 8'h00;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      astb_s <= 3'b111; dstb_s <= 3'b111;
      state <= S_IDLE; wait_o <= 1'b0; addr <= '0; db_o <= '0;
      enable <= 1'b0; periodic_mode <= 1'b0; period <= PERIOD_DEFAULT;
    end else begin
      astb_s <= {astb_s[1:0], astb_n};
      dstb_s <= {dstb_s[1:0], dstb_n};
      unique case (state)
        S_IDLE: begin
          if (!astb_s[2]) begin
            if (!write_n) addr <= db_i;
            else          db_o <= addr;
            wait_o <= 1'b1; state <= S_ACK;
          end else if (!dstb_s[2]) begin
            if (!write_n) begin
              unique case (addr)
                8'd0: begin enable <= db_i[0]; periodic_mode <= db_i[1]; end
                8'd1: period[7:0]   <= db_i;
                8'd2: period[15:8]  <= db_i;
                8'd3: period[23:16] <= db_i;
                default: ;
              endcase
            end else begin
              db_o <= read_reg(addr);
            end
            wait_o <= 1'b1; state <= S_ACK;
          end
        end
        S_ACK: begin
          if (astb_s[2] && dstb_s[2]) begin
            wait_o <= 1'b0; state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign db_oe = write_n & ~(astb_n & dstb_n);

endmodule
