// tx_framer: builds the IEEE 802.15.4 PHY protocol data unit and emits it as
// 4-bit symbols.
//
// A frame is: preamble_len bytes of zero, the SFD byte, the PHR byte (the 7-bit
// frame length, reserved bit 0), frame_len-2 payload bytes pulled from the
// data-plane stream, and the two FCS bytes from a crc16_154 engine (low byte
// first). Each byte leaves as two symbols, low nibble first. Preamble length,
// SFD and length come from control registers, so non-standard frames can be
// sent; the standard values are 4 bytes and 0xA7.
//
// Interface: a start pulse while idle latches the settings and begins a frame;
// busy is high until the last symbol has been taken. The symbol output is a
// valid/ready stream; sym_last marks the final symbol. A byte is fetched one
// clock after the previous byte's second nibble left, so the output has a
// one-cycle bubble per byte; the spreader downstream needs a symbol only every
// 32 clocks or more. A length below 2 sends the PHR and no PSDU (own choice).
// If the payload stream is empty when a byte is due, the framer waits.
module tx_framer (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [3:0] preamble_len,
  input  logic [7:0] sfd,
  input  logic [6:0] frame_len,
  // payload stream
  input  logic [7:0] s_tdata,
  input  logic       s_tvalid,
  output logic       s_tready,
  // symbol stream
  output logic [3:0] sym_data,
  output logic       sym_valid,
  output logic       sym_last,
  input  logic       sym_ready,
  output logic       busy
);

  typedef enum logic [2:0] {F_IDLE, F_PRE, F_SFD, F_PHR, F_PAY, F_FCS0, F_FCS1, F_END} fstate_e;

  fstate_e     st;
  logic [6:0]  cnt;
  logic [7:0]  byte_q;
  logic        have, nib, last_byte;
  logic [3:0]  pre_len_q;
  logic [7:0]  sfd_q;
  logic [6:0]  len_q;
  logic        crc_init, crc_en;
  logic [15:0] crc;
  logic        crc_zero;
  logic        fetch;

  crc16_154 u_crc (.clk, .rst_n, .init(crc_init), .en(crc_en), .data(s_tdata),
                   .crc, .zero(crc_zero));

  assign fetch     = !have && (st != F_IDLE) && (st != F_END);
  assign s_tready  = fetch && (st == F_PAY);
  assign crc_en    = s_tready && s_tvalid;
  assign crc_init  = (st == F_IDLE);
  assign sym_data  = nib ? byte_q[7:4] : byte_q[3:0];
  assign sym_valid = have;
  assign sym_last  = have && nib && last_byte;
  assign busy      = (st != F_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= F_IDLE; cnt <= '0; byte_q <= '0; have <= 1'b0; nib <= 1'b0;
      last_byte <= 1'b0; pre_len_q <= '0; sfd_q <= '0; len_q <= '0;
    end else begin
      // symbol output side
      if (have && sym_ready) begin
        if (nib) begin
          have <= 1'b0;
          nib  <= 1'b0;
        end else begin
          nib <= 1'b1;
        end
      end
      // byte fetch side
      case (st)
        F_IDLE: if (start) begin
          pre_len_q <= preamble_len;
          sfd_q     <= sfd;
          len_q     <= frame_len;
          cnt       <= '0;
          last_byte <= 1'b0;
          st        <= (preamble_len == 4'd0) ? F_SFD : F_PRE;
        end
        F_PRE: if (fetch) begin
          byte_q <= 8'h00; have <= 1'b1;
          cnt    <= cnt + 1'b1;
          if (cnt[3:0] == pre_len_q - 4'd1) st <= F_SFD;
        end
        F_SFD: if (fetch) begin
          byte_q <= sfd_q; have <= 1'b1; st <= F_PHR;
        end
        F_PHR: if (fetch) begin
          byte_q <= {1'b0, len_q}; have <= 1'b1; cnt <= '0;
          if (len_q > 7'd2)       st <= F_PAY;
          else if (len_q == 7'd2) st <= F_FCS0;
          else begin
            st <= F_END; last_byte <= 1'b1;
          end
        end
        F_PAY: if (fetch && s_tvalid) begin
          byte_q <= s_tdata; have <= 1'b1;
          cnt    <= cnt + 1'b1;
          if (cnt == len_q - 7'd3) st <= F_FCS0;
        end
        F_FCS0: if (fetch) begin
          byte_q <= crc[7:0]; have <= 1'b1; st <= F_FCS1;
        end
        F_FCS1: if (fetch) begin
          byte_q <= crc[15:8]; have <= 1'b1; last_byte <= 1'b1; st <= F_END;
        end
        F_END: if (have && sym_ready && nib) st <= F_IDLE;
        default: st <= F_IDLE;
      endcase
    end
  end

  a_stable_sym: assert property (@(posedge clk) disable iff (!rst_n)
                                 sym_valid && !sym_ready |=> sym_valid && $stable(sym_data));
endmodule
