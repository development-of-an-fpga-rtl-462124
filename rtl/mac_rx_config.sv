// mac_rx_config -- receive side of the MAC: accepts configuration frames
// from the DAQ computer on GMII and turns them into register writes.
//
// After the preamble and SFD the frame bytes are counted and fed through the
// IEEE 802.3 CRC-32. A frame is accepted when it ends (rx_dv falls) with a
// correct FCS (CRC residue 0xDEBB20E3), without rx_er, with the DAQ EtherType
// and with at least 14 + 5 + 4 bytes. Its first five payload bytes are a
// register address (1 byte) and a 32-bit value (most significant byte
// first); acceptance raises `we` for one clock with `addr` and `wdata`.
// Frames for other EtherTypes or with a bad FCS are dropped and counted in
// `dropped`. The published design states only that the system is configured
// over Ethernet by the DAQ computer; this frame format is this
// implementation's choice. The destination address is not checked (the link
// is a direct point-to-point cable).
//
// Timing: `we` two clocks after the last FCS byte.
module mac_rx_config
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  gmii_rxd,
  input  logic        gmii_rx_dv,
  input  logic        gmii_rx_er,
  output logic        we,
  output logic [7:0]  addr,
  output logic [31:0] wdata,
  output logic [15:0] dropped
);
  typedef enum logic [1:0] {R_IDLE, R_PRE, R_DATA} rstate_e;
  rstate_e      st;
  logic [10:0]  cnt;
  logic [31:0]  crc;
  logic [15:0]  etype;
  logic         err;

  always_ff @(posedge clk) begin
    if (rst) begin
      st      <= R_IDLE;
      cnt     <= '0;
      crc     <= CRC_INIT;
      etype   <= '0;
      err     <= 1'b0;
      we      <= 1'b0;
      addr    <= '0;
      wdata   <= '0;
      dropped <= '0;
    end else begin
      we <= 1'b0;
      unique case (st)
        R_IDLE: if (gmii_rx_dv) st <= R_PRE;
        R_PRE: begin
          if (!gmii_rx_dv) st <= R_IDLE;
          else if (gmii_rxd == 8'hD5) begin
            st  <= R_DATA;
            cnt <= '0;
            crc <= CRC_INIT;
            err <= 1'b0;
          end
        end
        R_DATA: begin
          if (gmii_rx_dv) begin
            crc <= crc32_byte(crc, gmii_rxd);
            if (cnt != '1) cnt <= cnt + 1'b1;
            if (gmii_rx_er) err <= 1'b1;
            unique case (cnt)
              11'd12: etype[15:8] <= gmii_rxd;
              11'd13: etype[7:0]  <= gmii_rxd;
              11'd14: addr        <= gmii_rxd;
              11'd15: wdata[31:24] <= gmii_rxd;
              11'd16: wdata[23:16] <= gmii_rxd;
              11'd17: wdata[15:8]  <= gmii_rxd;
              11'd18: wdata[7:0]   <= gmii_rxd;
              default: ;
            endcase
          end else begin
            st <= R_IDLE;
            if (!err && crc == CRC_RESIDUE && etype == DAQ_ETHERTYPE && cnt >= 11'd23)
              we <= 1'b1;
            else
              dropped <= dropped + 1'b1;
          end
        end
        default: st <= R_IDLE;
      endcase
    end
  end
endmodule
