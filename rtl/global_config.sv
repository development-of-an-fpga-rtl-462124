// global_config -- configuration registers of the DAQ.
//
// Holds the DAQ mode (the select of the output multiplexer: power, voltage
// or raw FFT) and the destination and source MAC addresses used in the
// packet header. Registers are written from the network (configuration
// frames decoded by mac_rx_config) or from the processor core's register
// port; the processor wins if both write in the same clock. The processor
// can read every register back. The block's name and its links (from the
// MAC, to and from the processor, to the multiplexer select) follow the
// published block diagram; the register map (daq_pkg::REG_*) and the reset
// values are this implementation's choices. All ports are in the MAC (GT)
// clock domain.
//
// Timing: a write takes effect on the next clock; reads are combinational.
module global_config
  import daq_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        net_we,
  input  logic [7:0]  net_addr,
  input  logic [31:0] net_wdata,
  input  logic        cpu_we,
  input  logic [7:0]  cpu_addr,
  input  logic [31:0] cpu_wdata,
  output logic [31:0] cpu_rdata,
  output daq_mode_e   mode,
  output logic [47:0] dest_mac,
  output logic [47:0] src_mac
);
  logic        we;
  logic [7:0]  a;
  logic [31:0] d;

  assign we = cpu_we || net_we;
  assign a  = cpu_we ? cpu_addr  : net_addr;
  assign d  = cpu_we ? cpu_wdata : net_wdata;

  always_ff @(posedge clk) begin
    if (rst) begin
      mode     <= MODE_POWER;
      dest_mac <= DEF_DEST_MAC;
      src_mac  <= DEF_SRC_MAC;
    end else if (we) begin
      unique case (a)
        REG_MODE:    if (d[1:0] != 2'd3) mode <= daq_mode_e'(d[1:0]);
        REG_DEST_HI: dest_mac[47:32] <= d[15:0];
        REG_DEST_LO: dest_mac[31:0]  <= d;
        REG_SRC_HI:  src_mac[47:32]  <= d[15:0];
        REG_SRC_LO:  src_mac[31:0]   <= d;
        default: ;
      endcase
    end
  end

  always_comb begin
    unique case (cpu_addr)
      REG_MODE:    cpu_rdata = {30'd0, mode};
      REG_DEST_HI: cpu_rdata = {16'd0, dest_mac[47:32]};
      REG_DEST_LO: cpu_rdata = dest_mac[31:0];
      REG_SRC_HI:  cpu_rdata = {16'd0, src_mac[47:32]};
      REG_SRC_LO:  cpu_rdata = src_mac[31:0];
      default:     cpu_rdata = 32'd0;
    endcase
  end
endmodule
