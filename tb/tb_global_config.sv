// tb_global_config -- test of the configuration registers.
//
// Checks the reset values (power mode, broadcast destination, default source
// MAC), writes from the network port and from the processor port, processor
// priority when both write in the same clock, read-back over the processor
// port and that the undefined mode value 3 is ignored. The register map and
// these rules are this design's; the published design only names the block
// and its two writers (Ethernet and processor). A watchdog guards the run.
module tb_global_config;
  import daq_pkg::*;
  logic clk = 0, rst = 1;
  logic nwe = 0, cwe = 0;
  logic [7:0] na = 0, ca = 0;
  logic [31:0] nd = 0, cd = 0, rd;
  daq_mode_e mode;
  logic [47:0] dm, sm;
  int checks = 0, failures = 0;
  global_config dut (.clk(clk), .rst(rst), .net_we(nwe), .net_addr(na), .net_wdata(nd),
    .cpu_we(cwe), .cpu_addr(ca), .cpu_wdata(cd), .cpu_rdata(rd), .mode(mode),
    .dest_mac(dm), .src_mac(sm));
  always #4 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", m); end
  endtask
  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst = 0;
    chk(mode == MODE_POWER && dm == 48'hFFFFFFFFFFFF && sm == 48'h020000_00CAFE, "reset");
    @(negedge clk) nwe = 1; na = 8'h00; nd = 32'd1;
    @(negedge clk) nwe = 0;
    chk(mode == MODE_VOLTAGE, "net write mode");
    @(negedge clk) nwe = 1; na = 8'h01; nd = 32'h0000_1122;
    @(negedge clk) na = 8'h02; nd = 32'h3344_5566;
    @(negedge clk) na = 8'h03; nd = 32'h0000_0A0B;
    @(negedge clk) na = 8'h04; nd = 32'h0C0D_0E0F;
    @(negedge clk) nwe = 0;
    chk(dm == 48'h1122_3344_5566, "dest mac");
    chk(sm == 48'h0A0B_0C0D_0E0F, "src mac");
    // simultaneous: processor wins
    @(negedge clk) nwe = 1; na = 8'h00; nd = 32'd0; cwe = 1; ca = 8'h00; cd = 32'd2;
    @(negedge clk) nwe = 0; cwe = 0;
    chk(mode == MODE_RAW, "cpu priority");
    // mode 3 is ignored
    @(negedge clk) cwe = 1; cd = 32'd3;
    @(negedge clk) cwe = 0;
    chk(mode == MODE_RAW, "illegal mode ignored");
    ca = 8'h00; #1 chk(rd == 32'd2, "read mode");
    ca = 8'h02; #1 chk(rd == 32'h3344_5566, "read dest lo");
    ca = 8'h03; #1 chk(rd == 32'h0000_0A0B, "read src hi");
    ca = 8'h77; #1 chk(rd == 32'h0, "read unmapped");
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
