// tb_mac_rx_config -- configuration frames on GMII: a good frame writes its
// register, a frame with a corrupted FCS, with rx_er, or with a foreign
// EtherType is dropped and counted. The FCS is computed bit by bit here.
//
// The frame format is this design's own (the published design only says
// configuration arrives over Ethernet). A watchdog guards the run.
module tb_mac_rx_config;
  logic clk = 0, rst = 1;
  logic [7:0] rxd = 0;
  logic dv = 0, er = 0;
  logic we;
  logic [7:0] addr;
  logic [31:0] wdata;
  logic [15:0] dropped;
  int checks = 0, failures = 0, writes = 0;
  logic [7:0] last_a;
  logic [31:0] last_d;

  mac_rx_config dut (.clk(clk), .rst(rst), .gmii_rxd(rxd), .gmii_rx_dv(dv),
    .gmii_rx_er(er), .we(we), .addr(addr), .wdata(wdata), .dropped(dropped));
  always #4 clk = ~clk;
  always @(posedge clk) if (we) begin writes++; last_a = addr; last_d = wdata; end

  task automatic send(logic [15:0] ty, logic [7:0] a, logic [31:0] d, bit bad_fcs, bit rx_err);
    logic [7:0] f [64];
    logic [31:0] c;
    for (int i = 0; i < 6; i++) f[i] = 8'h02;
    for (int i = 6; i < 12; i++) f[i] = 8'h10 + 8'(i);
    f[12] = ty[15:8]; f[13] = ty[7:0]; f[14] = a;
    f[15] = d[31:24]; f[16] = d[23:16]; f[17] = d[15:8]; f[18] = d[7:0];
    for (int i = 19; i < 60; i++) f[i] = 8'h00;            // padding
    c = 32'hFFFF_FFFF;
    for (int i = 0; i < 60; i++)
      for (int b = 0; b < 8; b++) begin
        logic fb = c[0] ^ f[i][b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB88320;
      end
    c = ~c;
    if (bad_fcs) c ^= 32'h0000_0100;
    {f[63], f[62], f[61], f[60]} = c;
    for (int i = 0; i < 8; i++) begin
      @(negedge clk) dv = 1; rxd = (i == 7) ? 8'hD5 : 8'h55;
    end
    for (int i = 0; i < 64; i++) begin
      @(negedge clk) rxd = f[i]; er = rx_err && (i == 30);
    end
    @(negedge clk) dv = 0; er = 0; rxd = 0;
    repeat (14) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk) rst = 0;
    send(16'h88B5, 8'h00, 32'd2, 0, 0);
    checks++; if (writes != 1 || last_a != 8'h00 || last_d != 32'd2) begin failures++; $display("good frame 1"); end
    send(16'h88B5, 8'h02, 32'hDEAD_BEEF, 0, 0);
    checks++; if (writes != 2 || last_a != 8'h02 || last_d != 32'hDEAD_BEEF) begin failures++; $display("good frame 2"); end
    send(16'h88B5, 8'h00, 32'd1, 1, 0);
    checks++; if (writes != 2 || dropped != 1) begin failures++; $display("bad FCS accepted"); end
    send(16'h0800, 8'h00, 32'd1, 0, 0);
    checks++; if (writes != 2 || dropped != 2) begin failures++; $display("foreign type accepted"); end
    send(16'h88B5, 8'h00, 32'd1, 0, 1);
    checks++; if (writes != 2 || dropped != 3) begin failures++; $display("rx_er frame accepted"); end
    send(16'h88B5, 8'h04, 32'h0102_0304, 0, 0);
    checks++; if (writes != 3 || last_a != 8'h04 || last_d != 32'h0102_0304) begin failures++; $display("good frame 3"); end
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
