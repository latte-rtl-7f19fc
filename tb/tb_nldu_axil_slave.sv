// tb_nldu_axil_slave: exercises the AXI4-Lite register map as a host would.
// Checks read-back of the writable registers, the weight-load pulses with
// address auto-increment, capture of an S' frame with its round number and
// defect counts, the ready flag cleared by reading ROUND, the sticky overrun
// flag and its clear, and that BVALID/RVALID wait for a slow master.
module tb_nldu_axil_slave;
  import nldu_pkg::*;
  localparam int NSBITS = 50;

  logic clk = 0, rst_n = 0;
  logic [11:0] s_awaddr = 0, s_araddr = 0;
  logic s_awvalid = 0, s_wvalid = 0, s_bready = 0, s_arvalid = 0, s_rready = 0;
  logic [31:0] s_wdata = 0;
  logic [3:0] s_wstrb = 4'hF;
  logic s_awready, s_wready, s_bvalid, s_arready, s_rvalid;
  logic [1:0] s_bresp, s_rresp;
  logic [31:0] s_rdata;
  logic [NSBITS-1:0] sp_bits = 0;
  logic sp_vld = 0;
  logic [31:0] sp_round = 0;
  logic [15:0] defects_in = 0, defects_out = 0;
  logic [1:0] local_l = 0;
  logic overrun = 0;
  logic halo_en;
  logic [1:0] global_l;
  act_t theta_m, theta_h;
  logic [SHW-1:0] shift [4];
  logic wt_we;
  logic [1:0] wt_stage;
  logic [15:0] wt_addr, wt_data;
  int checks = 0, failures = 0;

  nldu_axil_slave #(.NSBITS(NSBITS)) dut (.*);

  always #5 clk = ~clk;

  // weight-load monitor
  int nw = 0;
  logic [15:0] wa [8], wd [8];
  logic [1:0]  ws [8];
  always @(posedge clk) if (rst_n && wt_we && nw < 8) begin wa[nw] = wt_addr; wd[nw] = wt_data; ws[nw] = wt_stage; nw++; end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic axi_write(input logic [11:0] a, input logic [31:0] d, input int bdelay = 0);
    @(negedge clk);
    s_awaddr = a; s_awvalid = 1; s_wdata = d; s_wvalid = 1;
    do @(posedge clk); while (!(s_awready && s_wready));
    @(negedge clk);
    s_awvalid = 0; s_wvalid = 0;
    repeat (bdelay) @(negedge clk);
    s_bready = 1;
    do @(posedge clk); while (!s_bvalid);
    @(negedge clk);
    s_bready = 0;
  endtask

  task automatic axi_read(input logic [11:0] a, output logic [31:0] d, input int rdelay = 0);
    @(negedge clk);
    s_araddr = a; s_arvalid = 1;
    do @(posedge clk); while (!s_arready);
    @(negedge clk);
    s_arvalid = 0;
    repeat (rdelay) @(negedge clk);
    s_rready = 1;
    do @(posedge clk); while (!s_rvalid);
    d = s_rdata;
    @(negedge clk);
    s_rready = 0;
  endtask

  task automatic expect32(input logic [11:0] a, input logic [31:0] exp, input string what);
    logic [31:0] d;
    axi_read(a, d, checks % 3);
    checks++;
    if (d !== exp) begin failures++; $display("%s: read %h expected %h", what, d, exp); end
  endtask

  initial begin
    logic [31:0] d;
    logic [NSBITS-1:0] bits;
    repeat (3) @(posedge clk);
    rst_n = 1;
    expect32(12'h018, 32'h0000_1616, "THETA reset value");
    axi_write(12'h000, 32'h1);
    axi_write(12'h014, 32'h2, 3);
    axi_write(12'h018, 32'h0000_2A15);
    axi_write(12'h01C, {12'h0, 5'd9, 5'd7, 5'd5, 5'd3});
    expect32(12'h000, 32'h1, "CTRL");
    expect32(12'h014, 32'h2, "GLOBAL_L");
    expect32(12'h018, 32'h0000_2A15, "THETA");
    checks++;
    if (!halo_en || global_l != 2'd2 || theta_m != 8'sh15 || theta_h != 8'sh2A ||
        shift[0] != 5'd3 || shift[1] != 5'd5 || shift[2] != 5'd7 || shift[3] != 5'd9) begin
      failures++; $display("register outputs wrong");
    end
    // weights: layer 2, address 100, three values
    axi_write(12'h020, {14'h0, 2'd2, 16'd100});
    axi_write(12'h024, 32'h0000_0011);
    axi_write(12'h024, 32'h0000_FF22);
    axi_write(12'h024, 32'h0000_0033);
    expect32(12'h020, {14'h0, 2'd2, 16'd103}, "WADDR after three loads");
    checks++;
    if (nw != 3 || wa[0] != 100 || wa[1] != 101 || wa[2] != 102 || wd[0] != 16'h11 ||
        wd[1] != 16'hFF22 || wd[2] != 16'h33 || ws[0] != 2'd2) begin
      failures++; $display("weight load pulses wrong: %0d", nw);
    end
    // an S' frame arrives
    bits = {$urandom, $urandom};
    @(negedge clk);
    sp_bits = bits; sp_round = 32'd1234; defects_in = 16'd40; defects_out = 16'd3; sp_vld = 1; local_l = 2'b01;
    @(negedge clk);
    sp_vld = 0; sp_bits = '0;
    expect32(12'h004, 32'h1, "STATUS ready");
    expect32(12'h100, bits[31:0], "S' word 0");
    expect32(12'h104, {14'h0, bits[49:32]}, "S' word 1");
    expect32(12'h108, 32'h0, "beyond S'");
    expect32(12'h00C, {16'd40, 16'd3}, "DEFECTS");
    expect32(12'h010, 32'h1, "LOCAL_L");
    expect32(12'h008, 32'd1234, "ROUND");
    expect32(12'h004, 32'h0, "STATUS cleared by ROUND read");
    // overrun is sticky until cleared
    @(negedge clk); overrun = 1;
    @(negedge clk); overrun = 0;
    expect32(12'h004, 32'h2, "STATUS overrun");
    expect32(12'h004, 32'h2, "STATUS overrun sticky");
    axi_write(12'h004, 32'h2);
    expect32(12'h004, 32'h0, "STATUS overrun cleared");
    checks++;
    if (s_bresp != 2'b00 || s_rresp != 2'b00) begin failures++; $display("response not OKAY"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
