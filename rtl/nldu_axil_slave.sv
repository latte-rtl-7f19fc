// nldu_axil_slave: AXI4-Lite slave through which the host CPU talks to the NLDU.
//
// The published design uploads the corrected syndromes S' and receives the
// global logical state L^G_S from the host decoder over an AXI4-Lite slave;
// the register map below is this design's own. All registers are 32 bits.
//   0x00 CTRL     rw  [0] halo_en
//   0x04 STATUS   ro  [0] a new round of S' is ready  [1] stage overrun seen
//                 wo  writing 1 to bit 1 clears the overrun flag
//   0x08 ROUND    ro  round number of the S' frame; reading clears STATUS[0]
//   0x0C DEFECTS  ro  [15:0] defects left in S', [31:16] defects before
//   0x10 LOCAL_L  ro  [0] L^L logical Z flip, [1] logical X flip
//   0x14 GLOBAL_L rw  [1:0] L^G_S from the host decoder
//   0x18 THETA    rw  [7:0] theta_m, [15:8] theta_h (INT8 thresholds)
//   0x1C SHIFT    rw  requantisation shifts, 5 bits each, layers 1..4 from bit 0
//   0x20 WADDR    rw  [15:0] weight address, [17:16] layer (0..3)
//   0x24 WDATA    wo  [15:0] value; writes it and increments WADDR[15:0]
//   0x100+4i      ro  S' bits 32i..32i+31, bit index = position*2 + channel
// Writes take the address and data together (AWREADY and WREADY rise in the
// same cycle) and answer OKAY; reads answer one cycle after the address.
// Unknown addresses read 0 and ignore writes.
module nldu_axil_slave
  import nldu_pkg::*;
#(
  parameter int unsigned NSBITS      = 162,
  parameter logic [7:0]  THETA_RESET = 8'd22   // ln(4) at an assumed scale of 1/16
) (
  input  logic         clk,
  input  logic         rst_n,
  // AXI4-Lite
  input  logic [11:0]  s_awaddr,
  input  logic         s_awvalid,
  output logic         s_awready,
  input  logic [31:0]  s_wdata,
  input  logic [3:0]   s_wstrb,
  input  logic         s_wvalid,
  output logic         s_wready,
  output logic [1:0]   s_bresp,
  output logic         s_bvalid,
  input  logic         s_bready,
  input  logic [11:0]  s_araddr,
  input  logic         s_arvalid,
  output logic         s_arready,
  output logic [31:0]  s_rdata,
  output logic [1:0]   s_rresp,
  output logic         s_rvalid,
  input  logic         s_rready,
  // NLDU side
  input  logic [NSBITS-1:0] sp_bits,
  input  logic              sp_vld,
  input  logic [31:0]       sp_round,
  input  logic [15:0]       defects_in,
  input  logic [15:0]       defects_out,
  input  logic [1:0]        local_l,
  input  logic              overrun,
  output logic              halo_en,
  output logic [1:0]        global_l,
  output act_t              theta_m,
  output act_t              theta_h,
  output logic [SHW-1:0]    shift [4],
  output logic              wt_we,
  output logic [1:0]        wt_stage,
  output logic [15:0]       wt_addr,
  output logic [15:0]       wt_data
);

  localparam int unsigned NWORD = ceil_div(NSBITS, 32);

  logic [NWORD*32-1:0] sp_q;
  logic [31:0]         round_q;
  logic [15:0]         din_q, dout_q;
  logic                ready_q, ovr_q;
  logic [19:0]         shift_q;

  logic do_wr, do_rd;
  assign do_wr = s_awvalid && s_wvalid && !s_bvalid;
  assign do_rd = s_arvalid && !s_rvalid;
  assign s_awready = do_wr;
  assign s_wready  = do_wr;
  assign s_arready = do_rd;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;

  for (genvar i = 0; i < 4; i++) begin : g_sh
    assign shift[i] = shift_q[i*SHW +: SHW];
  end

  function automatic logic [31:0] rd_word(input logic [11:0] a);
    int unsigned wi;
    if (a >= 12'h100) begin
      wi = (32'(a) - 32'h100) >> 2;
      return (wi < NWORD) ? sp_q[wi*32 +: 32] : 32'h0;
    end
    unique case (a)
      12'h000: return {31'h0, halo_en};
      12'h004: return {30'h0, ovr_q, ready_q};
      12'h008: return round_q;
      12'h00C: return {din_q, dout_q};
      12'h010: return {30'h0, local_l};
      12'h014: return {30'h0, global_l};
      12'h018: return {16'h0, theta_h, theta_m};
      12'h01C: return {12'h0, shift_q};
      12'h020: return {14'h0, wt_stage, wt_addr};
      default: return 32'h0;
    endcase
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_bvalid <= 1'b0;
      s_rvalid <= 1'b0;
      s_rdata  <= '0;
      halo_en  <= 1'b0;
      global_l <= '0;
      theta_m  <= act_t'(THETA_RESET);
      theta_h  <= act_t'(THETA_RESET);
      shift_q  <= '0;
      wt_we    <= 1'b0;
      wt_stage <= '0;
      wt_addr  <= '0;
      wt_data  <= '0;
      sp_q     <= '0;
      round_q  <= '0;
      din_q    <= '0;
      dout_q   <= '0;
      ready_q  <= 1'b0;
      ovr_q    <= 1'b0;
    end else begin
      wt_we <= 1'b0;
      if (wt_we) wt_addr <= wt_addr + 16'd1;
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (overrun) ovr_q <= 1'b1;
      if (sp_vld) begin
        sp_q    <= (NWORD*32)'(sp_bits);
        round_q <= sp_round;
        din_q   <= defects_in;
        dout_q  <= defects_out;
        ready_q <= 1'b1;
      end
      if (do_wr) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          12'h000: if (s_wstrb[0]) halo_en <= s_wdata[0];
          12'h004: if (s_wstrb[0] && s_wdata[1]) ovr_q <= 1'b0;
          12'h014: if (s_wstrb[0]) global_l <= s_wdata[1:0];
          12'h018: begin
            if (s_wstrb[0]) theta_m <= act_t'(s_wdata[7:0]);
            if (s_wstrb[1]) theta_h <= act_t'(s_wdata[15:8]);
          end
          12'h01C: shift_q <= s_wdata[19:0];
          12'h020: begin
            wt_addr  <= s_wdata[15:0];
            wt_stage <= s_wdata[17:16];
          end
          12'h024: begin
            wt_data <= s_wdata[15:0];
            wt_we   <= 1'b1;
          end
          default: ;
        endcase
      end
      if (do_rd) begin
        s_rvalid <= 1'b1;
        s_rdata  <= rd_word(s_araddr);
        if (s_araddr == 12'h008 && !sp_vld) ready_q <= 1'b0;
      end
    end
  end

  // AXI rules: a response stays valid until it is taken
  a_bhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_bvalid && !s_bready |=> s_bvalid);
  a_rhold: assert property (@(posedge clk) disable iff (!rst_n)
                            s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
