// target_controller: configuration and status registers of the ExaNet IP,
// reached by the processing system over a 32-bit AXI4-Lite bus.
//
// The paper says this block lets software set the router's coordinates and
// lattice size and probe FIFO and link status. The register map below, the
// reset values and the AXI4-Lite handshake details are this design's:
//   0x00 RW node coordinates (coord_t, bits 21:0)       reset 0
//   0x04 RW lattice size     (coord_t x,y,z)            reset x=2, y=2, z=1
//   0x08 RW dimension order  (3 x 2 bits, first at 1:0) reset Z, Y, X
//   0x0C RW dimension/port enable (bits 2:0)            reset 3'b111
//   0x10 RW arbiter: bit 0 fixed priority, bits 11:8 first input   reset 0
//   0x14 RW TRED credit threshold (bits 11:0)           reset 0
//   0x18 RW local health byte sent in credit words      reset 0
//   0x1C RW self-test control: bit 0 start (write 1, reads 0), bit 1
//           consumer enable, bits 31:16 packets to send     reset 0
//   0x20 RW self-test packet: bits 13:0 size in bytes, 20:16 type  reset 0
//   0x24 RW self-test destination coordinates and port  reset 0
//   0x40 + 4n RO status word n (n < N_STATUS)
// Other addresses read as zero; every access gets an OKAY response.
// A write needs AW and W together and is answered on B the next cycle; a
// read is answered on R the cycle after AR.
module target_controller
  import exanet_pkg::*;
#(
  parameter int unsigned N_STATUS = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // AXI4-Lite slave
  input  logic [7:0]  s_awaddr,
  input  logic        s_awvalid,
  output logic        s_awready,
  input  logic [31:0] s_wdata,
  input  logic        s_wvalid,
  output logic        s_wready,
  output logic [1:0]  s_bresp,
  output logic        s_bvalid,
  input  logic        s_bready,
  input  logic [7:0]  s_araddr,
  input  logic        s_arvalid,
  output logic        s_arready,
  output logic [31:0] s_rdata,
  output logic [1:0]  s_rresp,
  output logic        s_rvalid,
  input  logic        s_rready,
  // configuration out
  output coord_t      my_coord,
  output coord_t      lattice,
  output logic [5:0]  dim_order,
  output logic [2:0]  dim_en,
  output logic        arb_fixed,
  output logic [3:0]  arb_prio_first,
  output logic [11:0] tred,
  output logic [7:0]  health,
  output logic        st_start,   // one-cycle pulse
  output logic        st_cons_en,
  output logic [15:0] st_npkts,
  output logic [13:0] st_size,
  output logic [4:0]  st_ptype,
  output coord_t      st_dest,
  // status in
  input  logic [31:0] status [N_STATUS]
);
  logic wr_go;
  assign wr_go     = s_awvalid && s_wvalid && !s_bvalid;
  assign s_awready = wr_go;
  assign s_wready  = wr_go;
  assign s_bresp   = 2'b00;
  assign s_rresp   = 2'b00;
  assign s_arready = !s_rvalid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      my_coord       <= '0;
      lattice        <= '{x: 4'd2, y: 4'd2, z: 4'd1, default: '0};
      dim_order      <= 6'b00_01_10;
      dim_en         <= 3'b111;
      arb_fixed      <= 1'b0;
      arb_prio_first <= '0;
      tred           <= '0;
      health         <= '0;
      st_start       <= 1'b0;
      st_cons_en     <= 1'b0;
      st_npkts       <= '0;
      st_size        <= '0;
      st_ptype       <= '0;
      st_dest        <= '0;
      s_bvalid       <= 1'b0;
      s_rvalid       <= 1'b0;
      s_rdata        <= '0;
    end else begin
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      st_start <= 1'b0;
      if (wr_go) begin
        s_bvalid <= 1'b1;
        unique case (s_awaddr)
          8'h00: my_coord  <= coord_t'(s_wdata[21:0]);
          8'h04: lattice   <= coord_t'(s_wdata[21:0]);
          8'h08: dim_order <= s_wdata[5:0];
          8'h0C: dim_en    <= s_wdata[2:0];
          8'h10: begin arb_fixed <= s_wdata[0]; arb_prio_first <= s_wdata[11:8]; end
          8'h14: tred      <= s_wdata[11:0];
          8'h18: health    <= s_wdata[7:0];
          8'h1C: begin st_start <= s_wdata[0]; st_cons_en <= s_wdata[1]; st_npkts <= s_wdata[31:16]; end
          8'h20: begin st_size <= s_wdata[13:0]; st_ptype <= s_wdata[20:16]; end
          8'h24: st_dest   <= coord_t'(s_wdata[21:0]);
          default: ;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        s_rdata  <= '0;
        unique case (s_araddr)
          8'h00: s_rdata <= {10'd0, my_coord};
          8'h04: s_rdata <= {10'd0, lattice};
          8'h08: s_rdata <= {26'd0, dim_order};
          8'h0C: s_rdata <= {29'd0, dim_en};
          8'h10: s_rdata <= {20'd0, arb_prio_first, 7'd0, arb_fixed};
          8'h14: s_rdata <= {20'd0, tred};
          8'h18: s_rdata <= {24'd0, health};
          8'h1C: s_rdata <= {st_npkts, 14'd0, st_cons_en, 1'b0};
          8'h20: s_rdata <= {11'd0, st_ptype, 2'd0, st_size};
          8'h24: s_rdata <= {10'd0, st_dest};
          default:
            if (s_araddr >= 8'h40 && 32'(s_araddr[7:2]) - 16 < N_STATUS)
              s_rdata <= status[32'(s_araddr[7:2]) - 16];
        endcase
      end
    end
  end

  a_bresp_held: assert property (@(posedge clk) disable iff (!rst_n)
    s_bvalid && !s_bready |=> s_bvalid);
  a_rdata_held: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));
endmodule
