// Memory-mapped register front end on the periphery bus.
//
// The cores program and read the regulation unit through MMIO registers on the
// periphery bus (paper, Sections V-B and V-E). This block is a TileLink-UL
// slave for single-beat 32-bit Get, PutFullData and PutPartialData requests.
// It decodes the address into the register map of bpr_pkg:
//   0x000            RPR, regulation period (cycles)
//   0x100 + 4*d      ABR of domain d, access budget per bank and period
//   0x200 + 4*c      DAR of core c, domain number
//   0x300 + 4*c      RER of core c, bit 0 enables regulation
//   0x400 + 4*(d*N_BANKS+j)  BAC of domain d, bank j (read only)
//   0x800 + 4*(c*N_BANKS+j)  monitor of core c, bank j (any write clears it)
// Registers live in the blocks that use them; this block produces one-cycle
// write strobes and a byte-merged write word, and muxes read data.
//
// Handshake: one request is accepted per cycle when no response is waiting
// (a_ready = !d_valid || d_ready). The response (AccessAck or AccessAckData)
// appears the next cycle and is held until taken. Unmapped addresses read as
// zero and ignore writes. The paper gives only the register names; the bus
// protocol, offsets and error behaviour are this design's choices.
module reg_mmio
  import bpr_pkg::*;
#(
  parameter int unsigned N_CORES   = 3,
  parameter int unsigned N_DOMAINS = 2,
  parameter int unsigned N_BANKS   = 4,
  parameter int unsigned DOM_W     = (N_DOMAINS > 1) ? $clog2(N_DOMAINS) : 1
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // periphery bus slave port
  input  logic                                       a_valid,
  output logic                                       a_ready,
  input  pb_a_t                                      a,
  output logic                                       d_valid,
  input  logic                                       d_ready,
  output pb_d_t                                      d,
  // register write side
  output logic [31:0]                                wdata,
  output logic                                       rpr_we,
  output logic [N_DOMAINS-1:0]                       abr_we,
  output logic [N_CORES-1:0]                         dar_we,
  output logic [N_CORES-1:0]                         rer_we,
  output logic [N_CORES-1:0][N_BANKS-1:0]            mon_clr,
  // register read side
  input  logic [31:0]                                rpr,
  input  logic [N_DOMAINS-1:0][31:0]                 abr,
  input  logic [N_CORES-1:0][DOM_W-1:0]              domain,
  input  logic [N_CORES-1:0]                         reg_en,
  input  logic [N_DOMAINS-1:0][N_BANKS-1:0][31:0]    bac,
  input  logic [N_CORES-1:0][N_BANKS-1:0][31:0]      mon
);

  logic        fire, is_write;
  logic [3:0]  region;
  logic [9:0]  idx;       // word index inside a region
  logic [31:0] rdata, bytemask;

  assign a_ready  = !d_valid || d_ready;
  assign fire     = a_valid && a_ready;
  assign is_write = (a.opcode == PB_A_PUT_FULL) || (a.opcode == PB_A_PUT_PARTIAL);
  assign region   = a.address[11:8];

  always_comb begin
    // RPR, ABR, DAR, RER regions hold 64 words; BAC 256; MON 512.
    unique case (region)
      4'h4, 4'h5, 4'h6, 4'h7: idx = {2'b00, a.address[9:2]};
      4'h8, 4'h9, 4'hA, 4'hB,
      4'hC, 4'hD, 4'hE, 4'hF: idx = {1'b0, a.address[10:2]};
      default:                idx = {4'b0000, a.address[7:2]};
    endcase
  end

  // read mux
  always_comb begin
    rdata = '0;
    case (region)
      RA_RPR[11:8]: if (idx == 10'd0) rdata = rpr;
      RA_ABR[11:8]: for (int i = 0; i < N_DOMAINS; i++) if (idx == 10'(i)) rdata = abr[i];
      RA_DAR[11:8]: for (int i = 0; i < N_CORES; i++)   if (idx == 10'(i)) rdata = 32'(domain[i]);
      RA_RER[11:8]: for (int i = 0; i < N_CORES; i++)   if (idx == 10'(i)) rdata = 32'(reg_en[i]);
      4'h4, 4'h5, 4'h6, 4'h7:
        for (int i = 0; i < N_DOMAINS; i++)
          for (int j = 0; j < N_BANKS; j++)
            if (idx == 10'(i * N_BANKS + j)) rdata = bac[i][j];
      default:
        for (int i = 0; i < N_CORES; i++)
          for (int j = 0; j < N_BANKS; j++)
            if (idx == 10'(i * N_BANKS + j)) rdata = mon[i][j];
    endcase
  end

  // byte-merged write word and strobes
  always_comb begin
    for (int b = 0; b < 4; b++) bytemask[8*b +: 8] = {8{a.mask[b]}};
    wdata   = (a.data & bytemask) | (rdata & ~bytemask);
    rpr_we  = '0;
    abr_we  = '0;
    dar_we  = '0;
    rer_we  = '0;
    mon_clr = '0;
    if (fire && is_write) begin
      case (region)
        RA_RPR[11:8]: rpr_we = (idx == 10'd0);
        RA_ABR[11:8]: for (int i = 0; i < N_DOMAINS; i++) abr_we[i] = (idx == 10'(i));
        RA_DAR[11:8]: for (int i = 0; i < N_CORES; i++)   dar_we[i] = (idx == 10'(i));
        RA_RER[11:8]: for (int i = 0; i < N_CORES; i++)   rer_we[i] = (idx == 10'(i));
        4'h4, 4'h5, 4'h6, 4'h7: ;  // bank access counters are read only
        default:
          for (int c = 0; c < N_CORES; c++)
            for (int j = 0; j < N_BANKS; j++)
              mon_clr[c][j] = (idx == 10'(c * N_BANKS + j));
      endcase
    end
  end

  // response register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_valid <= 1'b0;
      d       <= '0;
    end else begin
      if (fire) begin
        d_valid  <= 1'b1;
        d.opcode <= is_write ? PB_D_ACK : PB_D_ACK_DATA;
        d.size   <= a.size;
        d.source <= a.source;
        d.denied <= 1'b0;
        d.data   <= is_write ? '0 : rdata;
      end else if (d_ready) begin
        d_valid <= 1'b0;
      end
    end
  end

  // TileLink: a response stays valid and unchanged until it is taken.
  d_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (d_valid && !d_ready) |=> (d_valid && $stable(d)));

endmodule
