// kelle_kv_cache: the KV cache eDRAM with its bitwise bank split.
//
// Every 16-bit element of a key or value vector is cut into its MSB byte
// (bits 15:8) and LSB byte (bits 7:0), which live in different banks so that
// the two halves can be refreshed at different rates (2DRP). There are four
// bank groups, Key MSB, Key LSB, Value MSB, Value LSB, of NB banks each
// (32 banks in all). Bank b of a group holds elements b*D/NB .. (b+1)*D/NB-1
// of a head's vector, so one word of a bank is D/NB bytes = D bits wide
// (128 bits for D = 128) and all 32 banks together deliver a whole key and
// value vector of one head in one access. The vectors of one token share
// the same address in all banks; an address is {layer-head, slot}.
//
// Access port: en with we_k/we_v writes a key and/or value vector; en with
// neither reads both, rdata_k/rdata_v valid the next cycle, reassembled from
// the byte banks (the reconstruction the paper gives to the RSA I/O path).
// Refresh ports: one for all MSB banks, one for all LSB banks, each driven
// by its own refresh controller. A request is granted in a cycle without
// an access; a granted row is read and written back over two cycles.
//
// Bank count, byte split, shared addresses and the two refresh domains
// follow the paper (Sec. on the memory subsystem, its Fig. of bank
// columns "128 bits Key MSB" etc.). Port protocol is this design's choice.
module kelle_kv_cache
  import kelle_pkg::*;
#(
  parameter int unsigned D     = 128,   // head dimension
  parameter int unsigned NB    = 8,     // banks per group
  parameter int unsigned DEPTH = 8192,  // words per bank
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned EPB  = D / NB // elements per bank word
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          we_k,
  input  logic          we_v,
  input  logic [AW-1:0] addr,
  input  data_t         wdata_k [D],
  input  data_t         wdata_v [D],
  output data_t         rdata_k [D],
  output data_t         rdata_v [D],
  input  logic          msb_ref_req,
  input  logic [AW-1:0] msb_ref_addr,
  output logic          msb_ref_gnt,
  output logic          msb_ref_done,
  input  logic          lsb_ref_req,
  input  logic [AW-1:0] lsb_ref_addr,
  output logic          lsb_ref_gnt,
  output logic          lsb_ref_done,
  output logic [31:0]   msb_ref_count,
  output logic [31:0]   lsb_ref_count
);
  // group index: 0 Key MSB, 1 Value MSB, 2 Key LSB, 3 Value LSB
  logic [4*NB-1:0] gnt, done;
  logic [31:0]     cnt [4*NB];

  for (genvar g = 0; g < 4; g++) begin : g_grp
    for (genvar b = 0; b < NB; b++) begin : g_bank
      localparam bit IS_V   = (g == 1) || (g == 3);
      localparam bit IS_MSB = (g < 2);
      logic [8*EPB-1:0] wd, rd;
      for (genvar e = 0; e < EPB; e++) begin : g_el
        data_t src;
        assign src = IS_V ? wdata_v[b*EPB+e] : wdata_k[b*EPB+e];
        assign wd[8*e +: 8] = IS_MSB ? src[15:8] : src[7:0];
      end
      kelle_edram_bank #(.DEPTH(DEPTH), .WIDTH(8*EPB)) u_bank (
        .clk      (clk),
        .rst_n    (rst_n),
        .en       (en),
        .we       (IS_V ? we_v : we_k),
        .addr     (addr),
        .wdata    (wd),
        .rdata    (rd),
        .ref_req  (IS_MSB ? msb_ref_req  : lsb_ref_req),
        .ref_addr (IS_MSB ? msb_ref_addr : lsb_ref_addr),
        .ref_gnt  (gnt[g*NB+b]),
        .ref_done (done[g*NB+b]),
        .ref_count(cnt[g*NB+b])
      );
      // reassemble 16-bit elements from the MSB and LSB banks
      for (genvar e = 0; e < EPB; e++) begin : g_rd
        if (IS_MSB && !IS_V) begin : g_km
          assign rdata_k[b*EPB+e][15:8] = rd[8*e +: 8];
        end else if (IS_MSB && IS_V) begin : g_vm
          assign rdata_v[b*EPB+e][15:8] = rd[8*e +: 8];
        end else if (!IS_V) begin : g_kl
          assign rdata_k[b*EPB+e][7:0]  = rd[8*e +: 8];
        end else begin : g_vl
          assign rdata_v[b*EPB+e][7:0]  = rd[8*e +: 8];
        end
      end
    end
  end

  // all banks of one half see the same requests and accesses, so they grant
  // and finish together
  assign msb_ref_gnt   = &gnt[2*NB-1:0];
  assign msb_ref_done  = &done[2*NB-1:0];
  assign lsb_ref_gnt   = &gnt[4*NB-1:2*NB];
  assign lsb_ref_done  = &done[4*NB-1:2*NB];
  assign msb_ref_count = cnt[0];
  assign lsb_ref_count = cnt[2*NB];
endmodule
