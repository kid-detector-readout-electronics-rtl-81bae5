// gbe_mac_tx: Ethernet transmitter that carries the science records to the command
// and data handling computer over gigabit Ethernet.
//
// One byte leaves on txd/tx_en at each clock with byte_en high (byte_en models the
// 125 MHz byte clock of a GMII-style interface). A frame starts when a record is
// waiting and the inter-frame gap has passed:
//   7 x 0x55 preamble, 0xD5 start delimiter, destination MAC, source MAC,
//   EtherType, a 16-bit frame sequence number, then 8-byte records (most significant
//   byte first) for as long as one is waiting at a record boundary, at most MAX_RECS,
//   zero padding up to the 46-byte minimum payload, and the 4-byte frame check
//   sequence (CRC-32, reflected polynomial 0xEDB88320, sent low byte first).
// A record type of 0 marks the padding, so the receiver needs no length field. After
// the frame tx_en stays low for the 12-byte inter-frame gap. in_ready pops one record
// at the first byte of each record slot.
//
// The paper names the gigabit Ethernet link only; the framing above is standard
// Ethernet II and the payload layout is this design's choice. The physical layer is
// outside this module.
module gbe_mac_tx
  import kid_pkg::*;
#(
  parameter int          MAX_RECS  = 32,
  parameter logic [47:0] DST_MAC   = 48'h02_00_00_00_00_01,
  parameter logic [47:0] SRC_MAC   = 48'h02_00_00_00_00_02,
  parameter logic [15:0] ETHERTYPE = 16'h88B5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        byte_en,
  input  logic        in_valid,
  input  record_t     in_rec,
  output logic        in_ready,
  output logic [7:0]  txd,
  output logic        tx_en,
  output logic [15:0] frames_sent
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_HDR, S_REC, S_PAD, S_FCS, S_IFG} state_e;
  state_e      st;
  logic [4:0]  bcnt;        // byte within the current field
  logic [7:0]  nrec;        // records in this frame
  logic [6:0]  plen;        // payload bytes sent, saturating at 64
  logic [63:0] sh;          // record being sent
  logic [31:0] crc;
  logic [15:0] seq;

  function automatic logic [31:0] crc_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r;
    r = c ^ {24'd0, d};
    for (int i = 0; i < 8; i++) r = r[0] ? (r >> 1) ^ 32'hEDB88320 : (r >> 1);
    return r;
  endfunction

  // header bytes 0..13: dst, src, ethertype; 14..15: sequence
  logic [127:0] hdr;
  assign hdr = {DST_MAC, SRC_MAC, ETHERTYPE, seq};

  logic [7:0] nb;           // byte to send this cycle
  logic       nb_en, nb_crc;
  logic       take;
  always_comb begin
    nb = 8'h00; nb_en = 1'b0; nb_crc = 1'b0; take = 1'b0;
    unique case (st)
      S_IDLE: ;
      S_PRE:  begin nb = (bcnt == 5'd7) ? 8'hD5 : 8'h55; nb_en = 1'b1; end
      S_HDR:  begin nb = hdr[127 - 8*bcnt -: 8]; nb_en = 1'b1; nb_crc = 1'b1; end
      S_REC:  begin
                nb_en = 1'b1; nb_crc = 1'b1;
                if (bcnt == 5'd0) begin nb = in_rec[63:56]; take = 1'b1; end
                else nb = sh[63 - 8*bcnt -: 8];
              end
      S_PAD:  begin nb = 8'h00; nb_en = 1'b1; nb_crc = 1'b1; end
      S_FCS:  begin nb = ~crc[8*bcnt[1:0] +: 8]; nb_en = 1'b1; end
      S_IFG:  ;
      default: ;
    endcase
  end
  assign in_ready = byte_en && take;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; bcnt <= '0; nrec <= '0; plen <= '0; sh <= '0;
      crc <= '1; seq <= '0; txd <= '0; tx_en <= 1'b0; frames_sent <= '0;
    end else if (byte_en) begin
      txd   <= nb;
      tx_en <= nb_en;
      if (nb_crc) crc <= crc_byte(crc, nb);
      if ((st == S_REC || st == S_PAD || (st == S_HDR && bcnt >= 5'd14)) && plen != 7'd64)
        plen <= plen + 7'd1;
      if (take) sh <= in_rec;
      bcnt <= bcnt + 5'd1;
      unique case (st)
        S_IDLE: begin
          bcnt <= '0;
          if (in_valid) begin st <= S_PRE; crc <= '1; nrec <= '0; plen <= '0; end
        end
        S_PRE: if (bcnt == 5'd7)  begin st <= S_HDR; bcnt <= '0; end
        S_HDR: if (bcnt == 5'd15) begin st <= S_REC; bcnt <= '0; end
        S_REC: if (bcnt == 5'd7) begin
          bcnt <= '0;
          nrec <= nrec + 8'd1;
          if (!(in_valid && nrec + 8'd1 < 8'(MAX_RECS)))
            st <= (plen + 7'd1 < 7'd46) ? S_PAD : S_FCS;
        end
        S_PAD: if (plen + 7'd1 >= 7'd46) begin st <= S_FCS; bcnt <= '0; end
        S_FCS: if (bcnt == 5'd3)  begin st <= S_IFG; bcnt <= '0; seq <= seq + 16'd1;
                                        frames_sent <= frames_sent + 16'd1; end
        S_IFG: if (bcnt == 5'd11) begin st <= S_IDLE; bcnt <= '0; end
        default: st <= S_IDLE;
      endcase
    end
  end

  a_rec_present: assert property (@(posedge clk) disable iff (!rst_n)
                                  take && byte_en |-> in_valid);
endmodule
