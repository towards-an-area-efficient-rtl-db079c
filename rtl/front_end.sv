// front_end: block fetch and two-wide decode (IF and DC stages).
//
// On start the front end reads the block header at blk_addr, then fetches
// the block's instructions two per clock from the two read ports of the
// instruction cache data array (IF) and decodes them the next cycle (DC),
// writing instruction 2k to the even slot and 2k+1 to the odd slot of the
// instruction window. It runs decoupled from the back end: the back end may
// issue as soon as the first ready instruction is decoded.
//
// Header word (this implementation's format): [5:0] instruction count
// (1..32), [13:8] register writes, [21:16] stores. The instructions follow
// the header in consecutive words.
//
// Timing: header read one cycle, header decode one cycle, then one
// instruction pair per cycle; done rises after the last pair is decoded and
// stays until the next start. A refreshed block is not fetched again.
//
// Lint note: blk_addr is a full 32-bit word address; only the bits that index
// the IMEM_WORDS-deep instruction array are used.
module front_end
  import edge_pkg::*;
#(
  parameter int unsigned IMEM_WORDS = 4096,
  localparam int unsigned AW = $clog2(IMEM_WORDS)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [31:0]   blk_addr,
  // program load port of the instruction array
  input  logic          imem_we,
  input  logic [AW-1:0] imem_wa,
  input  logic [31:0]   imem_wd,
  // decoded instructions to the window
  output logic          dc_we   [2],
  output decoded_t      dc_d    [2],
  output rdys_t         dc_drdys[2],
  // header
  output logic [5:0]    hdr_ninsn,
  output logic [5:0]    hdr_nwr,
  output logic [5:0]    hdr_nst,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_HDR, S_RUN} state_e;
  state_e        st;
  logic [AW-1:0] base;
  logic [5:0]    fidx;      // next instruction index to fetch
  logic          f_v;       // a pair is in DC
  logic [5:0]    f_idx;
  logic [AW-1:0] ra0, ra1;
  logic [31:0]   rd0, rd1;

  icache_data #(.WORDS(IMEM_WORDS)) u_icache (
    .clk, .ra0, .rd0, .ra1, .rd1, .we(imem_we), .wa(imem_wa), .wd(imem_wd));

  always_comb begin
    if (start) begin
      ra0 = AW'(blk_addr);
      ra1 = AW'(blk_addr);
    end else begin
      ra0 = base + AW'(fidx) + AW'(1);
      ra1 = base + AW'(fidx) + AW'(2);
    end
  end

  decoder u_dec0 (.iid(f_idx[4:0]),        .raw(rd0), .d(dc_d[0]), .drdys(dc_drdys[0]));
  decoder u_dec1 (.iid(f_idx[4:0] + 5'd1), .raw(rd1), .d(dc_d[1]), .drdys(dc_drdys[1]));

  assign dc_we[0] = f_v;
  assign dc_we[1] = f_v && ((f_idx + 6'd1) < hdr_ninsn);
  assign done     = (st == S_RUN) && !f_v && (fidx >= hdr_ninsn);

  always_ff @(posedge clk) begin
    if (rst) begin
      st <= S_IDLE; f_v <= 1'b0; fidx <= '0; f_idx <= '0; base <= '0;
      hdr_ninsn <= '0; hdr_nwr <= '0; hdr_nst <= '0;
    end else if (start) begin
      st <= S_HDR; base <= AW'(blk_addr); f_v <= 1'b0; fidx <= '0;
    end else begin
      unique case (st)
        S_HDR: begin
          hdr_ninsn <= (rd0[5:0] > 6'd32) ? 6'd32 : rd0[5:0];
          hdr_nwr   <= rd0[13:8];
          hdr_nst   <= rd0[21:16];
          fidx      <= '0;
          st        <= S_RUN;
        end
        S_RUN: begin
          f_v   <= fidx < hdr_ninsn;
          f_idx <= fidx;
          if (fidx < hdr_ninsn) fidx <= fidx + 6'd2;
        end
        default: f_v <= 1'b0;
      endcase
    end
  end
endmodule
