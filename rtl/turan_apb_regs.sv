// turan_apb_regs: memory-mapped software interface of TuRaN, an APB slave.
//
// Software configures and reads the generator through 32-bit registers
// (byte offsets from turan_pkg):
//   0x00 CTRL     RW  [0] enable generation  [1] stall mode
//                     [2] write 1 to start characterization (reads as 0)
//   0x04 STATUS   RO  [0] r_random valid  [1] characterization running
//                     [2] characterization done
//   0x08 ENTROPY  RW  r_entropy: entropy credited per line read, with
//                     turan_pkg::ENT_FRAC fractional bits
//   0x0C LINE     RW  index of the entropy line ({set, way})
//   0x10 COUNT    RO  number of random buffers read out so far
//   0x80..0xFC    RO  r_random, 32-bit word i at 0x80 + 4*i (word 0 holds
//                     bits 31:0). Reading the last word releases the buffer
//                     so the engine refills it. Words read as 0 while the
//                     buffer is not valid.
// When a characterization run finishes, ENTROPY and LINE are loaded with its
// result; software may overwrite them afterwards.
//
// A memory-mapped buffer read through a bus slave is one of the interfaces
// the paper names (ISA instructions are another). The register map, the
// pop-on-last-word rule and hiding a partly filled buffer are this design's
// choices.
//
// Interface and timing. APB3 without wait states (pready is always 1) and
// without error responses. Writes take effect at the clock edge ending the
// access phase; read data is driven combinationally during the access phase.
// prof_start and rr_consume are one-cycle pulses.
module turan_apb_regs #(
  parameter int unsigned NUM_LINES = turan_pkg::NUM_LINES,
  parameter int unsigned RR_BITS   = turan_pkg::RR_BITS,
  localparam int unsigned IDX_W    = $clog2(NUM_LINES),
  localparam int unsigned AW       = turan_pkg::APB_AW,
  localparam int unsigned EW       = turan_pkg::ENT_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // APB
  input  logic               psel,
  input  logic               penable,
  input  logic               pwrite,
  input  logic [AW-1:0]      paddr,
  input  logic [31:0]        pwdata,
  output logic [31:0]        prdata,
  output logic               pready,
  // to the engines
  output logic               cfg_enable,
  output logic               cfg_stall_mode,
  output logic [EW-1:0]      cfg_entropy,
  output logic [IDX_W-1:0]   cfg_line,
  output logic               prof_start,
  output logic               rr_consume,
  // from the engines
  input  logic               rr_valid,
  input  logic [RR_BITS-1:0] rr_data,
  input  logic               prof_busy,
  input  logic               prof_done,
  input  logic [IDX_W-1:0]   prof_line,
  input  logic [EW-1:0]      prof_entropy
);

  localparam int unsigned RR_WORDS = RR_BITS / 32;
  localparam logic [AW-1:0] RR_LAST = turan_pkg::REG_RR_BASE + AW'(4 * (RR_WORDS - 1));

  logic               en_q, stall_q, done_q;
  logic [EW-1:0]      ent_q;
  logic [IDX_W-1:0]   line_q;
  logic [31:0]        count_q;

  logic wr, rd, rr_hit;
  logic [AW-1:0] rr_offs;
  logic [AW-3:0] rr_word;

  assign wr      = psel && penable && pwrite;
  assign rd      = psel && penable && !pwrite;
  assign rr_hit  = (paddr >= turan_pkg::REG_RR_BASE) && (paddr <= RR_LAST);
  assign rr_offs = paddr - turan_pkg::REG_RR_BASE;
  assign rr_word = rr_offs[AW-1:2];

  assign prof_start = wr && (paddr == turan_pkg::REG_CTRL) && pwdata[2];
  assign rr_consume = rd && (paddr == RR_LAST) && rr_valid;
  assign pready     = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      en_q    <= 1'b0;
      stall_q <= 1'b0;
      ent_q   <= '0;
      line_q  <= '0;
      count_q <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= prof_done;
      if (prof_done && !done_q) begin
        ent_q  <= prof_entropy;
        line_q <= prof_line;
      end
      if (wr) begin
        unique case (paddr)
          turan_pkg::REG_CTRL:    begin en_q <= pwdata[0]; stall_q <= pwdata[1]; end
          turan_pkg::REG_ENTROPY: ent_q  <= pwdata[EW-1:0];
          turan_pkg::REG_LINE:    line_q <= pwdata[IDX_W-1:0];
          default: ;
        endcase
      end
      if (rr_consume) count_q <= count_q + 1;
    end
  end

  always_comb begin
    prdata = '0;
    if (rd) begin
      if (rr_hit) begin
        if (rr_valid) prdata = rr_data[32*rr_word +: 32];
      end else begin
        unique case (paddr)
          turan_pkg::REG_CTRL:    prdata = {30'd0, stall_q, en_q};
          turan_pkg::REG_STATUS:  prdata = {29'd0, prof_done, prof_busy, rr_valid};
          turan_pkg::REG_ENTROPY: prdata = 32'(ent_q);
          turan_pkg::REG_LINE:    prdata = 32'(line_q);
          turan_pkg::REG_COUNT:   prdata = count_q;
          default:                prdata = '0;
        endcase
      end
    end
  end

  assign cfg_enable     = en_q;
  assign cfg_stall_mode = stall_q;
  assign cfg_entropy    = ent_q;
  assign cfg_line       = line_q;

  // APB protocol: the access phase follows a setup phase with stable controls
  assert property (@(posedge clk) disable iff (!rst_n)
                   (psel && !penable) |=> (psel && penable))
    else $error("turan_apb_regs: setup phase not followed by access phase");
  assert property (@(posedge clk) disable iff (!rst_n)
                   (psel && !penable) |=> ($stable(paddr) && $stable(pwrite)))
    else $error("turan_apb_regs: address or direction changed during a transfer");

endmodule
