// nvr: non-volatile register (NVR) emulated with a volatile block RAM.
//
// What makes it "non-volatile" is what it ignores: the emulated power failure
// POWER_RESET never clears the memory, while the FPGA hardware RESET wipes it
// through the reset block, since on an FPGA the RAM would otherwise keep data
// that a real device would not have had. An input multiplexer and an output
// multiplexer, both selected by {POWER_RESET, RESET}, decide who drives the
// RAM and what DOUT shows:
//   00  normal: EN (OR-ed with BUSY), WE, ADDR, DIN drive the RAM, DOUT = RAM
//   01  FPGA reset: the reset block drives the RAM, DOUT = 0
//   11  FPGA reset during power failure: same as 01
//   10  power failure: RAM inputs all zero (no access), DOUT = 0
// The NV register emulator (nvre) adds the NV access delay: after an access is
// accepted BUSY stays high for DELAY_NS/CLK_PERIOD_NS cycles, during which
// WE, ADDR and DIN must not change; DOUT of a read is valid once BUSY is low.
// EN may drop after the accepting edge, because BUSY keeps the RAM enabled.
//
// Write atomicity: the RAM stores the word on the accepting edge itself, so a
// power failure during BUSY cannot leave the word half written: an accepted
// write always completes. The multiplexer encodings, the OR of EN with BUSY
// and the zero outputs follow the paper's block diagram; storing at the
// accepting edge is this design's way of meeting the completion guarantee.
module nvr #(
  parameter int unsigned DEPTH         = 4,
  parameter int unsigned DATA_W        = 16,
  parameter int unsigned DELAY_NS      = 80,
  parameter int unsigned CLK_PERIOD_NS = 10,
  localparam int unsigned AW           = DEPTH > 1 ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              reset,        // FPGA hardware reset
  input  logic              power_reset,  // emulated power failure
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [DATA_W-1:0] din,
  output logic [DATA_W-1:0] dout,
  output logic              busy,
  output logic              busy_sig
);
  logic              rb_en, rb_we;
  logic [AW-1:0]     rb_addr;
  logic [DATA_W-1:0] rb_din;

  logic              m_en, m_we;
  logic [AW-1:0]     m_addr;
  logic [DATA_W-1:0] m_din;
  logic [DATA_W-1:0] ram_dout;

  logic [1:0] sel;
  assign sel = {power_reset, reset};

  reset_block #(.DEPTH(DEPTH), .DATA_W(DATA_W)) u_rb (
    .clk, .rst(reset), .en(rb_en), .we(rb_we), .addr(rb_addr), .din(rb_din)
  );

  // Memory multiplexer.
  always_comb begin
    unique case (sel)
      2'b00: begin
        m_en = en | busy; m_we = we; m_addr = addr; m_din = din;
      end
      2'b10: begin
        m_en = 1'b0; m_we = 1'b0; m_addr = '0; m_din = '0;
      end
      default: begin  // 01, 11
        m_en = rb_en; m_we = rb_we; m_addr = rb_addr; m_din = rb_din;
      end
    endcase
  end

  nvr_bram #(.DEPTH(DEPTH), .DATA_W(DATA_W)) u_ram (
    .clk, .en(m_en), .we(m_we), .addr(m_addr), .din(m_din), .dout(ram_dout)
  );

  nvre #(.DELAY_NS(DELAY_NS), .CLK_PERIOD_NS(CLK_PERIOD_NS)) u_nvre (
    .clk, .rst(reset), .en(m_en), .busy, .busy_sig
  );

  // Output multiplexer.
  assign dout = (sel == 2'b00) ? ram_dout : '0;

  // Access rule: while BUSY, the memory inputs must hold still.
  logic              prev_normal;
  logic              prev_we;
  logic [AW-1:0]     prev_addr;
  logic [DATA_W-1:0] prev_din;
  always_ff @(posedge clk) begin
    prev_normal <= (sel == 2'b00);
    prev_we     <= we;
    prev_addr   <= addr;
    prev_din    <= din;
    if (prev_normal && sel == 2'b00 && busy)
      assert ({we, addr, din} == {prev_we, prev_addr, prev_din})
        else $error("nvr: WE/ADDR/DIN changed while BUSY");
  end
endmodule
