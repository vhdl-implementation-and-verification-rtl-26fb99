// cpu_interface: synchronous host-processor port of the ARINC 429 core.
//
// It decodes the 9-bit CPU address into a channel, a direction and a register (map in
// arinc_pkg), adapts the 8-, 16- or 32-bit CPU data bus to the 32-bit ARINC words, and
// hands each access to the addressed channel as one-cycle read/write strobes.
//
// Handshake (cpu_ren and cpu_wen active low, all sampled on the rising clock edge):
//   cycle 0  the CPU drives cpu_add (and cpu_din) and pulls cpu_ren or cpu_wen low;
//            cpu_wait goes high at once (combinationally) and the address is latched
//   cycle 1  the access is done: write strobe, or read data captured into cpu_dout
//   cycle 2+ cpu_wait is low and cpu_dout is valid; the CPU releases the enable
// The CPU holds the enable low while cpu_wait is high and must release it for at least
// one cycle before the next access. A 32-bit data word on a narrower bus takes
// 32/CPU_DATA_WIDTH accesses at byte offsets 0, W/8, 2W/8, ... (cpu_add[1:0]):
//   write - the pieces collect in a holding register; writing the last piece pushes the
//           whole word into the Tx FIFO, so transmission starts only on a whole word;
//   read  - each piece reads the head word of the Rx FIFO; reading the last piece pops it.
// Reading a status register also tells the channel to clear its sticky bits.
// The signal names, their polarity, the synchronous operation and the meaning of cpu_wait
// follow the core's description (Table 1 there); the address map, the piece order and
// the two-cycle access are this design's choice.
module cpu_interface
  import arinc_pkg::*;
#(
  parameter int unsigned CPU_DATA_WIDTH = 16,
  parameter int unsigned NUM_RX         = 1,
  parameter int unsigned NUM_TX         = 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cpu_ren,
  input  logic                      cpu_wen,
  input  logic [8:0]                cpu_add,
  input  logic [CPU_DATA_WIDTH-1:0] cpu_din,
  output logic [CPU_DATA_WIDTH-1:0] cpu_dout,
  output logic                      cpu_wait,
  output chan_req_t                 rx_req_o   [NUM_RX],
  input  arinc_word_t               rx_rdata_i [NUM_RX],
  output chan_req_t                 tx_req_o   [NUM_TX],
  input  arinc_word_t               tx_rdata_i [NUM_TX]
);
  localparam int unsigned W      = CPU_DATA_WIDTH;
  localparam int unsigned PIECES = 32 / W;
  localparam int unsigned PW     = (PIECES > 1) ? $clog2(PIECES) : 1;
  localparam int unsigned SHIFT  = $clog2(W / 8);

  typedef enum logic [1:0] {IDLE, ACCESS, DONE} state_e;

  state_e        state;
  logic          is_write;
  logic [8:0]    addr;
  logic [W-1:0]  din;
  logic [31:0]   hold;          // pieces of a data word being written
  logic [3:0]    chan;
  logic          is_tx;
  reg_sel_e      sel;
  logic [PW-1:0] piece;
  logic          last_piece;
  logic          chan_ok;
  arinc_word_t   rdata, wword;
  logic          req_active;

  assign req_active = !cpu_ren || !cpu_wen;
  assign cpu_wait   = req_active && (state != DONE);

  always_comb begin
    chan  = addr[8:5];
    is_tx = addr[4];
    sel   = reg_sel_e'(addr[3:2]);
    if (PIECES > 1) piece = PW'(addr[1:0] >> SHIFT);
    else            piece = '0;
    last_piece = (piece == PW'(PIECES - 1));
    chan_ok    = is_tx ? (32'(chan) < NUM_TX) : (32'(chan) < NUM_RX);

    rdata = '0;
    if (is_tx) begin
      for (int unsigned i = 0; i < NUM_TX; i++) if (32'(chan) == i) rdata = tx_rdata_i[i];
    end else begin
      for (int unsigned i = 0; i < NUM_RX; i++) if (32'(chan) == i) rdata = rx_rdata_i[i];
    end

    // Whole word for a data write: the held pieces with this access's piece in place.
    wword = hold;
    wword[32'(piece) * W +: W] = din;
    if (sel != REG_DATA) wword = 32'(din[7:0]);
  end

  // Strobes go to the addressed channel only, during the ACCESS cycle.
  always_comb begin
    for (int unsigned i = 0; i < NUM_RX; i++) begin
      rx_req_o[i].sel   = sel;
      rx_req_o[i].wdata = wword;
      rx_req_o[i].wr    = (state == ACCESS) && chan_ok && !is_tx && 32'(chan) == i &&
                          is_write;
      rx_req_o[i].rd    = (state == ACCESS) && chan_ok && !is_tx && 32'(chan) == i &&
                          !is_write && (sel != REG_DATA || last_piece);
    end
    for (int unsigned i = 0; i < NUM_TX; i++) begin
      tx_req_o[i].sel   = sel;
      tx_req_o[i].wdata = wword;
      tx_req_o[i].wr    = (state == ACCESS) && chan_ok && is_tx && 32'(chan) == i &&
                          is_write && (sel != REG_DATA || last_piece);
      tx_req_o[i].rd    = (state == ACCESS) && chan_ok && is_tx && 32'(chan) == i &&
                          !is_write && (sel != REG_DATA || last_piece);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      is_write <= 1'b0;
      addr     <= '0;
      din      <= '0;
      hold     <= '0;
      cpu_dout <= '0;
    end else begin
      unique case (state)
        IDLE: if (req_active) begin
          state    <= ACCESS;
          is_write <= !cpu_wen;
          addr     <= cpu_add;
          din      <= cpu_din;
        end
        ACCESS: begin
          state <= DONE;
          if (is_write) begin
            if (sel == REG_DATA) hold <= wword;
          end else begin
            cpu_dout <= chan_ok ? rdata[32'(piece) * W +: W] : '0;
          end
        end
        DONE: if (!req_active) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  // A read and a write are never requested together.
  assert property (@(posedge clk) disable iff (!rst_n) !(!cpu_ren && !cpu_wen))
    else $error("cpu_interface: cpu_ren and cpu_wen both active");

  // The enable stays low while the core waits.
  assert property (@(posedge clk) disable iff (!rst_n) (state == ACCESS) |-> req_active)
    else $error("cpu_interface: access released while cpu_wait was high");

  initial begin
    assert (W == 8 || W == 16 || W == 32)
      else $error("cpu_interface: CPU_DATA_WIDTH must be 8, 16 or 32");
  end
endmodule
