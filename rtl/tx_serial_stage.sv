// tx_serial_stage: third transmit stage - link initialisation, cell readout
// and 8B/10B encoding for the serializer.
//
// While init_mode is high (and until the first encoded cell is ready) the
// stage sends the initialisation ordered set, K28.5 followed by D21.4, over and
// over, so the far-end deserializer can find the bit position of a symbol and
// the byte position of a pair. Cells are only started on a pair boundary, so
// the first byte of the first cell always follows a D21.4 and never a comma:
// if init_mode falls after a comma the stage first completes the pair, which
// is the paper's one-byte delay. From then on it reads the encoded cells from
// the second double buffer in linear (wire) order, one byte per 125 MHz clock,
// back to back, so no start-of-cell marker ever appears outside the ECC
// protected bytes. If no cell is ready at a cell boundary the stage sends one
// ordered-set pair and raises the sticky `underflow` flag; with the encoder's
// slack this does not happen in normal operation (the recovery behaviour is
// this design's choice).
//
// Interface: buffer read with one clock latency (in_addr, in_data); tx_sym is
// a registered 10-bit symbol, bit 9 sent first, two clocks after the address.
// Lint note: the encoder's sym_valid output is left open; this stage sends
// a symbol every clock.
module tx_serial_stage
  import link_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       init_mode,
  input  logic       in_avail,
  output logic [9:0] in_addr,
  input  logic [7:0] in_data,
  output logic       in_done,
  output logic [9:0] tx_sym,
  output logic       sending_cells,
  output logic       underflow
);
  typedef enum logic [1:0] {SEL_K285, SEL_D214, SEL_DATA} sel_e;

  logic       in_cell;      // stage A is inside a cell
  logic       phase;        // ordered set: 0 = comma next, 1 = D21.4 next
  logic [9:0] idx;
  logic       started;
  sel_e       sel, b_sel;

  always_comb begin
    sel     = SEL_K285;
    in_addr = idx;
    in_done = 1'b0;
    if (in_cell) begin
      sel     = SEL_DATA;
      in_done = idx == 10'(CELL_BYTES - 1);
    end else if (phase) begin
      sel = SEL_D214;
    end else if (!init_mode && in_avail) begin
      sel     = SEL_DATA;        // start a cell on a pair boundary
      in_addr = '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_cell   <= 1'b0;
      phase     <= 1'b0;
      idx       <= '0;
      started   <= 1'b0;
      underflow <= 1'b0;
      b_sel     <= SEL_K285;
    end else begin
      b_sel <= sel;
      if (in_cell) begin
        if (idx == 10'(CELL_BYTES - 1)) begin
          in_cell <= 1'b0;
          idx     <= '0;
        end else begin
          idx <= idx + 10'd1;
        end
      end else if (phase) begin
        phase <= 1'b0;
      end else if (!init_mode && in_avail) begin
        in_cell <= 1'b1;
        idx     <= 10'd1;
        started <= 1'b1;
      end else begin
        phase <= 1'b1;
        if (started && !init_mode) underflow <= 1'b1;
        if (init_mode) started <= 1'b0;
      end
    end
  end

  assign sending_cells = started;

  logic [7:0] enc_data;
  always_comb begin
    case (b_sel)
      SEL_K285: enc_data = K28_5;
      SEL_D214: enc_data = D21_4;
      default:  enc_data = in_data;
    endcase
  end

  enc8b10b u_enc (
    .clk      (clk),
    .rst_n    (rst_n),
    .valid    (1'b1),
    .data     (enc_data),
    .k        (b_sel == SEL_K285),
    .sym      (tx_sym),
    .sym_valid()
  );
endmodule
