// tta_interconnect: the transport buses and sockets of the processor.
//
// Every cycle each of NUM_BUSES buses executes the move in its slot of the instruction: it
// carries the value of one source port, or the slot's sign-extended immediate, to one
// destination port, provided the slot's guard holds (guard disabled, or the selected boolean
// register equal to 1, or to 0 when inverted). A destination id of 0 is an empty slot.
//
// Ports are identified by number (see tta_pkg). Each source and each destination here covers
// `span` consecutive ids starting at `base`: span 1 for a unit's port, the register count for a
// register file, whose register index is then the offset into the range and is passed out on
// src_idx / dst_idx. The result is, per destination, a write enable, the value, the opcode of
// the move and the register index. Sockets connect every port to every bus (full
// connectivity); the paper's figure shows a partial processor with a sparser, hand-chosen
// socket pattern, which this design does not copy. The bus count, 30, is the number of buses
// printed in that figure.
//
// Rules of a valid program, checked by assertions: one write per destination per cycle, and
// one register per register-file read port per cycle. The module is combinational; the clock
// only serves the assertions.
module tta_interconnect
  import tta_pkg::*;
#(
  parameter int unsigned NUM_BUSES = 30,
  parameter int unsigned NUM_SRC   = 4,
  parameter int unsigned NUM_DST   = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  move_t                 moves    [NUM_BUSES],
  input  logic [NUM_GUARDS-1:0] guards,
  input  logic [PORT_ID_W-1:0]  src_base [NUM_SRC],
  input  logic [IDX_W:0]        src_span [NUM_SRC],
  input  word_t                 src_data [NUM_SRC],
  output logic [IDX_W-1:0]      src_idx  [NUM_SRC],
  input  logic [PORT_ID_W-1:0]  dst_base [NUM_DST],
  input  logic [IDX_W:0]        dst_span [NUM_DST],
  output logic [NUM_DST-1:0]    dst_we,
  output word_t                 dst_data [NUM_DST],
  output logic [OPC_W-1:0]      dst_opc  [NUM_DST],
  output logic [IDX_W-1:0]      dst_idx  [NUM_DST],
  output word_t                 bus_data [NUM_BUSES]
);
  logic [NUM_BUSES-1:0] exec;
  logic [NUM_BUSES-1:0] src_hit [NUM_SRC];
  logic [NUM_BUSES-1:0] dst_hit [NUM_DST];

  function automatic logic in_range(input logic [PORT_ID_W-1:0] id,
                                    input logic [PORT_ID_W-1:0] base,
                                    input logic [IDX_W:0] span);
    return (id >= base) && ({1'b0, id} < {1'b0, base} + (PORT_ID_W+1)'(span));
  endfunction

  // which slots move, and which ports they address
  always_comb begin
    for (int b = 0; b < NUM_BUSES; b++) begin
      exec[b] = (moves[b].dst != '0) &&
                (!moves[b].guard_en || (guards[moves[b].guard_idx] ^ moves[b].guard_inv));
    end
    for (int i = 0; i < NUM_SRC; i++) begin
      for (int b = 0; b < NUM_BUSES; b++)
        src_hit[i][b] = exec[b] && !moves[b].src_imm &&
                        in_range(moves[b].src[PORT_ID_W-1:0], src_base[i], src_span[i]);
    end
    for (int i = 0; i < NUM_DST; i++) begin
      for (int b = 0; b < NUM_BUSES; b++)
        dst_hit[i][b] = exec[b] && in_range(moves[b].dst, dst_base[i], dst_span[i]);
    end
  end

  // register index requested from each source (register files have one read port)
  always_comb begin
    for (int i = 0; i < NUM_SRC; i++) begin
      src_idx[i] = '0;
      for (int b = 0; b < NUM_BUSES; b++)
        if (src_hit[i][b]) src_idx[i] = IDX_W'(moves[b].src[PORT_ID_W-1:0] - src_base[i]);
    end
  end

  // bus values
  always_comb begin
    for (int b = 0; b < NUM_BUSES; b++) begin
      bus_data[b] = moves[b].src_imm ? word_t'(signed'(moves[b].src)) : '0;
      for (int i = 0; i < NUM_SRC; i++)
        if (src_hit[i][b]) bus_data[b] = src_data[i];
    end
  end

  // destination writes
  always_comb begin
    for (int i = 0; i < NUM_DST; i++) begin
      dst_we[i]   = |dst_hit[i];
      dst_data[i] = '0;
      dst_opc[i]  = '0;
      dst_idx[i]  = '0;
      for (int b = 0; b < NUM_BUSES; b++) begin
        if (dst_hit[i][b]) begin
          dst_data[i] = bus_data[b];
          dst_opc[i]  = moves[b].opc;
          dst_idx[i]  = IDX_W'(moves[b].dst - dst_base[i]);
        end
      end
    end
  end

  for (genvar i = 0; i < NUM_DST; i++) begin : g_dst_chk
    a_one_write: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(dst_hit[i]))
      else $error("two moves write destination %0d in one cycle", dst_base[i]);
  end
  for (genvar i = 0; i < NUM_SRC; i++) begin : g_src_chk
    for (genvar b = 0; b < NUM_BUSES; b++) begin : g_bus
      a_one_read_index: assert property (@(posedge clk) disable iff (!rst_n)
        !src_hit[i][b] || src_idx[i] == IDX_W'(moves[b].src[PORT_ID_W-1:0] - src_base[i]))
        else $error("two registers read through one read port of source %0d", src_base[i]);
    end
  end
endmodule
