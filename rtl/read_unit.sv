// read_unit: ReadInp / ReadWgt, the units that fill the cores' operand buffers.
//
// Both units have the same structure, so one module serves for both. On
// `start` the unit takes `n_tiles` tiles of ROWS rows x k_len INT8 values from
// its 32-bit AXI-stream (four values per word, lowest k in the lowest byte,
// rows one after another, tiles one after another) and writes them into the
// buffers of the cores:
//   broadcast = 1: one tile (n_tiles is ignored) written to all C buffers at
//                  once, the tile shared by all cores;
//   broadcast = 0: tile t is written only to core t's buffer (partitioned).
// ReadInp broadcasts in Input-Broadcast mode and partitions in Weight-Broadcast
// mode; ReadWgt does the opposite. The unit accepts one word per cycle while
// the stream is valid and signals `done` (one-cycle pulse) after the last word
// has been written, i.e. ROWS*k_len/4*tiles + 1 cycles after `start` with an
// uninterrupted stream. The stream layout and the start/done handshake are this
// design's choices; the broadcast/partition behaviour is the paper's.
module read_unit
  import flexvit_pkg::*;
#(
  parameter int unsigned C    = C_DEF,
  parameter int unsigned ROWS = TN_DEF,
  parameter int unsigned TK   = TK_DEF
) (
  input  logic                              clk,
  input  logic                              rst_n,
  // control from the scheduler
  input  logic                              start,
  input  logic                              broadcast,
  input  logic [$clog2(C+1)-1:0]            n_tiles,
  input  logic [$clog2(TK):0]               k_len,   // multiple of 4, 4..TK
  output logic                              busy,
  output logic                              done,
  // AXI-stream slave
  input  logic [AXIS_W-1:0]                 s_tdata,
  input  logic                              s_tvalid,
  output logic                              s_tready,
  // buffer write port
  output logic [C-1:0]                      wr_en,
  output logic [$clog2(ROWS)-1:0]           wr_row,
  output logic [$clog2(TK)-1:0]             wr_k,
  output logic [AXIS_W-1:0]                 wr_data
);
  localparam int unsigned CW = $clog2(C > 1 ? C : 2);

  logic                     bcast_q;
  logic [$clog2(C+1)-1:0]   ntiles_q;
  logic [$clog2(TK):0]      klen_q;
  logic [CW-1:0]            tile;
  logic [$clog2(ROWS)-1:0]  row;
  logic [$clog2(TK)-1:0]    k;
  logic                     beat, row_end, tile_end, all_end;

  assign s_tready = busy;
  assign beat     = s_tvalid && s_tready;
  assign row_end  = ({1'b0, k} + ($clog2(TK)+1)'(BYTES_PER_WORD)) == klen_q;
  assign tile_end = row_end && (row == $clog2(ROWS)'(ROWS-1));
  assign all_end  = tile_end && (bcast_q || ({1'b0, tile} + 1'b1) >= ($bits(tile)+1)'(ntiles_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
      bcast_q <= 1'b0; ntiles_q <= '0; klen_q <= '0;
      tile <= '0; row <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        bcast_q  <= broadcast;
        ntiles_q <= broadcast ? ($clog2(C+1))'(1) : n_tiles;
        klen_q   <= k_len;
        tile <= '0; row <= '0; k <= '0;
      end else if (beat) begin
        if (row_end) begin
          k <= '0;
          if (tile_end) begin
            row  <= '0;
            tile <= tile + 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end else begin
          k <= k + $clog2(TK)'(BYTES_PER_WORD);
        end
        if (all_end) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  always_comb begin
    wr_en = '0;
    if (beat) begin
      if (bcast_q) wr_en = '1;
      else         wr_en[tile] = 1'b1;
    end
  end
  assign wr_row  = row;
  assign wr_k    = k;
  assign wr_data = s_tdata;

  // AXI-stream rule: once offered, a word stays put until it is taken
  a_axis_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_tvalid && !s_tready |=> s_tvalid && $stable(s_tdata));

endmodule
