// Unpacker: turns the decoded byte stream of one MuTRiG link into Rec1 hits.
//
// A frame opens with K28.0 and closes with K28.4; K28.5 fills idle time.
// Inside a frame every six data bytes form one 48-bit hit, sent most
// significant byte first:
//   [47:43] channel [42] T bad-hit [41:27] T coarse counter (LFSR state)
//   [26:22] T fine  [21] E bad-hit [20:6] E coarse [5:1] E fine [0] E flag
// The Rec1 record keeps channel, T coarse, T fine and the energy flag and
// adds the ASIC number of the link (the parameter ASIC_ID, so those four
// output bits are constant by design). A hit is emitted (rec_valid, one cycle)
// in the cycle after its sixth byte; data bytes outside a frame, decode
// errors and incomplete hits are dropped and counted in `drop_cnt`.
// The paper only says that hits are unpacked into a record type called
// Rec1; the frame layout above is an assumed, simplified MuTRiG format.
module mutrig_unpacker
  import mu3e_pkg::*;
#(
  parameter logic [3:0] ASIC_ID = 4'd0
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [7:0]  in_data,
  input  logic        in_k,
  input  logic        in_err,
  output logic        rec_valid,
  output rec1_t       rec,
  output logic [15:0] drop_cnt
);
  logic        in_frame;
  logic [2:0]  nbytes;
  logic [39:0] sh;

  always_ff @(posedge clk) begin
    if (rst) begin
      in_frame  <= 1'b0;
      nbytes    <= '0;
      sh        <= '0;
      rec_valid <= 1'b0;
      rec       <= '0;
      drop_cnt  <= '0;
    end else begin
      rec_valid <= 1'b0;
      if (in_valid) begin
        if (in_err) begin
          in_frame <= 1'b0;
          nbytes   <= '0;
          drop_cnt <= drop_cnt + 1'b1;
        end else if (in_k) begin
          if (in_data == K28_0) begin
            in_frame <= 1'b1;
            nbytes   <= '0;
          end else if (in_data == K28_4) begin
            in_frame <= 1'b0;
            if (nbytes != 0) drop_cnt <= drop_cnt + 1'b1;
            nbytes   <= '0;
          end
        end else if (!in_frame) begin
          drop_cnt <= drop_cnt + 1'b1;
        end else if (nbytes == 3'd5) begin
          nbytes        <= '0;
          rec_valid     <= 1'b1;
          rec.asic      <= ASIC_ID;
          rec.channel   <= sh[39:35];
          rec.tcc       <= sh[33:19];
          rec.tfine     <= sh[18:14];
          rec.eflag     <= in_data[0];
        end else begin
          sh     <= {sh[31:0], in_data};
          nbytes <= nbytes + 1'b1;
        end
      end
    end
  end
endmodule
