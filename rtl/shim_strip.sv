// shim_strip: removes the 16-byte EJFAT shim from the packet stream.
//
// The shim follows the UDP header, at bytes 28..43 of an IPv4 packet and
// 48..63 of an IPv6 packet (`in_v6`, sampled with the first beat), always
// inside the first 64-byte beat. Removing it pulls every later byte 16 places
// forward, so output beat j is made of bytes 16..63 of input beat j and bytes
// 0..15 of input beat j+1; for beat 0 the IP and UDP headers (28 or 48 bytes)
// stay where they are.
// The block therefore holds one input beat and emits it when the next one
// arrives. A last beat of 16 bytes or fewer is merged into the previous
// output beat. A last beat of more than 16 bytes leaves its remaining bytes
// as one extra output beat, and a single-beat packet leaves as one beat; both
// are emitted in the cycle after they arrive, while the first beat of the
// next packet is taken in. The input is therefore never stalled except by
// output back-pressure, and the block keeps up with an unbroken input stream
// (a packet never has more output beats than input beats).
//
// Interface: valid/ready streams with data, keep (contiguous from byte 0) and
// last. The output is registered: an output beat leaves one cycle after the
// input beat that completes it, a single-beat packet or a tail two cycles
// after its last input beat. Packets must hold the whole header (44 or 64
// bytes).
// The paper shows the shim being dropped; the realignment scheme is this
// design's.
module shim_strip
  import ejfat_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_data,
  input  keep_t in_keep,
  input  logic  in_last,
  input  logic  in_v6,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_data,
  output keep_t out_keep,
  output logic  out_last
);

  localparam int unsigned S = SHIM_BYTES;

  logic  have_prev, prev_first, prev_v6, prev_final;
  data_t prev_data;
  keep_t prev_keep;
  logic  can_emit;

  // Bytes S.. of `p` moved down to 0.., bytes 0..S-1 of `c` placed on top;
  // for a first beat, the header bytes below the shim are kept in place.
  function automatic data_t merge(data_t p, logic first, logic v6, data_t c);
    data_t r;
    int unsigned off = v6 ? SHIM_OFF6 : SHIM_OFF4;
    r = (p >> (8 * S)) | (c << (8 * (DATA_BYTES - S)));
    if (first)
      for (int unsigned b = 0; b < SHIM_OFF6; b++)
        if (b < off) r[8*b +: 8] = p[8*b +: 8];
    return r;
  endfunction

  assign can_emit = !out_valid || out_ready;
  assign in_ready = can_emit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      have_prev  <= 1'b0;
      prev_first <= 1'b0;
      prev_v6    <= 1'b0;
      prev_final <= 1'b0;
      out_data   <= '0;
      out_keep   <= '0;
      out_last   <= 1'b0;
      prev_data  <= '0;
      prev_keep  <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (can_emit) begin
        if (have_prev && prev_final) begin
          // the held beat ends its packet on its own (a single-beat packet
          // or a tail); the input, if any, starts the next packet
          out_data  <= merge(prev_data, prev_first, prev_v6, '0);
          out_keep  <= keep_of(bytes_of(prev_keep) - S);
          out_last  <= 1'b1;
          out_valid <= 1'b1;
          have_prev <= in_valid;
          if (in_valid) begin
            prev_data  <= in_data;
            prev_keep  <= in_keep;
            prev_first <= 1'b1;
            prev_v6    <= in_v6;
            prev_final <= in_last;
          end
        end else if (in_valid) begin
          if (!have_prev) begin
            prev_data  <= in_data;
            prev_keep  <= in_keep;
            prev_first <= 1'b1;
            prev_v6    <= in_v6;
            prev_final <= in_last;
            have_prev  <= 1'b1;
          end else begin
            out_data  <= merge(prev_data, prev_first, prev_v6, in_data);
            out_valid <= 1'b1;
            if (in_last && bytes_of(in_keep) <= S) begin
              out_keep  <= keep_of(DATA_BYTES - S + bytes_of(in_keep));
              out_last  <= 1'b1;
              have_prev <= 1'b0;
            end else begin
              out_keep   <= '1;
              out_last   <= 1'b0;
              prev_data  <= in_data;
              prev_keep  <= in_keep;
              prev_first <= 1'b0;
              prev_final <= in_last;
            end
          end
        end
      end
    end
  end

  // A beat offered on the output stays unchanged until it is taken.
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data) && $stable(out_keep)
                                && $stable(out_last));

endmodule
