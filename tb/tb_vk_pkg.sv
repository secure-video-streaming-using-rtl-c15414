// tb_vk_pkg -- helpers shared by the validateKey testbenches.
//
// key_word() turns a 256-bit key, written as 64 hex digits with byte 0 on
// the left, into the 32-bit word the processor stores at KEY + 4*w (bytes
// 4w..4w+3, little-endian). The named keys are the reference test vectors:
// the correct key, three corrupted ("invalid") keys and two incomplete keys
// (one with its last hex digit cut, one with its first byte cut, both padded
// with zeros to 256 bits as a fixed 32-byte buffer would be).
package tb_vk_pkg;

  localparam logic [255:0] KEY_CORRECT =
    256'h7336763979244226452948404d635166546a576e5a7234753777217a25432a46;
  localparam logic [255:0] KEY_INVALID [3] = '{
    256'h472b5a391a244226452948144d635166546a576e5a72347537773b7a3f432a1e,
    256'h4d2b4a391a244226452948144d2a51662a6a3b6e1f72347537773b7a3f432a1c,
    256'h7436763979244226452948404d635166546a576e5a7234753777217a25432a46
  };
  // Each incomplete key has 63 hex digits; a 0 digit is appended to fill
  // the last byte.
  localparam logic [255:0] KEY_INCOMPLETE [2] = '{
    256'h7336763979244226452948404d635166546a576e5a7234753777217a25432a00,
    256'h36763979244226452948404d635166546a576e5a7234753777217a25432a4600
  };
  localparam logic [255:0] KEY_EMPTY = '0;

  function automatic logic [7:0] key_byte(input logic [255:0] key, input int j);
    return key[255 - 8*j -: 8];
  endfunction

  function automatic logic [31:0] key_word(input logic [255:0] key, input int w);
    return {key_byte(key, 4*w+3), key_byte(key, 4*w+2),
            key_byte(key, 4*w+1), key_byte(key, 4*w)};
  endfunction

  // A 256-bit value from $urandom.
  function automatic logic [255:0] random_key();
    logic [255:0] k;
    for (int i = 0; i < 8; i++) k[32*i +: 32] = $urandom;
    return k;
  endfunction

endpackage
