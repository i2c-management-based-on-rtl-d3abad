1234
ABCD
0F0F
