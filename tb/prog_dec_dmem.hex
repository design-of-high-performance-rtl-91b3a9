14841e25526fd6d8
1f9c4a8f7dd74c4d
110cabc01b7c44d7
ddd3b27e06511d5e
272d76f411d539f3
d52de459582a69a2
004958e1fb90611a
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
0000000000000000
000000005450414c
000000004b495241
