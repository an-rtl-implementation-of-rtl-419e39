efa72c4d
03ddead1
410dc1b2
fd78bf0f
d89e4a28
740b24bd
1ee31fe4
4795c278
266079f6
ef36474a
fb36a20f
224f7c93
b3f9b68b
d860d917
845a68d1
1ea315a4
3911803a
ac2456ec
a7d25dc9
60870135
62c83393
c152fd56
cd75f47e
baecaecb
5cbbde55
96c13020
904c07a0
59ba9bfe
0524e56c
3bfe8389
7a8f9b17
85196862
40da4917
fd13b462
1e662e4b
c8af83b1
e7491fb4
8ad0c2de
8b90b5d1
21067c87
da8ca2c9
436a1914
64fbd83c
9f91e54a
2d377c7e
148d2fa8
b10d83e2
7278da7d
f5bff7a0
5b496b9f
c81190f6
b6f4fe5c
9c23c46a
37e50109
76ce5a8d
ec3b97f0
3955610f
a0bca6e3
a3a23d53
05574025
52e80b95
6e225836
0f74e628
d9ce3dcb
